// tb_scdq_queue: self-checking test of the PRQ/POQ FIFO bookkeeping.
// Random push/pop traffic (never pushing a full or popping an empty queue)
// against a reference kept as plain integers: fill level, both pointers with
// wrap-around, empty and full. The queue is filled to full and drained to
// empty at least once.
module tb_scdq_queue;
  localparam int unsigned DEPTH = 12;   // not a power of two: exercises wrap
  localparam int unsigned AW = $clog2(DEPTH);

  logic clk = 1'b0;
  always #5 clk = !clk;

  logic rst_n, push, pop, empty, full;
  logic [AW-1:0] wr_ptr, rd_ptr;
  logic [AW:0] count;
  int checks = 0, failures = 0;
  int m_cnt, m_wr, m_rd, saw_full, saw_empty;

  scdq_queue #(.DEPTH(DEPTH)) dut (.*);

  task automatic check(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; push = 0; pop = 0;
    m_cnt = 0; m_wr = 0; m_rd = 0; saw_full = 0; saw_empty = 0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      int bias;
      @(negedge clk);
      check(int'(count), m_cnt, "count");
      check(int'(wr_ptr), m_wr, "wr_ptr");
      check(int'(rd_ptr), m_rd, "rd_ptr");
      check(int'(empty), int'(m_cnt == 0), "empty");
      check(int'(full), int'(m_cnt == int'(DEPTH)), "full");
      if (m_cnt == int'(DEPTH)) saw_full++;
      if (m_cnt == 0 && n > 10) saw_empty++;
      bias = ((n / 200) % 2 == 0) ? 3 : 1;    // alternate fill and drain phases
      push = (($urandom % 4) < bias) && (m_cnt < int'(DEPTH) || 1'b0);
      pop  = (($urandom % 4) >= bias - 0) && m_cnt > 0 || (($urandom % 8) == 0 && m_cnt > 0);
      if (m_cnt == int'(DEPTH) && !pop) push = 0;
      if (push && m_cnt == int'(DEPTH)) push = pop;
      if (push) m_wr = (m_wr + 1) % DEPTH;
      if (pop)  m_rd = (m_rd + 1) % DEPTH;
      m_cnt = m_cnt + int'(push) - int'(pop);
    end
    checks++;
    if (saw_full == 0 || saw_empty == 0) begin
      failures++;
      $display("FAIL coverage: full seen %0d, empty seen %0d", saw_full, saw_empty);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
