// tb_scdq_read_ctrl: self-checking test of the SCDQ read controller.
// The testbench plays the rest of the delay structure: it keeps the PRQ and
// POQ as SystemVerilog queues, returns the PRQ head one cycle after a memory
// read, answers the pruning-filter questions from its own WVU table, captures
// POQ writes, and on eot_done turns the POQ into the next PRQ. Random new
// events and one EOT are added every timestep and out_ready is random.
// Checked: every delivered event (address, delay level) in order, every POQ
// write (address, counter one lower) in order, the memory addresses used,
// that the EOT comes out last in its timestep, that with the POQ held full
// kept events are dropped and the overflow flag is raised, and that an
// unstalled run delivers one event every two cycles. Every input the
// testbench gives the controller changes only on a falling clock edge or
// through a nonblocking assignment, so nothing races the controller's flops.
module tb_scdq_read_ctrl;
  import scdq_pkg::*;
  localparam int unsigned N = 6, D = 5;
  localparam int unsigned DEPTH = 64;
  localparam int unsigned AW = $clog2(DEPTH), QAW = AW - 1;

  logic clk = 1'b0;
  always #5 clk = !clk;

  logic rst_n, prq_sel, prq_empty, prq_pop, mem_re, deliver, keep, poq_full, poq_push, mem_we;
  logic out_valid, out_ready, eot_done, poq_overflow;
  logic [QAW-1:0] prq_rd_ptr, poq_wr_ptr;
  logic [AW-1:0] mem_raddr, mem_waddr;
  event_t mem_rdata, cur_ev, mem_wdata;
  cnt_t delay, out_delay;
  addr_t out_addr;

  scdq_read_ctrl #(.DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  logic [D-1:0] wvu [N];
  event_t prq[$], poq[$];
  int exp_out[$], exp_poq[$];   // packed {addr, delay} / {addr, cnt}
  int force_full, n_out, n_poq, n_skip, n_retire, n_eot, first_fire, last_fire, cyc, fires;

  // reference pruning filter (independent of the RTL one)
  function automatic void judge(input event_t e, output int dl, output int kp, output int dly);
    int last;
    dly = int'(D) - 1 - int'(e.cnt);
    last = -1;
    dl = 0; kp = 0;
    if (int'(e.addr) < int'(N)) begin
      int a;
      a = int'(e.addr);
      for (int d = 0; d < int'(D); d++) if (wvu[a][d]) last = d;
      dl = int'(wvu[a][dly]);
      kp = int'(last > dly);
    end
  endfunction

  always_comb begin
    int a, b, c;
    judge(cur_ev, a, b, c);
    deliver = (a != 0);
    keep    = (b != 0);
    delay   = cnt_t'(c);
  end

  assign poq_full  = (force_full != 0);

  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if (mem_re) begin
        event_t e;
        int dl, kp, dly;
        check(int'(mem_raddr), int'({prq_sel, prq_rd_ptr}), "read address");
        e = prq.pop_front();
        prq_empty <= (prq.size() == 0);
        mem_rdata <= e;
        prq_rd_ptr <= prq_rd_ptr + 1'b1;
        judge(e, dl, kp, dly);
        if (is_eot(e.addr)) exp_out.push_back(int'({e.addr, 6'd0}));
        else begin
          if (dl != 0) exp_out.push_back(int'({e.addr, cnt_t'(dly)}));
          else n_skip++;
          if (kp != 0 && force_full == 0) exp_poq.push_back(int'({e.addr, e.cnt - cnt_t'(1)}));
          if (kp == 0) n_retire++;
        end
      end
      if (out_valid && out_ready) begin
        int exp;
        exp = (exp_out.size() > 0) ? exp_out.pop_front() : -1;
        check(int'({out_addr, out_delay}), exp, "delivered event");
        if (is_eot(out_addr)) n_eot++; else n_out++;
        fires++;
        if (first_fire < 0) first_fire = cyc;
        last_fire = cyc;
      end
      if (mem_we) begin
        int exp;
        check(int'(mem_waddr), int'({!prq_sel, poq_wr_ptr}), "POQ write address");
        check(int'(force_full), 0, "no POQ write while full");
        exp = (exp_poq.size() > 0) ? exp_poq.pop_front() : -1;
        check(int'(mem_wdata), exp, "POQ entry");
        poq.push_back(mem_wdata);
        poq_wr_ptr <= poq_wr_ptr + 1'b1;
        n_poq++;
      end
      if (eot_done) begin
        check(prq.size(), 0, "PRQ drained at EOT");
        check(exp_out.size(), 0, "all deliveries made before swap");
        check(exp_poq.size(), 0, "all POQ writes made before swap");
        prq = poq;
        poq = {};
        prq_empty <= (prq.size() == 0);
        prq_sel <= !prq_sel;
        prq_rd_ptr <= '0;
        poq_wr_ptr <= '0;
      end
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_timestep(input int n_new, input int ready_pct);
    for (int k = 0; k < n_new; k++)
      prq.push_back('{addr: addr_t'($urandom % (N + 1)), cnt: cnt_t'(D - 1)});
    prq.push_back('{addr: EOT_ADDR, cnt: '0});
    prq_empty = 0;
    while (1) begin
      @(negedge clk);
      out_ready = ($urandom % 100) < ready_pct;
      #1;
      if (eot_done) break;     // the swap happens at the coming rising edge
    end
    @(negedge clk);
  endtask

  initial begin
    rst_n = 0; prq_empty = 1; prq_sel = 0; prq_rd_ptr = '0; poq_wr_ptr = '0; mem_rdata = '0; out_ready = 0;
    force_full = 0; n_out = 0; n_poq = 0; n_skip = 0; n_retire = 0; n_eot = 0;
    first_fire = -1; last_fire = 0; cyc = 0; fires = 0;
    for (int i = 0; i < int'(N); i++) wvu[i] = D'($urandom);
    wvu[0] = '1;
    wvu[1] = D'(1);          // delivered at delay 0 only, never kept
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    for (int t = 0; t < 40; t++) run_timestep($urandom % 6, 60);
    // POQ held full: kept events are dropped, flag goes up, no deadlock
    check(int'(poq_overflow), 0, "no overflow yet");
    force_full = 1;
    run_timestep(5, 100);
    check(int'(poq_overflow), 1, "overflow flagged");
    force_full = 0;
    for (int t = 0; t < 6; t++) run_timestep(0, 100);   // drain the circulating events
    // throughput: 20 always-delivered events, output always ready
    fires = 0; first_fire = -1;
    for (int k = 0; k < 20; k++) prq.push_back('{addr: 0, cnt: cnt_t'(D - 1)});
    prq.push_back('{addr: EOT_ADDR, cnt: '0});
    prq_empty = 0;
    out_ready = 1;
    #1;
    while (!eot_done) begin
      @(negedge clk);
      #1;
    end
    @(negedge clk);
    check(last_fire - first_fire, 2 * 20, "21 deliveries in 40 cycles");
    checks++;
    if (n_out == 0 || n_poq == 0 || n_skip == 0 || n_retire == 0 || n_eot < 40) begin
      failures++;
      $display("FAIL coverage");
    end
    $display("delivered %0d poq writes %0d skipped %0d retired %0d eot %0d", n_out, n_poq, n_skip, n_retire, n_eot);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
