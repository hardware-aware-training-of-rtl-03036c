// tb_scdq_write_ctrl: self-checking test of the SCDQ write controller.
// Drives random presynaptic events (about one in eight an EOT), random POQ
// writes of the read controller (which take the memory port) and a random
// full PRQ, and answers every accepted EOT with an eot_done pulse a few
// cycles later. A reference model of the handshake decides each cycle
// whether the event must be taken, the memory word and address it must
// produce (counter NUM_DELAYS-1, or 0 for EOT; PRQ half selected by the role
// bit), and when the role bit must flip. It also counts the stalls seen.
module tb_scdq_write_ctrl;
  import scdq_pkg::*;
  localparam int unsigned NUM_DELAYS = 9;
  localparam int unsigned DEPTH = 32;
  localparam int unsigned AW = $clog2(DEPTH), QAW = AW - 1;

  logic clk = 1'b0;
  always #5 clk = !clk;

  logic rst_n, in_valid, in_ready, prq_full, prq_push, mem_we, rc_we, eot_done, prq_sel, eot_pending;
  addr_t in_addr;
  logic [QAW-1:0] prq_wr_ptr;
  logic [AW-1:0] mem_waddr;
  event_t mem_wdata;
  int checks = 0, failures = 0;
  bit m_pend;
  int m_sel, eot_timer, n_acc, n_eot_stall, n_full_stall, n_port_stall, n_swaps;

  scdq_write_ctrl #(.NUM_DELAYS(NUM_DELAYS), .DEPTH(DEPTH)) dut (.*);

  task automatic check(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; in_valid = 0; in_addr = '0; prq_full = 0; rc_we = 0; eot_done = 0; prq_wr_ptr = '0;
    m_sel = 0; m_pend = 0; eot_timer = -1;
    n_acc = 0; n_eot_stall = 0; n_full_stall = 0; n_port_stall = 0; n_swaps = 0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      bit exp_ready, exp_acc;
      @(negedge clk);
      in_valid   = ($urandom % 4) != 0;
      in_addr    = (($urandom % 8) == 0) ? EOT_ADDR : addr_t'($urandom % 1000);
      prq_full   = ($urandom % 10) == 0;
      rc_we      = ($urandom % 5) == 0;
      prq_wr_ptr = QAW'($urandom);
      eot_done   = (eot_timer == 0);
      #1;
      exp_ready = int'(!m_pend && !prq_full && !rc_we);
      exp_acc   = exp_ready && in_valid;
      check(int'(in_ready), exp_ready, "in_ready");
      check(int'(prq_push), exp_acc, "prq_push");
      check(int'(mem_we), exp_acc, "mem_we");
      check(int'(prq_sel), m_sel, "prq_sel");
      check(int'(eot_pending), m_pend, "eot_pending");
      if (exp_acc) begin
        n_acc++;
        check(int'(mem_waddr), m_sel * (DEPTH / 2) + int'(prq_wr_ptr), "mem_waddr");
        check(int'(mem_wdata.addr), int'(in_addr), "event addr");
        check(int'(mem_wdata.cnt), (in_addr == EOT_ADDR) ? 0 : int'(NUM_DELAYS) - 1, "event counter");
      end
      if (in_valid && m_pend) n_eot_stall++;
      if (in_valid && !m_pend && prq_full) n_full_stall++;
      if (in_valid && !m_pend && !prq_full && rc_we) n_port_stall++;
      // model update at the coming edge
      if (eot_done) begin
        m_sel = 1 - m_sel; m_pend = 0; eot_timer = -1; n_swaps++;
      end else if (exp_acc && in_addr == EOT_ADDR) begin
        m_pend = 1; eot_timer = 1 + ($urandom % 6);
      end else if (eot_timer > 0) begin
        eot_timer--;
      end
    end
    checks++;
    if (n_eot_stall == 0 || n_full_stall == 0 || n_port_stall == 0 || n_swaps < 10) begin
      failures++;
      $display("FAIL coverage");
    end
    $display("accepted %0d swaps %0d stalls: eot %0d full %0d port %0d",
             n_acc, n_swaps, n_eot_stall, n_full_stall, n_port_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
