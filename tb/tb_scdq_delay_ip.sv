// tb_scdq_delay_ip: end-to-end test of the Shared Circular Delay Queue.
//
// Instance u_fig runs the three-timestep example of a two-neuron layer with
// delays 0..2 and all synapses useful: A and B spike at t=0, B at t=1. The
// expected output order per timestep (delayed copies first, oldest first,
// then the new events) is checked event by event:
//   t=0: A0 B0 | t=1: A1 B1 B0 | t=2: A2 B2 B1 | t=3: B2.
//
// Instance dut (8 neurons, 8 delay levels, 64-word memory) gets random spikes
// for many timesteps, random input gaps and random output back-pressure, with
// a random WVU (one row left empty, one address without a row). A reference
// model independent of the queue mechanism says which (address, delay) pairs
// must come out in each timestep: a spike of neuron i in timestep t is due in
// timestep t+d for every d with WVU[i][d] = 1. Every delivery is checked
// against that multiset and none may be missing when the timestep's EOT comes
// out. One timestep is a burst, of events that are neither delivered nor kept,
// long enough to fill the PRQ half. A last phase
// overfills the POQ half: the overflow flag must rise, nothing unexpected may
// come out and the EOT must still get through.
//
// Mechanisms counted, each must occur: input stall after EOT, PRQ-full
// stall, write-port conflict stall, output back-pressure, zero-skipped
// event, retired event, buffer swap, POQ overflow.
module tb_scdq_delay_ip;
  import scdq_pkg::*;

  logic clk = 1'b0;
  always #5 clk = !clk;
  logic rst_n;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  task automatic check(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d (cycle %0d)", what, got, exp, cyc);
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- example
  logic  f_in_valid, f_in_ready, f_out_valid, f_cfg_we, f_ovf, f_pend;
  addr_t f_in_addr, f_out_addr;
  cnt_t  f_out_delay;
  logic [0:0] f_cfg_row;
  logic [2:0] f_cfg_bits;
  logic [3:0] f_prq_level, f_poq_level;
  scdq_delay_ip #(.NUM_NEURONS(2), .NUM_DELAYS(3), .DEPTH(16)) u_fig (
    .clk, .rst_n,
    .in_valid(f_in_valid), .in_ready(f_in_ready), .in_addr(f_in_addr),
    .out_valid(f_out_valid), .out_ready(1'b1), .out_addr(f_out_addr), .out_delay(f_out_delay),
    .cfg_we(f_cfg_we), .cfg_row(f_cfg_row), .cfg_bits(f_cfg_bits),
    .prq_level(f_prq_level), .poq_level(f_poq_level), .poq_overflow(f_ovf), .eot_pending(f_pend));

  int f_got[$];
  always @(posedge clk) if (rst_n && f_out_valid) f_got.push_back(int'({f_out_addr, f_out_delay}));

  // ----------------------------------------------------------------- random
  localparam int unsigned N = 8, D = 8, DEPTH = 64;
  logic  in_valid, in_ready, out_valid, out_ready, cfg_we, poq_overflow, eot_pending;
  addr_t in_addr, out_addr;
  cnt_t  out_delay;
  logic [2:0] cfg_row;
  logic [D-1:0] cfg_bits;
  logic [5:0] prq_level, poq_level;
  scdq_delay_ip #(.NUM_NEURONS(N), .NUM_DELAYS(D), .DEPTH(DEPTH)) dut (.*);

  logic [D-1:0] wvu [N];
  int exp_cnt [int];       // key: (timestep << 16) | (addr << 6) | delay
  int out_t;               // timestep of the output stream
  int in_t;                // timestep of the input stream
  bit relaxed;             // overflow phase: only check for unexpected output
  int n_eot_stall, n_full_stall, n_port_stall, n_backpressure, n_skip, n_retire, n_swap, n_deliv;

  function automatic int key(input int t, input int a, input int d);
    return (t << 16) | (a << 6) | d;
  endfunction

  // reference: a spike of neuron a in timestep t is due at t+d wherever WVU says so
  function automatic void expect_spike(input int t, input int a);
    if (a < int'(N))
      for (int d = 0; d < int'(D); d++)
        if (wvu[a][d]) begin
          if (exp_cnt.exists(key(t + d, a, d))) exp_cnt[key(t + d, a, d)]++;
          else exp_cnt[key(t + d, a, d)] = 1;
        end
  endfunction

  always @(posedge clk) begin
    if (rst_n) begin
      if (in_valid && !in_ready) begin
        if (eot_pending) n_eot_stall++;
        else if (int'(prq_level) == int'(DEPTH / 2)) n_full_stall++;
        else n_port_stall++;
      end
      if (out_valid && !out_ready) n_backpressure++;
      if (dut.u_read_ctrl.done && !dut.u_read_ctrl.cur_eot) begin
        if (!dut.deliver) n_skip++;
        if (!dut.keep) n_retire++;
      end
      if (out_valid && out_ready) begin
        if (is_eot(out_addr)) begin
          if (!relaxed) begin
            // nothing due in this timestep may be missing
            foreach (exp_cnt[k]) if ((k >> 16) == out_t && exp_cnt[k] != 0) begin
              checks++; failures++;
              $display("FAIL missing delivery t=%0d addr=%0d d=%0d", out_t, (k >> 6) & 1023, k & 63);
            end
          end
          out_t++;
          n_swap++;
        end else begin
          int k;
          k = key(out_t, int'(out_addr), int'(out_delay));
          checks++;
          if (!exp_cnt.exists(k) || exp_cnt[k] == 0) begin
            failures++;
            $display("FAIL unexpected delivery t=%0d addr=%0d d=%0d", out_t, out_addr, out_delay);
          end else exp_cnt[k]--;
          n_deliv++;
        end
      end
    end
  end

  task automatic send(input int a);
    in_valid = 1;
    in_addr  = addr_t'(a);
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    @(negedge clk);
    in_valid = 0;
  endtask

  task automatic timestep(input int n_spk, input int gap_pct, input bit dead = 0);
    for (int k = 0; k < n_spk; k++) begin
      int a;
      a = $urandom % (N + 1);          // a = N has no WVU row
      if (dead) a = (k % 2 == 0) ? 2 : int'(N);   // never delivered, never kept
      if (!relaxed) expect_spike(in_t, a);
      while (($urandom % 100) < gap_pct) @(negedge clk);
      send(a);
    end
    send(int'(EOT_ADDR));
    in_t++;
  endtask

  task automatic f_send(input int a);
    f_in_valid = 1;
    f_in_addr  = addr_t'(a);
    @(posedge clk);
    while (!f_in_ready) @(posedge clk);
    @(negedge clk);
    f_in_valid = 0;
  endtask

  initial begin
    int exp_fig[$];
    rst_n = 0;
    in_valid = 0; in_addr = '0; out_ready = 1; cfg_we = 0; cfg_row = '0; cfg_bits = '0;
    f_in_valid = 0; f_in_addr = '0; f_cfg_we = 0; f_cfg_row = '0; f_cfg_bits = '0;
    out_t = 0; in_t = 0; relaxed = 0;
    n_eot_stall = 0; n_full_stall = 0; n_port_stall = 0; n_backpressure = 0;
    n_skip = 0; n_retire = 0; n_swap = 0; n_deliv = 0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;

    // ---- worked example: A = 0, B = 1, all three delays useful
    f_cfg_we = 1; f_cfg_row = 0; f_cfg_bits = 3'b111;
    @(negedge clk); f_cfg_row = 1;
    @(negedge clk); f_cfg_we = 0;
    f_send(0); f_send(1); f_send(int'(EOT_ADDR));      // t = 0
    f_send(1); f_send(int'(EOT_ADDR));                 // t = 1
    f_send(int'(EOT_ADDR));                            // t = 2
    f_send(int'(EOT_ADDR));                            // t = 3
    repeat (30) @(negedge clk);
    // {addr, delay}: A=0, B=1, EOT=1023
    exp_fig = '{int'({10'd0, 6'd0}), int'({10'd1, 6'd0}), int'({EOT_ADDR, 6'd0}),
                int'({10'd0, 6'd1}), int'({10'd1, 6'd1}), int'({10'd1, 6'd0}), int'({EOT_ADDR, 6'd0}),
                int'({10'd0, 6'd2}), int'({10'd1, 6'd2}), int'({10'd1, 6'd1}), int'({EOT_ADDR, 6'd0}),
                int'({10'd1, 6'd2}), int'({EOT_ADDR, 6'd0})};
    check(f_got.size(), exp_fig.size(), "example: number of outputs");
    foreach (exp_fig[i])
      if (i < f_got.size()) check(f_got[i], exp_fig[i], $sformatf("example output %0d", i));
    check(int'(f_prq_level) + int'(f_poq_level), 0, "example: queues empty at the end");

    // ---- random WVU: row 2 empty, row 3 only delay 0, others random
    for (int i = 0; i < int'(N); i++) begin
      wvu[i] = (i == 2) ? '0 : (i == 3) ? D'(1) : D'($urandom);
      @(negedge clk); cfg_we = 1; cfg_row = 3'(i); cfg_bits = wvu[i];
    end
    @(negedge clk); cfg_we = 0;

    // ---- random traffic with output back-pressure
    fork
      begin
        for (int t = 0; t < 60; t++) begin
          if (t == 20) timestep(2 * int'(DEPTH), 0, 1);  // burst fills the PRQ half
          else timestep($urandom % 10, 30);
        end
        for (int t = 0; t < int'(D) + 1; t++) timestep(0, 0);   // flush
      end
      begin
        while (in_t < 60 + int'(D) + 1) begin
          @(negedge clk);
          out_ready = (in_t >= 20 && in_t <= 21) ? (($urandom % 100) < 5) : (($urandom % 100) < 70);
        end
        out_ready = 1;
      end
    join
    while (out_t < in_t) @(negedge clk);
    check(int'(prq_level) + int'(poq_level), 0, "queues empty after flush");
    check(int'(poq_overflow), 0, "no overflow in normal traffic");
    foreach (exp_cnt[k]) if (exp_cnt[k] != 0) begin
      checks++; failures++;
      $display("FAIL left over t=%0d", k >> 16);
    end

    // ---- overflow: all rows fully useful, one long burst overfills the POQ half
    relaxed = 1;
    for (int i = 0; i < int'(N); i++) begin
      @(negedge clk); cfg_we = 1; cfg_row = 3'(i); cfg_bits = '1;
      wvu[i] = '1;
    end
    @(negedge clk); cfg_we = 0;
    for (int k = 0; k < int'(DEPTH / 2) + 8; k++) begin
      expect_spike(in_t, k % int'(N));
      send(k % int'(N));
    end
    send(int'(EOT_ADDR));
    in_t++;
    while (out_t < in_t) @(negedge clk);
    check(int'(poq_overflow), 1, "overflow flagged");
    for (int t = 0; t < int'(D) + 1; t++) begin
      send(int'(EOT_ADDR));
      in_t++;
    end
    repeat (100) @(negedge clk);
    check(out_t, in_t, "every EOT got through after overflow");
    check(int'(prq_level) + int'(poq_level), 0, "queues empty after overflow");

    $display("deliveries %0d swaps %0d stalls: eot %0d prq-full %0d port %0d backpressure %0d skipped %0d retired %0d overflow %0d",
             n_deliv, n_swap, n_eot_stall, n_full_stall, n_port_stall, n_backpressure, n_skip, n_retire, int'(poq_overflow));
    checks++;
    if (n_eot_stall == 0 || n_full_stall == 0 || n_port_stall == 0 || n_backpressure == 0 ||
        n_skip == 0 || n_retire == 0 || n_swap == 0 || !poq_overflow) begin
      failures++;
      $display("FAIL a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
