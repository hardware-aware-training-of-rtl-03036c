// tb_scdq_delay_ip_full: one complete inference through the Delay IP at its
// default size (48 presynaptic neurons, 60 delay levels, 2048-word memory).
//
// The traffic is shaped like the first hidden layer of the 700-48-48-20 SHD
// network: 64 timesteps, each of the 48 neurons spiking with probability
// 545 / (48 * 64) per timestep (about 545 spikes per inference), and every
// WVU row holding 15 useful delay levels picked from the even levels
// 0, 2, ..., 58 (a maximum delay of 60 with stride 2, pruned to 15 delays).
// After the 64 timesteps, 60 empty timesteps flush the queue.
//
// A reference model independent of the queue mechanism (a spike of neuron i
// in timestep t is due at t+d for every d with WVU[i][d] = 1) is compared with
// every delivery; none may be missing when a timestep's EOT comes out, and
// no overflow may occur. The output is back-pressured 10% of the time. The
// peak fill of the two queues and the clock cycles used are printed.
module tb_scdq_delay_ip_full;
  import scdq_pkg::*;
  localparam int unsigned N = 48, D = 60, STEPS = 64;

  logic clk = 1'b0;
  always #1 clk = !clk;
  logic rst_n;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  logic  in_valid, in_ready, out_valid, out_ready, cfg_we, poq_overflow, eot_pending;
  addr_t in_addr, out_addr;
  cnt_t  out_delay;
  logic [5:0] cfg_row;
  logic [D-1:0] cfg_bits;
  logic [10:0] prq_level, poq_level;
  scdq_delay_ip dut (.*);

  logic [D-1:0] wvu [N];
  int exp_cnt [int];
  int out_t, in_t, n_deliv, n_spikes, peak_prq, peak_poq, peak_sum, t_start, t_infer;

  function automatic int key(input int t, input int a, input int d);
    return (t << 16) | (a << 6) | d;
  endfunction

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n) begin
      if (int'(prq_level) > peak_prq) peak_prq = int'(prq_level);
      if (int'(poq_level) > peak_poq) peak_poq = int'(poq_level);
      if (int'(prq_level) + int'(poq_level) > peak_sum) peak_sum = int'(prq_level) + int'(poq_level);
      if (out_valid && out_ready) begin
        if (is_eot(out_addr)) begin
          foreach (exp_cnt[k]) if ((k >> 16) == out_t && exp_cnt[k] != 0) begin
            checks++; failures++;
            $display("FAIL missing delivery t=%0d addr=%0d d=%0d", out_t, (k >> 6) & 1023, k & 63);
          end
          out_t++;
          if (out_t == int'(STEPS)) t_infer = cyc - t_start;
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

  always @(negedge clk) out_ready <= ($urandom % 10) != 0;

  task automatic send(input int a);
    in_valid = 1;
    in_addr  = addr_t'(a);
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    @(negedge clk);
    in_valid = 0;
  endtask

  initial begin
    rst_n = 0; in_valid = 0; in_addr = '0; cfg_we = 0; cfg_row = '0; cfg_bits = '0;
    out_t = 0; in_t = 0; n_deliv = 0; n_spikes = 0; peak_prq = 0; peak_poq = 0; peak_sum = 0;
    t_infer = 0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    // 15 useful levels per row out of the 30 even levels 0..58
    for (int i = 0; i < int'(N); i++) begin
      int placed;
      wvu[i] = '0;
      placed = 0;
      while (placed < 15) begin
        int d;
        d = 2 * int'($urandom % 30);
        if (!wvu[i][d]) begin wvu[i][d] = 1'b1; placed++; end
      end
      @(negedge clk); cfg_we = 1; cfg_row = 6'(i); cfg_bits = wvu[i];
    end
    @(negedge clk); cfg_we = 0;
    t_start = cyc;
    for (int t = 0; t < int'(STEPS) + int'(D); t++) begin
      if (t < int'(STEPS))
        for (int i = 0; i < int'(N); i++)
          if (($urandom % (N * STEPS)) < 545) begin
            for (int d = 0; d < int'(D); d++)
              if (wvu[i][d]) begin
                if (exp_cnt.exists(key(t + d, i, d))) exp_cnt[key(t + d, i, d)]++;
                else exp_cnt[key(t + d, i, d)] = 1;
              end
            send(i);
            n_spikes++;
          end
      send(int'(EOT_ADDR));
      in_t++;
    end
    while (out_t < in_t) @(negedge clk);
    repeat (5) @(negedge clk);
    check(int'(poq_overflow), 0, "no overflow");
    check(int'(prq_level) + int'(poq_level), 0, "queues empty after flush");
    foreach (exp_cnt[k]) if (exp_cnt[k] != 0) begin
      checks++; failures++;
      $display("FAIL left over t=%0d", k >> 16);
    end
    checks++;
    if (n_spikes < 400 || n_deliv < 15 * 300) begin
      failures++;
      $display("FAIL traffic too small");
    end
    $display("spikes %0d deliveries %0d, peak PRQ %0d POQ %0d both %0d, cycles for %0d timesteps %0d",
             n_spikes, n_deliv, peak_prq, peak_poq, peak_sum, STEPS, t_infer);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask
endmodule
