// tb_scdq_shd_models: the Delay IP, at its default size, under the traffic of
// the three spiking networks for the Spiking Heidelberg Digits task,
// 700-48-48-20, 700-32-32-20 and 700-24-24-20. Each network has one delay
// structure in front of its second hidden layer (fed by hidden layer 1) and
// one in front of its output layer (fed by hidden layer 2): six instances,
// run side by side.
//
// Per instance: 64 timesteps, each presynaptic neuron spiking with a fixed
// probability so that the layer emits its average spike count per inference
// (545, 535 / 401, 385 / 272, 308), and each WVU row holding 15 useful delay
// levels out of the even levels 0..58 (maximum delay 60, stride 2, pruned to
// 15 delays). Then 60 empty timesteps flush the queue. Every delivery is
// compared with a reference model (a spike of neuron i in timestep t is due
// at t+d for every d with WVU[i][d] = 1); none may be missing or unexpected,
// no overflow may occur and the queues must end empty. Peak fill and the
// clock cycles for the 64 timesteps are printed per instance.
module tb_scdq_shd_models;
  import scdq_pkg::*;

  localparam int unsigned D = 60, STEPS = 64, NCASE = 6;
  localparam int unsigned CASE_I     [NCASE] = '{48, 48, 32, 32, 24, 24};
  localparam int unsigned CASE_SPIKES[NCASE] = '{545, 535, 401, 385, 272, 308};

  int checks = 0, failures = 0;
  int finished = 0;

  logic clk = 1'b0;
  always #1 clk = !clk;
  logic rst_n;

  initial begin
    rst_n = 0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar c = 0; c < int'(NCASE); c++) begin : g_case
    localparam int unsigned I = CASE_I[c];
    localparam int unsigned SPIKES = CASE_SPIKES[c];

    logic  in_valid, in_ready, out_valid, out_ready, cfg_we, ovf, pend;
    addr_t in_addr, out_addr;
    cnt_t  out_delay;
    logic [5:0] cfg_row;
    logic [D-1:0] cfg_bits;
    logic [10:0] prq_level, poq_level;
    logic [D-1:0] wvu [I];
    int exp_cnt [int];
    int out_t, in_t, n_deliv, n_spikes, peak_prq, peak_poq, t_start, t_infer, cyc, errs;

    scdq_delay_ip dut (
      .clk, .rst_n, .in_valid, .in_ready, .in_addr,
      .out_valid, .out_ready, .out_addr, .out_delay,
      .cfg_we, .cfg_row, .cfg_bits,
      .prq_level, .poq_level, .poq_overflow(ovf), .eot_pending(pend));

    function automatic int key(input int t, input int a, input int d);
      return (t << 16) | (a << 6) | d;
    endfunction

    always @(negedge clk) out_ready <= ($urandom % 10) != 0;

    always @(posedge clk) begin
      cyc++;
      if (rst_n) begin
        if (int'(prq_level) > peak_prq) peak_prq = int'(prq_level);
        if (int'(poq_level) > peak_poq) peak_poq = int'(poq_level);
        if (out_valid && out_ready) begin
          if (is_eot(out_addr)) begin
            foreach (exp_cnt[k]) if ((k >> 16) == out_t && exp_cnt[k] != 0) begin
              errs++;
              $display("FAIL case %0d: missing delivery t=%0d addr=%0d d=%0d", c, out_t, (k >> 6) & 1023, k & 63);
            end
            out_t++;
            if (out_t == int'(STEPS)) t_infer = cyc - t_start;
          end else begin
            int k;
            k = key(out_t, int'(out_addr), int'(out_delay));
            if (!exp_cnt.exists(k) || exp_cnt[k] == 0) begin
              errs++;
              $display("FAIL case %0d: unexpected delivery t=%0d addr=%0d d=%0d", c, out_t, out_addr, out_delay);
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

    initial begin
      in_valid = 0; in_addr = '0; cfg_we = 0; cfg_row = '0; cfg_bits = '0;
      out_t = 0; in_t = 0; n_deliv = 0; n_spikes = 0; peak_prq = 0; peak_poq = 0;
      t_infer = 0; cyc = 0; errs = 0;
      @(posedge rst_n);
      for (int i = 0; i < int'(I); i++) begin
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
      for (int t = 0; t < int'(STEPS + D); t++) begin
        if (t < int'(STEPS))
          for (int i = 0; i < int'(I); i++)
            if (($urandom % (I * STEPS)) < SPIKES) begin
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
      foreach (exp_cnt[k]) if (exp_cnt[k] != 0) errs++;
      if (ovf) errs++;
      if (int'(prq_level) + int'(poq_level) != 0) errs++;
      if (n_spikes < int'(SPIKES) / 2) errs++;
      checks += n_deliv + 4;
      failures += errs;
      $display("%0d-neuron layer, %0d spikes: %0d deliveries, peak PRQ %0d POQ %0d, %0d cycles for %0d timesteps, %0d errors",
               I, n_spikes, n_deliv, peak_prq, peak_poq, t_infer, STEPS, errs);
      finished++;
    end
  end

  initial begin
    wait (finished == int'(NCASE));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
