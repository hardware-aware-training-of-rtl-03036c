// tb_scdq_capacity: worst-case queue capacity of the SCDQ, the scaling study
// of shared delay queues versus the circular one.
//
// Dense activity with nothing pruned: every presynaptic neuron spikes in
// every timestep and every WVU bit is set. Two sweeps, 32 instances side by
// side: 8 neurons with 1..16 delay levels, and 8 delay levels with 1..16
// neurons. While each timestep's spikes go in, the output is held off, so
// nothing drains early and the queues reach the fill that has to be
// provisioned. In steady state:
//   PRQ: I*(D-1) carried-over events + I new - 1 held by the read
//        controller + 1 EOT                                  = I*D
//   POQ: every event except those at their last delay level  = I*(D-1)
// so the two queues together need I*(2D-1) entries, linear in D, where a
// linear chain of D FIFOs needs I*D*(D+1)/2 (printed for comparison). Each
// instance checks both peaks and prints one line per point.
module tb_scdq_capacity;
  import scdq_pkg::*;

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
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar s = 0; s < 2; s++) begin : g_sweep
    for (genvar p = 1; p <= 16; p++) begin : g_point
      localparam int unsigned I = (s == 0) ? 8 : p;
      localparam int unsigned D = (s == 0) ? p : 8;
      localparam int unsigned RW = (I > 1) ? $clog2(I) : 1;

      logic  in_valid, in_ready, out_valid, out_ready, cfg_we, ovf, pend;
      addr_t in_addr, out_addr;
      cnt_t  out_delay;
      logic [RW-1:0] cfg_row;
      logic [D-1:0] cfg_bits;
      logic [8:0] prq_level, poq_level;
      int peak_prq, peak_poq, n_eot_out;

      scdq_delay_ip #(.NUM_NEURONS(I), .NUM_DELAYS(D), .DEPTH(1024)) dut (
        .clk, .rst_n, .in_valid, .in_ready, .in_addr,
        .out_valid, .out_ready, .out_addr, .out_delay,
        .cfg_we, .cfg_row, .cfg_bits,
        .prq_level, .poq_level, .poq_overflow(ovf), .eot_pending(pend));

      always @(posedge clk) begin
        if (rst_n) begin
          if (int'(prq_level) > peak_prq) peak_prq = int'(prq_level);
          if (int'(poq_level) > peak_poq) peak_poq = int'(poq_level);
          if (out_valid && out_ready && is_eot(out_addr)) n_eot_out++;
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
        in_valid = 0; in_addr = '0; out_ready = 0; cfg_we = 0; cfg_row = '0; cfg_bits = '0;
        peak_prq = 0; peak_poq = 0; n_eot_out = 0;
        @(posedge rst_n);
        for (int i = 0; i < int'(I); i++) begin
          @(negedge clk); cfg_we = 1; cfg_row = RW'(i); cfg_bits = '1;
        end
        @(negedge clk); cfg_we = 0;
        for (int t = 0; t < 2 * int'(D) + 2; t++) begin
          out_ready = 0;
          for (int i = 0; i < int'(I); i++) send(i);
          send(int'(EOT_ADDR));
          out_ready = 1;
          while (n_eot_out < t + 1) @(negedge clk);
        end
        checks += 3;
        if (peak_prq != int'(I * D)) begin
          failures++;
          $display("FAIL I=%0d D=%0d: peak PRQ %0d expected %0d", I, D, peak_prq, I * D);
        end
        if (peak_poq != int'(I * (D - 1))) begin
          failures++;
          $display("FAIL I=%0d D=%0d: peak POQ %0d expected %0d", I, D, peak_poq, I * (D - 1));
        end
        if (ovf) begin
          failures++;
          $display("FAIL I=%0d D=%0d: overflow", I, D);
        end
        $display("neurons %2d delay levels %2d: SCDQ needs %4d (PRQ %3d + POQ %3d), linear FIFO chain %4d",
                 I, D, peak_prq + peak_poq, peak_prq, peak_poq, I * D * (D + 1) / 2);
        finished++;
      end
    end
  end

  initial begin
    wait (finished == 32);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
