// tb_scdq_pruning_filter: self-checking test of the WVU pruning filter.
// Part 1 loads the two-neuron, three-delay WVU of the worked example
// (row A = 1 1 0, row B = 0 0 1 for delays 0 1 2) and checks the deliver and
// keep answers worked out by hand: A is delivered at delays 0 and 1 and leaves
// at counter 1; B is delivered only at delay 2 but kept until counter 0.
// Part 2 loads random rows into a larger filter and checks every
// (address, counter) pair, including addresses without a row and the EOT
// marker, against a reference that scans the row from the top.
module tb_scdq_pruning_filter;
  import scdq_pkg::*;

  logic clk = 1'b0;
  always #5 clk = !clk;
  logic rst_n;
  int checks = 0, failures = 0;

  task automatic check(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // small example instance
  logic        s_we;
  logic [0:0]  s_row;
  logic [2:0]  s_bits;
  event_t      s_ev;
  logic        s_deliver, s_keep;
  cnt_t        s_delay;
  scdq_pruning_filter #(.NUM_NEURONS(2), .NUM_DELAYS(3)) u_small (
    .clk, .rst_n, .cfg_we(s_we), .cfg_row(s_row), .cfg_bits(s_bits),
    .ev(s_ev), .deliver(s_deliver), .keep(s_keep), .delay(s_delay));

  // random instance
  localparam int unsigned N = 11, D = 23;
  logic          r_we;
  logic [3:0]    r_row;
  logic [D-1:0]  r_bits;
  event_t        r_ev;
  logic          r_deliver, r_keep;
  cnt_t          r_delay;
  logic [D-1:0]  ref_wvu [N];
  scdq_pruning_filter #(.NUM_NEURONS(N), .NUM_DELAYS(D)) u_rand (
    .clk, .rst_n, .cfg_we(r_we), .cfg_row(r_row), .cfg_bits(r_bits),
    .ev(r_ev), .deliver(r_deliver), .keep(r_keep), .delay(r_delay));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // expected[row][cnt] = {deliver, keep} for the worked example
    int exp_del [2][3];
    int exp_keep[2][3];
    exp_del  = '{'{0, 1, 1}, '{1, 0, 0}};   // index by counter 0,1,2 (delay 2,1,0)
    exp_keep = '{'{0, 0, 1}, '{0, 1, 1}};
    rst_n = 0; s_we = 0; r_we = 0; s_row = '0; s_bits = '0; r_row = '0; r_bits = '0;
    s_ev = '0; r_ev = '0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    // after reset nothing is useful
    s_ev = '{addr: 0, cnt: 2}; #1;
    check(int'(s_deliver), 0, "reset deliver"); check(int'(s_keep), 0, "reset keep");
    @(negedge clk); s_we = 1; s_row = 0; s_bits = 3'b011;   // A: delays 0,1
    @(negedge clk); s_we = 1; s_row = 1; s_bits = 3'b100;   // B: delay 2
    @(negedge clk); s_we = 0;
    for (int a = 0; a < 2; a++)
      for (int c = 0; c < 3; c++) begin
        s_ev = '{addr: addr_t'(a), cnt: cnt_t'(c)}; #1;
        check(int'(s_deliver), exp_del[a][c], $sformatf("example deliver a=%0d c=%0d", a, c));
        check(int'(s_keep), exp_keep[a][c], $sformatf("example keep a=%0d c=%0d", a, c));
        check(int'(s_delay), 2 - c, "example delay");
      end

    // random rows, some empty, some single-bit
    for (int i = 0; i < int'(N); i++) begin
      @(negedge clk);
      r_we = 1; r_row = 4'(i);
      case (i % 4)
        0: r_bits = '0;
        1: r_bits = D'(1) << ($urandom % D);
        default: r_bits = D'({$urandom, $urandom});
      endcase
      ref_wvu[i] = r_bits;
    end
    @(negedge clk); r_we = 1; r_row = 4'(N); r_bits = '1;   // no such row: ignored
    @(negedge clk); r_we = 0;
    for (int a = 0; a < int'(N) + 3; a++)
      for (int c = 0; c < 64; c++) begin
        int last, ed, ek;
        r_ev = '{addr: (a == int'(N) + 2) ? EOT_ADDR : addr_t'(a), cnt: cnt_t'(c)}; #1;
        ed = 0; ek = 0;
        if (a < int'(N) && c < int'(D)) begin
          last = -1;                       // highest useful delay level
          for (int d = 0; d < int'(D); d++) if (ref_wvu[a][d]) last = d;
          ed = int'(ref_wvu[a][int'(D) - 1 - c]);
          ek = int'(last > int'(D) - 1 - c);     // a useful level lies ahead
        end
        check(int'(r_deliver), ed, $sformatf("deliver a=%0d c=%0d", a, c));
        check(int'(r_keep), ek, $sformatf("keep a=%0d c=%0d", a, c));
        if (c < int'(D)) check(int'(r_delay), D - 1 - c, "delay");
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
