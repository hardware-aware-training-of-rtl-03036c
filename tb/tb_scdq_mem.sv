// tb_scdq_mem: self-checking test of the event memory.
// Writes random words to random addresses while reading others, and checks
// every read, one cycle later, against a shadow copy kept by the testbench.
// Also checks that a read issued in the same cycle as a write to the same
// address returns the old contents, and that rdata holds when re is low.
module tb_scdq_mem;
  localparam int unsigned DEPTH = 64;
  localparam int unsigned WIDTH = 16;
  localparam int unsigned AW = $clog2(DEPTH);

  logic clk = 1'b0;
  always #5 clk = !clk;

  logic             we, re;
  logic [AW-1:0]    waddr, raddr;
  logic [WIDTH-1:0] wdata, rdata;
  logic [WIDTH-1:0] shadow [DEPTH];
  int checks = 0, failures = 0;

  scdq_mem #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  task automatic check(input logic [WIDTH-1:0] got, input logic [WIDTH-1:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [WIDTH-1:0] exp;
    we = 0; re = 0; waddr = '0; raddr = '0; wdata = '0;
    // fill every word
    for (int a = 0; a < int'(DEPTH); a++) begin
      @(negedge clk);
      we = 1; waddr = AW'(a); wdata = WIDTH'($urandom);
      shadow[a] = wdata;
    end
    @(negedge clk); we = 0;
    // random traffic
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      we = ($urandom % 2) == 1; waddr = AW'($urandom); wdata = WIDTH'($urandom);
      re = 1; raddr = ($urandom % 4 == 0) ? waddr : AW'($urandom);
      exp = shadow[raddr];               // old value even if written now
      if (we) shadow[waddr] = wdata;
      @(posedge clk); #1;
      check(rdata, exp, "read");
    end
    // hold when re is low
    @(negedge clk); re = 0; we = 1; waddr = raddr; wdata = ~rdata; exp = rdata;
    @(posedge clk); #1; check(rdata, exp, "hold");
    @(negedge clk); we = 0;
    @(posedge clk); #1; check(rdata, exp, "hold2");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
