// scdq_mem: event memory behind the PRQ and POQ.
//
// The delay structure keeps its queued events in one 2048-word, 16-bit
// memory, which the original design implemented as an SRAM macro (an earlier
// version used flip-flops). Here it is an array with one write port and one
// synchronous read port, which synthesis can map to a two-port SRAM. The port
// arrangement is this design's choice. Contents are not reset; the queues
// never read a word they have not written.
//
// Timing: a write takes effect at the clock edge where we is high. rdata
// holds mem[raddr] from the edge where re was high until the next read; a
// read of the word being written in the same cycle returns the old contents.
module scdq_mem #(
  parameter int unsigned DEPTH = 2048,
  parameter int unsigned WIDTH = 16,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end

endmodule
