// scdq_queue: FIFO bookkeeping for one event buffer of the SCDQ.
//
// The pre-processing queue (PRQ) and post-processing queue (POQ) are FIFO
// abstractions around buffers in the shared event memory. This module holds
// one buffer's read pointer, write pointer and fill level; the data itself
// lives in scdq_mem. The Delay IP instantiates it twice, one per half of the
// memory, and a role bit decides which instance is currently the PRQ; the
// roles are exchanged at every end of timestep (double buffering). Splitting
// the memory into two fixed halves is this design's choice.
//
// Interface: push appends at wr_ptr, pop removes the entry at rd_ptr; both may
// happen in one cycle. Pointers wrap at DEPTH. Pushing a full queue or popping
// an empty one is a caller error and is caught by assertions.
// Timing: count, empty and full change at the clock edge after push/pop.
module scdq_queue #(
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          push,
  input  logic          pop,
  output logic [AW-1:0] wr_ptr,
  output logic [AW-1:0] rd_ptr,
  output logic [AW:0]   count,
  output logic          empty,
  output logic          full
);

  function automatic logic [AW-1:0] next_ptr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + AW'(1);
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= next_ptr(wr_ptr);
      if (pop)  rd_ptr <= next_ptr(rd_ptr);
      unique case ({push, pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  assign empty = (count == '0);
  assign full  = (count == (AW+1)'(DEPTH));

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> (!full || pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);

endmodule
