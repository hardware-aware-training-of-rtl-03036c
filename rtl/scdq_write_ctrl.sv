// scdq_write_ctrl: input side of the Shared Circular Delay Queue.
//
// Takes events (presynaptic neuron addresses) from the layer before, attaches
// a delay counter initialised to NUM_DELAYS-1 (the longest delay an event can
// still be delivered at) and writes the event into the PRQ. It also owns the
// PRQ/POQ role bit (prq_sel): when the read controller reports that the
// end-of-timestep (EOT) marker has reached the output (eot_done), the two
// buffers swap roles, so the events collected in the POQ during this timestep
// become the PRQ of the next one. Attaching the counter, writing the PRQ and
// swapping on EOT follow the original design.
//
// This design's choices: valid/ready input handshake; after an EOT has been
// accepted, input is held off (in_ready low) until the swap, so that events of
// the next timestep land in the new PRQ behind the delayed events; a full PRQ
// also holds off input; the memory write port is shared with the read
// controller, whose POQ write (rc_we) wins, so input waits that cycle.
//
// Timing: an event is accepted and written in the same cycle (in_valid &&
// in_ready). prq_sel flips at the clock edge where eot_done is high.
module scdq_write_ctrl
  import scdq_pkg::*;
#(
  parameter int unsigned NUM_DELAYS = 60,
  parameter int unsigned DEPTH      = 2048,
  localparam int unsigned AW  = $clog2(DEPTH),
  localparam int unsigned QAW = AW - 1
) (
  input  logic           clk,
  input  logic           rst_n,
  // presynaptic event stream
  input  logic           in_valid,
  output logic           in_ready,
  input  addr_t          in_addr,
  // PRQ state
  input  logic [QAW-1:0] prq_wr_ptr,
  input  logic           prq_full,
  output logic           prq_push,
  // memory write port request
  output logic           mem_we,
  output logic [AW-1:0]  mem_waddr,
  output event_t         mem_wdata,
  // from the read controller
  input  logic           rc_we,
  input  logic           eot_done,
  // buffer roles
  output logic           prq_sel,
  output logic           eot_pending
);

  logic accept;

  assign in_ready  = !eot_pending && !prq_full && !rc_we;
  assign accept    = in_valid && in_ready;
  assign prq_push  = accept;
  assign mem_we    = accept;
  assign mem_waddr = {prq_sel, prq_wr_ptr};
  assign mem_wdata = '{addr: in_addr,
                       cnt:  (in_addr == EOT_ADDR) ? cnt_t'(0) : cnt_t'(NUM_DELAYS - 1)};

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      prq_sel     <= 1'b0;
      eot_pending <= 1'b0;
    end else begin
      if (eot_done) begin
        prq_sel     <= !prq_sel;
        eot_pending <= 1'b0;
      end else if (accept && in_addr == EOT_ADDR) begin
        eot_pending <= 1'b1;
      end
    end
  end

  a_swap_only_after_eot: assert property (@(posedge clk) disable iff (!rst_n)
    eot_done |-> eot_pending);

endmodule
