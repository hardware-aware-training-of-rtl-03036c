// scdq_delay_ip: Shared Circular Delay Queue (SCDQ), a synaptic-delay
// accelerator for one core of an event-driven neuromorphic processor.
//
// It sits between a presynaptic and a postsynaptic layer. Every spike of the
// presynaptic layer enters once, as an event carrying the neuron address, and
// leaves once per timestep at which some synapse of that neuron has a useful
// (non-zero) weight at the delay reached: delays are supported per synapse,
// not only per axon. Only two FIFOs are needed, whatever the number of delay
// levels:
//   PRQ (pre-processing queue)  events to be looked at in this timestep;
//   POQ (post-processing queue) events to be looked at again next timestep.
// The write controller appends incoming events to the PRQ with a delay
// counter set to NUM_DELAYS-1. The read controller drains the PRQ; for each
// event the pruning filter (WVU matrix) says whether to deliver it now and
// whether to keep it, and kept events go to the POQ with the counter one
// lower. An end-of-timestep (EOT) event, address all ones, closes a timestep:
// when it reaches the output, the PRQ and POQ swap roles, so the delayed
// events circle round and are looked at first in the next timestep, ahead of
// that timestep's new events. Both queues keep their events in one 2048 x 16
// memory, one half each.
//
// The block structure (write controller, read controller, PRQ, POQ, pruning
// filter, memory), the counter and WVU/clz rules, and the 2048-word 16-bit
// memory follow the original design. The event field layout, the EOT code,
// the handshakes, the fixed split of the memory, the WVU load port and the
// overflow behaviour are this design's choices (see the sub-modules).
//
// Interface:
//   in_*   presynaptic events, valid/ready; in_addr = 1023 is EOT.
//   out_*  postsynaptic deliveries, valid/ready: neuron address and delay
//          level d (0..NUM_DELAYS-1); EOT is forwarded with d = 0.
//   cfg_*  write WVU row cfg_row (bit d = delay level d useful).
//   prq_level/poq_level fill levels; poq_overflow sticky drop flag;
//   eot_pending high while input is held off waiting for an EOT to leave.
// Timing: an input event is taken in one cycle unless the read controller
// writes the POQ in that cycle; the output moves one event per two cycles.
// After an EOT is accepted, in_ready stays low until that EOT has left at the
// output.
module scdq_delay_ip
  import scdq_pkg::*;
#(
  parameter int unsigned NUM_NEURONS = 48,
  parameter int unsigned NUM_DELAYS  = 60,
  parameter int unsigned DEPTH       = 2048,
  localparam int unsigned AW  = $clog2(DEPTH),
  localparam int unsigned QAW = AW - 1,
  localparam int unsigned RW  = (NUM_NEURONS > 1) ? $clog2(NUM_NEURONS) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  addr_t                 in_addr,
  output logic                  out_valid,
  input  logic                  out_ready,
  output addr_t                 out_addr,
  output cnt_t                  out_delay,
  input  logic                  cfg_we,
  input  logic [RW-1:0]         cfg_row,
  input  logic [NUM_DELAYS-1:0] cfg_bits,
  output logic [QAW:0]          prq_level,
  output logic [QAW:0]          poq_level,
  output logic                  poq_overflow,
  output logic                  eot_pending
);

  // buffer bookkeeping, indexed by physical half of the memory
  logic           q_push [2];
  logic           q_pop  [2];
  logic [QAW-1:0] q_wr   [2];
  logic [QAW-1:0] q_rd   [2];
  logic [QAW:0]   q_cnt  [2];
  logic           q_empty[2];
  logic           q_full [2];

  for (genvar b = 0; b < 2; b++) begin : g_buf
    scdq_queue #(.DEPTH(DEPTH / 2)) u_queue (
      .clk, .rst_n,
      .push(q_push[b]), .pop(q_pop[b]),
      .wr_ptr(q_wr[b]), .rd_ptr(q_rd[b]), .count(q_cnt[b]),
      .empty(q_empty[b]), .full(q_full[b])
    );
  end

  logic prq_sel, eot_done;
  logic wc_push, wc_we, rc_pop, rc_push, rc_we, rc_re;
  logic [AW-1:0] wc_waddr, rc_waddr, rc_raddr;
  event_t wc_wdata, rc_wdata, rdata, cur_ev;
  logic deliver, keep;
  cnt_t delay;

  // role mapping: half prq_sel is the PRQ, the other half the POQ
  always_comb begin
    for (int b = 0; b < 2; b++) begin
      q_push[b] = (b == int'(prq_sel)) ? wc_push : rc_push;
      q_pop[b]  = (b == int'(prq_sel)) ? rc_pop  : 1'b0;
    end
  end

  assign prq_level = q_cnt[prq_sel];
  assign poq_level = q_cnt[!prq_sel];

  scdq_write_ctrl #(.NUM_DELAYS(NUM_DELAYS), .DEPTH(DEPTH)) u_write_ctrl (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_addr,
    .prq_wr_ptr(q_wr[prq_sel]), .prq_full(q_full[prq_sel]), .prq_push(wc_push),
    .mem_we(wc_we), .mem_waddr(wc_waddr), .mem_wdata(wc_wdata),
    .rc_we, .eot_done,
    .prq_sel, .eot_pending
  );

  scdq_read_ctrl #(.DEPTH(DEPTH)) u_read_ctrl (
    .clk, .rst_n, .prq_sel,
    .prq_empty(q_empty[prq_sel]), .prq_rd_ptr(q_rd[prq_sel]), .prq_pop(rc_pop),
    .mem_re(rc_re), .mem_raddr(rc_raddr), .mem_rdata(rdata),
    .cur_ev, .deliver, .keep, .delay,
    .poq_full(q_full[!prq_sel]), .poq_wr_ptr(q_wr[!prq_sel]), .poq_push(rc_push),
    .mem_we(rc_we), .mem_waddr(rc_waddr), .mem_wdata(rc_wdata),
    .out_valid, .out_ready, .out_addr, .out_delay,
    .eot_done, .poq_overflow
  );

  scdq_pruning_filter #(.NUM_NEURONS(NUM_NEURONS), .NUM_DELAYS(NUM_DELAYS)) u_pruning_filter (
    .clk, .rst_n, .cfg_we, .cfg_row, .cfg_bits,
    .ev(cur_ev), .deliver, .keep, .delay
  );

  // single write port: the read controller's POQ write has priority
  scdq_mem #(.DEPTH(DEPTH), .WIDTH(EVENT_W)) u_mem (
    .clk,
    .we(wc_we || rc_we),
    .waddr(rc_we ? rc_waddr : wc_waddr),
    .wdata(rc_we ? rc_wdata : wc_wdata),
    .re(rc_re), .raddr(rc_raddr), .rdata(rdata)
  );

  a_write_port_free: assert property (@(posedge clk) disable iff (!rst_n) !(wc_we && rc_we));
  a_prq_drained_at_swap: assert property (@(posedge clk) disable iff (!rst_n)
    eot_done |-> q_empty[prq_sel]);

  initial assert (DEPTH >= 4 && (DEPTH & (DEPTH - 1)) == 0)
    else $error("DEPTH must be a power of two");

endmodule
