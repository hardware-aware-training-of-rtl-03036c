// scdq_read_ctrl: output side of the Shared Circular Delay Queue.
//
// Takes events one at a time from the head of the PRQ and, using the pruning
// filter's verdict on the event:
//   - sends it to the postsynaptic layer with its delay level if WVU says a
//     non-zero weight is waiting at this delay (deliver),
//   - copies it into the POQ with its delay counter decremented by one if a
//     useful delay level is still ahead of it (keep).
// An event can do both, either, or neither (then it leaves the queue unseen).
// When the head is the end-of-timestep (EOT) marker, it is passed to the
// output and eot_done tells the write controller to swap PRQ and POQ. This
// is the behaviour of the original design's read controller.
//
// This design's choices: valid/ready output handshake carrying the neuron
// address and delay level; the EOT marker is forwarded (address all ones,
// delay 0) so the consumer sees timestep boundaries; a kept event that meets
// a full POQ is dropped and poq_overflow is set and stays set until reset
// (stalling instead would deadlock, because the POQ only drains after the
// swap); the POQ write has priority on the shared memory write port.
//
// Timing: the memory read is synchronous. IDLE issues the read and pops the
// PRQ, LOAD captures the word, PROC decides. The POQ write happens in the
// first PROC cycle; out_valid stays high until out_ready. In the cycle PROC
// finishes, the next read is issued, so an unstalled stream moves one event
// per two clock cycles. After an EOT the controller waits one cycle in IDLE
// for the buffer roles to change.
module scdq_read_ctrl
  import scdq_pkg::*;
#(
  parameter int unsigned DEPTH = 2048,
  localparam int unsigned AW  = $clog2(DEPTH),
  localparam int unsigned QAW = AW - 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           prq_sel,
  // PRQ side
  input  logic           prq_empty,
  input  logic [QAW-1:0] prq_rd_ptr,
  output logic           prq_pop,
  output logic           mem_re,
  output logic [AW-1:0]  mem_raddr,
  input  event_t         mem_rdata,
  // pruning filter
  output event_t         cur_ev,
  input  logic           deliver,
  input  logic           keep,
  input  cnt_t           delay,
  // POQ side
  input  logic           poq_full,
  input  logic [QAW-1:0] poq_wr_ptr,
  output logic           poq_push,
  output logic           mem_we,
  output logic [AW-1:0]  mem_waddr,
  output event_t         mem_wdata,
  // postsynaptic event stream
  output logic           out_valid,
  input  logic           out_ready,
  output addr_t          out_addr,
  output cnt_t           out_delay,
  // to the write controller / status
  output logic           eot_done,
  output logic           poq_overflow
);

  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_PROC} state_e;

  state_e state_q;
  event_t cur_q;
  logic   out_done_q, poq_done_q;

  logic cur_eot, want_out, want_poq, out_fire, overflow_now, done, issue;

  assign cur_ev  = cur_q;
  assign cur_eot = is_eot(cur_q.addr);

  always_comb begin
    want_out     = (state_q == S_PROC) && (cur_eot || deliver);
    want_poq     = (state_q == S_PROC) && !cur_eot && keep;
    poq_push     = want_poq && !poq_done_q && !poq_full;
    overflow_now = want_poq && !poq_done_q && poq_full;
    out_valid    = want_out && !out_done_q;
    out_fire     = out_valid && out_ready;
    done         = (state_q == S_PROC)
                && (!want_out || out_done_q || out_fire)
                && (!want_poq || poq_done_q || poq_push || overflow_now);
    eot_done     = done && cur_eot;
    issue        = !prq_empty && ((state_q == S_IDLE) || (done && !cur_eot));
  end

  assign prq_pop   = issue;
  assign mem_re    = issue;
  assign mem_raddr = {prq_sel, prq_rd_ptr};

  assign mem_we    = poq_push;
  assign mem_waddr = {!prq_sel, poq_wr_ptr};
  assign mem_wdata = '{addr: cur_q.addr, cnt: cur_q.cnt - cnt_t'(1)};

  assign out_addr  = cur_q.addr;
  assign out_delay = cur_eot ? cnt_t'(0) : delay;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q      <= S_IDLE;
      cur_q        <= '0;
      out_done_q   <= 1'b0;
      poq_done_q   <= 1'b0;
      poq_overflow <= 1'b0;
    end else begin
      if (overflow_now) poq_overflow <= 1'b1;
      unique case (state_q)
        S_IDLE: if (issue) state_q <= S_LOAD;
        S_LOAD: begin
          cur_q      <= mem_rdata;
          out_done_q <= 1'b0;
          poq_done_q <= 1'b0;
          state_q    <= S_PROC;
        end
        S_PROC: begin
          if (done) begin
            state_q <= issue ? S_LOAD : S_IDLE;
          end else begin
            if (out_fire) out_done_q <= 1'b1;
            if (poq_push || overflow_now) poq_done_q <= 1'b1;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_addr) && $stable(out_delay));

endmodule
