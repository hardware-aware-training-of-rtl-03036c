// scdq_pkg: types and constants shared by the Shared Circular Delay Queue
// (SCDQ) blocks.
//
// An event is one 16-bit word, the width the SCDQ of the original design
// uses. How the 16 bits are divided is this design's choice: a 10-bit
// presynaptic neuron address (enough for a 700-wide input layer) in the upper
// bits and a 6-bit delay counter (enough for 64 timesteps) in the lower bits.
// The end-of-timestep (EOT) marker is an ordinary event whose address field is
// all ones, so neuron addresses run from 0 to 1022.
//
// clz() counts leading zeros of a WVU row, read as a number whose bit d is
// delay level d. The pruning filter uses it to decide when an event has no
// more useful delay levels and can leave the queue.
package scdq_pkg;

  localparam int unsigned EVENT_W = 16;
  localparam int unsigned ADDR_W  = 10;
  localparam int unsigned CNT_W   = EVENT_W - ADDR_W;  // 6
  localparam int unsigned MAX_DELAYS = 1 << CNT_W;     // 64 levels at most

  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [CNT_W-1:0]  cnt_t;

  typedef struct packed {
    addr_t addr;  // presynaptic neuron, or EOT_ADDR
    cnt_t  cnt;   // delay counter, counts down once per timestep
  } event_t;

  localparam addr_t EOT_ADDR = '1;

  function automatic logic is_eot(input addr_t a);
    return a == EOT_ADDR;
  endfunction

  typedef logic [CNT_W:0] clz_t;  // one bit wider: an all-zero row gives n

  // Number of leading zeros of the lowest n bits of row (n when all zero).
  function automatic clz_t clz(input logic [MAX_DELAYS-1:0] row, input int unsigned n);
    clz_t z;
    logic seen;
    z    = '0;
    seen = 1'b0;
    for (int i = MAX_DELAYS - 1; i >= 0; i--) begin
      if (i < int'(n)) begin
        if (row[i]) seen = 1'b1;
        else if (!seen) z = z + clz_t'(1);
      end
    end
    return z;
  endfunction

endpackage
