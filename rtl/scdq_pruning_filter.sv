// scdq_pruning_filter: zero-skipping delay-forwarding for the SCDQ.
//
// Holds the binary WVU ("weight value useful") matrix: one row per
// presynaptic neuron i, one bit per delay level d. WVU[i][d] = 1 means that at
// least one synapse from neuron i with delay d has a non-zero weight. For the
// event at the head of the PRQ the filter answers two questions:
//   deliver = WVU[i][d], with d = NUM_DELAYS-1-counter the delay level the
//             event has reached in this timestep (zero-skipping: a delivery
//             that would only meet zero weights is suppressed);
//   keep    = counter > clz(WVU[i]), where the row is read as a number with
//             delay 0 as its least significant bit. clz counts the delay
//             levels at the far end that are all unused, so once the counter
//             has come down to clz the event has no useful future and is not
//             copied to the POQ again.
// Both rules, and the bit order, follow the worked example of the original
// design (WVU_A = 1 1 0, WVU_B = 0 0 1, clz = 1 and 0). Loading WVU through a
// row-wide write port, clearing it at reset, and treating addresses without a
// row (>= NUM_NEURONS, and the EOT marker) as all-zero rows are this design's
// choices.
//
// Timing: cfg writes take effect at the clock edge; deliver/keep/delay are
// combinational in ev.
module scdq_pruning_filter
  import scdq_pkg::*;
#(
  parameter int unsigned NUM_NEURONS = 48,
  parameter int unsigned NUM_DELAYS  = 60,
  localparam int unsigned RW = (NUM_NEURONS > 1) ? $clog2(NUM_NEURONS) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  cfg_we,
  input  logic [RW-1:0]         cfg_row,
  input  logic [NUM_DELAYS-1:0] cfg_bits,
  input  event_t                ev,
  output logic                  deliver,
  output logic                  keep,
  output cnt_t                  delay
);

  logic [NUM_DELAYS-1:0] wvu [NUM_NEURONS];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(NUM_NEURONS); i++) wvu[i] <= '0;
    end else if (cfg_we && int'(cfg_row) < int'(NUM_NEURONS)) begin
      wvu[cfg_row] <= cfg_bits;
    end
  end

  logic [MAX_DELAYS-1:0] row;
  clz_t                  row_clz;
  logic                  cnt_ok;

  always_comb begin
    row = '0;
    if (!is_eot(ev.addr) && int'(ev.addr) < int'(NUM_NEURONS))
      row[NUM_DELAYS-1:0] = wvu[RW'(ev.addr)];
    row_clz = clz(row, NUM_DELAYS);
    cnt_ok  = int'(ev.cnt) < int'(NUM_DELAYS);
    delay   = cnt_t'(NUM_DELAYS - 1) - ev.cnt;
    deliver = cnt_ok && row[delay];
    keep    = cnt_ok && (clz_t'(ev.cnt) > row_clz);
  end

  initial assert (NUM_DELAYS >= 1 && NUM_DELAYS <= MAX_DELAYS)
    else $error("NUM_DELAYS must be 1..%0d", MAX_DELAYS);
  initial assert (NUM_NEURONS >= 1 && NUM_NEURONS < (1 << ADDR_W))
    else $error("NUM_NEURONS out of range");

endmodule
