// filter_weight_cache: register file holding the filter in use.
//
// Weights travel from the filter weight memory into this cache before a
// convolution, and the convolution processor reads them from here, one tap
// per cycle. Each entry is one filter tap for all LANES output-channel lanes,
// so a single read feeds every lane. DEPTH = 49 entries holds the largest
// filter the paper supports (7 x 7). The paper names the cache and its place
// in the data flow; its organisation (one entry per tap, one write port and
// one combinational read port) is this design's choice.
//
// Interface: wr_en writes wr_data to entry wr_addr on the rising edge.
// rd_data shows entry rd_addr in the same cycle (asynchronous read), so the
// sequencer can present a tap address in the cycle the pixels for that tap
// sit in the pixel array. No reset: entries are always written before use.
module filter_weight_cache
  import cassod_pkg::*;
#(
  parameter int unsigned LANES = OCH_PAR,
  parameter int unsigned DEPTH = MAX_TAPS
) (
  input  logic    clk,
  input  logic    wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  weight_t [LANES-1:0] wr_data,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output weight_t [LANES-1:0] rd_data
);

  weight_t [LANES-1:0] entry [DEPTH];

  always_ff @(posedge clk)
    if (wr_en) entry[wr_addr] <= wr_data;

  assign rd_data = entry[rd_addr];

endmodule
