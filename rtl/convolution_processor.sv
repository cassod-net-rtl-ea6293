// convolution_processor: a grid of conv_unit MAC cells.
//
// There is one conv_unit per pixel position of the pixel array and per
// output-channel lane: ROWS x COLS x LANES units. Every cycle the unit at
// position (r, c) of lane m adds pix[r][c] * wgt[m] to its buffer, so one
// cycle applies one filter tap of LANES output channels to the whole tile.
// The paper states the rate (409.6 GOPS at 400 MHz, i.e. 512 MACs per cycle)
// but not how the MACs are arranged; the pixel-position x lane grid is this
// design's choice, with 6 x 6 x 14 = 504 MACs as the default.
//
// Interface: lane_en[m] enables lane m this cycle, clear[m] makes that
// cycle's product the first term of a new sum (see conv_unit). Depthwise
// layers use lane_en to let input channel c reach only lane c. rd_lane picks
// the lane whose ROWS x COLS sums appear, combinationally, on rd_data.
module convolution_processor
  import cassod_pkg::*;
#(
  parameter int unsigned ROWS  = ARR_ROWS,
  parameter int unsigned COLS  = ARR_COLS,
  parameter int unsigned LANES = OCH_PAR
) (
  input  logic    clk,
  input  logic    rst_n,
  input  pixel_t  pix     [ROWS][COLS],
  input  weight_t wgt     [LANES],
  input  logic [LANES-1:0] lane_en,
  input  logic [LANES-1:0] clear,
  input  logic [$clog2(LANES)-1:0] rd_lane,
  output acc_t    rd_data [ROWS][COLS]
);

  acc_t result [LANES][ROWS][COLS];

  for (genvar m = 0; m < LANES; m++) begin : g_lane
    for (genvar r = 0; r < ROWS; r++) begin : g_row
      for (genvar c = 0; c < COLS; c++) begin : g_col
        conv_unit u_mac (
          .clk   (clk),
          .rst_n (rst_n),
          .en    (lane_en[m]),
          .clear (clear[m]),
          .pix   (pix[r][c]),
          .wgt   (wgt[m]),
          .result(result[m][r][c])
        );
      end
    end
  end

  always_comb begin
    rd_data = result[0];
    for (int m = 0; m < LANES; m++)
      if (rd_lane == m[$clog2(LANES)-1:0]) rd_data = result[m];
  end

endmodule
