// activation_pooling_unit: turns convolution sums into next-layer pixels.
//
// Takes the ROWS x COLS accumulator values of one output channel per cycle
// and produces ROWS x COLS 8-bit pixels of the next layer's feature map:
//   1. requantise: arithmetic right shift by out_shift (rounds toward -inf),
//   2. ReLU when relu is set,
//   3. saturate to the signed pixel range,
//   4. when pool is set, 2 x 2 max pooling with stride 2: the pooled map
//      (ROWS/2 x COLS/2) is placed in the top-left corner of out_data and
//      the remaining entries are zero.
// The paper only names this unit and says batch normalisation and ReLU can
// be applied to a layer; requantisation by shifting, saturation and 2 x 2
// max pooling are this design's choices (batch normalisation is expected to
// be folded into the weights).
//
// Interface: in_valid/in_lane/in_data are registered once; out_valid,
// out_lane and out_data follow one cycle later. Synchronous active-low reset
// clears out_valid.
module activation_pooling_unit
  import cassod_pkg::*;
#(
  parameter int unsigned ROWS   = ARR_ROWS,
  parameter int unsigned COLS   = ARR_COLS,
  parameter int unsigned LANE_W = $clog2(OCH_PAR)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [LANE_W-1:0] in_lane,
  input  acc_t              in_data [ROWS][COLS],
  input  logic [4:0]        out_shift,
  input  logic              relu,
  input  logic              pool,
  output logic              out_valid,
  output logic [LANE_W-1:0] out_lane,
  output pixel_t            out_data [ROWS][COLS]
);

  localparam acc_t PIX_MAX = acc_t'((1 << (PIX_W - 1)) - 1);
  localparam acc_t PIX_MIN = -acc_t'(1 << (PIX_W - 1));

  pixel_t act    [ROWS][COLS];
  pixel_t result [ROWS][COLS];

  function automatic pixel_t max2(pixel_t a, pixel_t b);
    return (a > b) ? a : b;
  endfunction

  always_comb begin
    for (int r = 0; r < ROWS; r++) begin
      for (int c = 0; c < COLS; c++) begin
        acc_t v;
        v = in_data[r][c] >>> out_shift;
        if (relu && v < 0) v = '0;
        if (v > PIX_MAX)      act[r][c] = PIX_MAX[PIX_W-1:0];
        else if (v < PIX_MIN) act[r][c] = PIX_MIN[PIX_W-1:0];
        else                  act[r][c] = v[PIX_W-1:0];
      end
    end
  end

  always_comb begin
    if (!pool) begin
      result = act;
    end else begin
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++)
          result[r][c] = '0;
      for (int r = 0; r < ROWS / 2; r++)
        for (int c = 0; c < COLS / 2; c++)
          result[r][c] = max2(max2(act[2*r][2*c],   act[2*r][2*c+1]),
                              max2(act[2*r+1][2*c], act[2*r+1][2*c+1]));
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_lane  <= '0;
    end else begin
      out_valid <= in_valid;
      out_lane  <= in_lane;
    end
    if (in_valid) out_data <= result;
  end

endmodule
