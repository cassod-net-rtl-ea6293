// pixel_array: shift register array with H hierarchical stages.
//
// Holds a ROWS x COLS tile of one input feature map in pixel buffers and,
// each clock, can move the whole tile by any distance D in [0, 2^H-1] in one
// of four directions. The move is spread over H stages of selectors
// (pixel_cache_stage): stage h moves by 0 or 2^h, so D = sum(shift_dist[h] * 2^h),
// which is the paper's Eq. 2. Because a move of D costs one cycle like a move
// of 1, a dilated filter reads its taps in consecutive cycles whatever D is.
//
// Ring order (from the paper's figure of the array): the buffer outputs feed
// stage H, stage H feeds stage H-1, ..., stage 2 feeds the selector of
// stage 1, and stage 1 writes the buffers. Stage 1's selector is therefore the
// only one followed by a register, as in the figure.
//
// Loading (this design's choice; the paper does not say how the tile is
// filled): with load set the tile moves up by one row and load_row
// enters as the new bottom row, so ROWS load cycles bring in a whole tile
// from a memory that delivers one tile row per word.
//
// Interface: load, dir and shift_dist are sampled on the rising clock edge;
// pix shows the buffers and therefore the result of a move or load one cycle
// after it is issued.
// Synchronous active-low reset clears the buffers.
module pixel_array
  import cassod_pkg::*;
#(
  parameter int unsigned ROWS = ARR_ROWS,
  parameter int unsigned COLS = ARR_COLS,
  parameter int unsigned H    = NUM_STAGES
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       load,
  input  pixel_t     load_row [COLS],
  input  shift_dir_e dir,
  input  logic [H-1:0] shift_dist,
  output pixel_t     pix [ROWS][COLS]
);

  pixel_t buffer [ROWS][COLS];

  // Ring position i holds stage h = H-1-i: the buffers feed stage H first.
  for (genvar i = 0; i < H; i++) begin : g_stage
    localparam int unsigned STAGE = H - 1 - i;   // 0-based stage index
    pixel_t s_in  [ROWS][COLS];
    pixel_t s_out [ROWS][COLS];
    if (i == 0) begin : g_first
      assign s_in = buffer;
    end else begin : g_next
      assign s_in = g_stage[i-1].s_out;
    end
    pixel_cache_stage #(
      .ROWS (ROWS),
      .COLS (COLS),
      .SHIFT(1 << STAGE)
    ) u_stage (
      .in  (s_in),
      .en  (shift_dist[STAGE]),
      .dir (dir),
      .out (s_out)
    );
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++)
          buffer[r][c] <= '0;
    end else if (load) begin
      for (int r = 0; r < ROWS - 1; r++)
        buffer[r] <= buffer[r+1];
      buffer[ROWS-1] <= load_row;
    end else begin
      buffer <= g_stage[H-1].s_out;
    end
  end

  assign pix = buffer;

endmodule
