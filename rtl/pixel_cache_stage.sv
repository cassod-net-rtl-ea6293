// pixel_cache_stage: one hierarchical stage of the pixel array.
//
// A ROWS x COLS grid of pixel selectors. Every selector has five inputs: the
// pixel at its own position and the pixels SHIFT positions away to the left,
// right, above and below. When `en` is low each selector passes its own
// pixel (the stage moves the tile by 0); when `en` is high every selector
// takes the neighbour named by `dir`, so the whole tile moves by SHIFT in one
// direction. Stage h of the array is built with SHIFT = 2^h, which is the
// "X_h is 0 or 2^h" rule of the paper; cascading the stages gives any move
// D = sum(X_h) in one cycle.
//
// The neighbour links wrap around the edges of the grid (a torus), as the
// looping arrows of the second and third stage are drawn in the paper's
// figure; edge handling beyond that is this design's choice. The paper's
// figure draws the neighbour links leaving after a selector, its text says a
// buffer's input is connected to its neighbours' inputs; this stage follows
// the text (selectors read their neighbours' stage inputs), which is what
// makes the moves of successive stages add up. The stage is
// purely combinational: the pixel buffers live in pixel_array, after stage 1.
//
// Interface: in/out are ROWS x COLS pixel grids, [0][0] is the top-left
// pixel. dir = DIR_LEFT means out[r][c] = in[r][c+SHIFT] (content moves left).
module pixel_cache_stage
  import cassod_pkg::*;
#(
  parameter int unsigned ROWS  = ARR_ROWS,
  parameter int unsigned COLS  = ARR_COLS,
  parameter int unsigned SHIFT = 1
) (
  input  pixel_t     in  [ROWS][COLS],
  input  logic       en,
  input  shift_dir_e dir,
  output pixel_t     out [ROWS][COLS]
);

  // Wrapped neighbour offsets, reduced modulo the grid size at elaboration.
  localparam int unsigned SR = SHIFT % ROWS;
  localparam int unsigned SC = SHIFT % COLS;

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      localparam int unsigned C_RIGHT = (c + SC) % COLS;         // source when moving left
      localparam int unsigned C_LEFT  = (c + COLS - SC) % COLS;  // source when moving right
      localparam int unsigned R_BELOW = (r + SR) % ROWS;         // source when moving up
      localparam int unsigned R_ABOVE = (r + ROWS - SR) % ROWS;  // source when moving down
      always_comb begin
        if (!en) begin
          out[r][c] = in[r][c];
        end else begin
          unique case (dir)
            DIR_LEFT:  out[r][c] = in[r][C_RIGHT];
            DIR_RIGHT: out[r][c] = in[r][C_LEFT];
            DIR_UP:    out[r][c] = in[R_BELOW][c];
            default:   out[r][c] = in[R_ABOVE][c];   // DIR_DOWN
          endcase
        end
      end
    end
  end

endmodule
