// cassod_pkg: types and default sizes shared by the dilated-convolution
// accelerator.
//
// The accelerator keeps a tile of one input feature map in a 2-D shift
// register array (the pixel array). Each cycle the whole tile can be moved by
// any distance D in [1, 2^H-1] in one of four directions, because the move is
// split over H hierarchical selector stages that move by 0 or 2^h each. A
// K x K filter with dilation D is then applied in K*K cycles whatever D is.
//
// Sizes that follow the paper: H = 3 stages, a 6 x 6 example array, filters
// up to 7 x 7, 128 KB of on-chip memory, 512 MACs per cycle (409.6 GOPS at
// 400 MHz). Data widths (8-bit pixels and weights, 32-bit accumulators) are
// this design's own choice; the paper gives none.
package cassod_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned PIX_W      = 8;   // pixel width (signed)
  localparam int unsigned WGT_W      = 8;   // weight width (signed)
  localparam int unsigned ACC_W      = 32;  // accumulator width (signed)
  localparam int unsigned ARR_ROWS   = 6;   // pixel array rows (Fig. 5 example)
  localparam int unsigned ARR_COLS   = 6;   // pixel array columns (Fig. 5 example)
  localparam int unsigned NUM_STAGES = 3;   // hierarchical stages H (Table 5)
  localparam int unsigned MAX_K      = 7;   // largest filter side (Table 5)
  localparam int unsigned MAX_TAPS   = MAX_K * MAX_K;
  localparam int unsigned OCH_PAR    = 14;  // output-channel lanes: 36*14 = 504 <= 512 MACs
  localparam int unsigned PIX_MEM_BYTES = 65536; // half of the 128 KB on-chip memory
  localparam int unsigned WGT_MEM_BYTES = 65536; // other half

  localparam int unsigned TAP_W = $clog2(MAX_TAPS);          // tap index width
  localparam int unsigned KSZ_W = $clog2(MAX_K + 1);         // filter side width
  localparam int unsigned DIL_W = NUM_STAGES;                // dilation rate width
  localparam int unsigned CH_W  = 10;                        // channel count width
  localparam int unsigned ADDR_W = 16;                       // memory word address width

  typedef logic signed [PIX_W-1:0] pixel_t;
  typedef logic signed [WGT_W-1:0] weight_t;
  typedef logic signed [ACC_W-1:0] acc_t;

  // Direction in which the stored tile moves. DIR_LEFT means every buffer
  // takes the value of the buffer to its right (content moves left), which
  // advances the filter window to the right over the image.
  typedef enum logic [1:0] {
    DIR_LEFT  = 2'd0,
    DIR_RIGHT = 2'd1,
    DIR_UP    = 2'd2,
    DIR_DOWN  = 2'd3
  } shift_dir_e;

  // Configuration of one convolution operation on one tile.
  typedef struct packed {
    logic [KSZ_W-1:0]  ksize;      // filter side K, 1..MAX_K
    logic [DIL_W-1:0]  dilation;   // dilation rate D, 1..2^H-1
    logic              depthwise;  // 1: channel c feeds only lane c
    logic [CH_W-1:0]   num_ch;     // number of input channels, >= 1
    logic [ADDR_W-1:0] pix_base;   // first pixel-memory word of the tile stack
    logic [ADDR_W-1:0] wgt_base;   // first weight-memory word of the filters
    logic [4:0]        out_shift;  // arithmetic right shift before saturation
    logic              relu;       // apply ReLU
    logic              pool;       // apply 2x2 max pooling, stride 2
  } layer_cfg_t;

endpackage
