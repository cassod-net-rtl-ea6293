// cassod_top: dilated-convolution accelerator with a hierarchical pixel array.
//
// Data flow, following the paper's block diagram: DRAM fills the pixel
// memory and the filter weight memory; the pixel memory feeds the pixel
// array and the weight memory feeds the filter weight cache; the pixel array
// and the cache feed the convolution processor (a grid of multiply-
// accumulate units), whose sums go through the activation/pooling unit back
// to DRAM. The pixel array can move its tile by any dilation rate
// D in [1, 2^H-1] in one cycle, so a K x K dilated filter costs K*K compute
// cycles per input channel for every D. A CASSOD module (two cascaded 2 x 2
// dilated layers) is run as two operations, the output of the first written
// back as the input of the second.
//
// The layer sequencer, which the paper does not show, runs one operation:
// one tile, num_ch input channels, up to OCH_PAR output channels (or up to
// OCH_PAR depthwise channels). DRAM is not part of this design: its write
// paths into the two memories and the result stream are ports.
//
// Ports:
//   start/cfg/busy/done  start one operation with configuration cfg
//   pix_wr_*             write one tile row (COLS pixels) into pixel memory
//   wgt_wr_*             write one filter tap for all lanes into weight memory
//   out_valid/lane/data  one output channel of the tile per cycle; with
//                        cfg.pool the pooled map is in the top-left quarter
//   in_compute           high during the K*K compute cycles of each channel
// Timing: a standard operation takes, per channel, max(ROWS, K*K) + 1 load
// cycles and K*K compute cycles, then OCH_PAR drain cycles (num_ch for a
// depthwise one); each output leaves one cycle after its drain cycle.
module cassod_top
  import cassod_pkg::*;
#(
  parameter int unsigned ROWS  = ARR_ROWS,
  parameter int unsigned COLS  = ARR_COLS,
  parameter int unsigned H     = NUM_STAGES,
  parameter int unsigned LANES = OCH_PAR
) (
  input  logic                clk,
  input  logic                rst_n,
  // operation control
  input  logic                start,
  input  layer_cfg_t          cfg,
  output logic                busy,
  output logic                done,
  output logic                in_compute,
  // DRAM -> pixel memory
  input  logic                pix_wr_en,
  input  logic [ADDR_W-1:0]   pix_wr_addr,
  input  pixel_t [COLS-1:0]   pix_wr_data,
  // DRAM -> filter weight memory
  input  logic                wgt_wr_en,
  input  logic [ADDR_W-1:0]   wgt_wr_addr,
  input  weight_t [LANES-1:0] wgt_wr_data,
  // activation/pooling unit -> DRAM
  output logic                out_valid,
  output logic [$clog2(LANES)-1:0] out_lane,
  output pixel_t              out_data [ROWS][COLS]
);

  localparam int unsigned LANE_W = $clog2(LANES);

  // sequencer outputs
  logic                pix_rd_en, wgt_rd_en;
  logic [ADDR_W-1:0]   pix_rd_addr, wgt_rd_addr;
  logic                arr_load;
  shift_dir_e          arr_dir;
  logic [H-1:0]        arr_dist;
  logic                cache_wr_en;
  logic [TAP_W-1:0]    cache_wr_addr, cache_rd_addr;
  logic [LANES-1:0]    lane_en, lane_clear;
  logic [LANE_W-1:0]   rd_lane;
  logic                act_valid;

  // data paths
  pixel_t  [COLS-1:0]  pix_row;
  pixel_t              load_row [COLS];
  pixel_t              pix_grid [ROWS][COLS];
  weight_t [LANES-1:0] wgt_word;
  weight_t [LANES-1:0] cache_word;
  weight_t             lane_wgt [LANES];
  acc_t                sums     [ROWS][COLS];
  logic [4:0]          act_shift;
  logic                act_relu, act_pool;

  layer_sequencer #(.ROWS(ROWS), .LANES(LANES), .H(H)) u_seq (
    .clk, .rst_n, .start, .cfg, .busy, .done,
    .pix_rd_en, .pix_rd_addr, .wgt_rd_en, .wgt_rd_addr,
    .arr_load, .arr_dir, .arr_dist,
    .cache_wr_en, .cache_wr_addr, .cache_rd_addr,
    .lane_en, .lane_clear, .rd_lane, .act_valid, .act_shift, .act_relu, .act_pool,
    .in_compute
  );

  pixel_memory #(.COLS(COLS)) u_pix_mem (
    .clk,
    .wr_en  (pix_wr_en),
    .wr_addr(pix_wr_addr),
    .wr_data(pix_wr_data),
    .rd_en  (pix_rd_en),
    .rd_addr(pix_rd_addr),
    .rd_data(pix_row)
  );

  filter_weight_memory #(.LANES(LANES)) u_wgt_mem (
    .clk,
    .wr_en  (wgt_wr_en),
    .wr_addr(wgt_wr_addr),
    .wr_data(wgt_wr_data),
    .rd_en  (wgt_rd_en),
    .rd_addr(wgt_rd_addr),
    .rd_data(wgt_word)
  );

  always_comb
    for (int c = 0; c < COLS; c++) load_row[c] = pix_row[c];

  pixel_array #(.ROWS(ROWS), .COLS(COLS), .H(H)) u_pix_arr (
    .clk, .rst_n,
    .load    (arr_load),
    .load_row(load_row),
    .dir     (arr_dir),
    .shift_dist(arr_dist),
    .pix     (pix_grid)
  );

  filter_weight_cache #(.LANES(LANES)) u_wgt_cache (
    .clk,
    .wr_en  (cache_wr_en),
    .wr_addr(cache_wr_addr),
    .wr_data(wgt_word),
    .rd_addr(cache_rd_addr),
    .rd_data(cache_word)
  );

  always_comb
    for (int m = 0; m < LANES; m++) lane_wgt[m] = cache_word[m];

  convolution_processor #(.ROWS(ROWS), .COLS(COLS), .LANES(LANES)) u_conv (
    .clk, .rst_n,
    .pix    (pix_grid),
    .wgt    (lane_wgt),
    .lane_en(lane_en),
    .clear  (lane_clear),
    .rd_lane(rd_lane),
    .rd_data(sums)
  );

  activation_pooling_unit #(.ROWS(ROWS), .COLS(COLS), .LANE_W(LANE_W)) u_act (
    .clk, .rst_n,
    .in_valid (act_valid),
    .in_lane  (rd_lane),
    .in_data  (sums),
    .out_shift(act_shift),
    .relu     (act_relu),
    .pool     (act_pool),
    .out_valid(out_valid),
    .out_lane (out_lane),
    .out_data (out_data)
  );

endmodule
