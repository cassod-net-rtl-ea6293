// workload_fig9_tb: a 3 x 3, D = 2 dilated layer over a whole (small) image,
// and the zero-padding baseline on the same hardware.
//
// Part 1: a 12 x 12 image with 64 input channels (as in the 64-channel layer of the evaluation) and 14 output channels
// (the 14 lanes of one operation) is convolved with a 3 x 3 filter at
// dilation 2, giving the 8 x 8 "valid" output. The testbench acts as host and
// DRAM: it cuts the image into overlapping 6 x 6 tiles at a stride of 2, runs
// one operation per tile and keeps each tile's 2 x 2 wrap-free outputs. All
// 8 x 8 x 14 results are compared with a direct convolution of the image.
//
// Part 2: one tile is run twice: as the 3 x 3 filter at D = 2, and as the
// zero-padded 5 x 5 filter at D = 1 that a shift register array without
// hierarchical stages would have to use. The outputs must be identical, and
// the compute cycles must be 64*9 against 64*25, a ratio of 25/9 = 2.78.
//
// Part 3: the CASSOD-C replacement (two 2 x 2 layers at D = 2) on one tile,
// with its compute cycles reported (64*4 per layer).
module workload_fig9_tb;
  import cassod_pkg::*;

  localparam int R = ARR_ROWS, C = ARR_COLS, L = OCH_PAR;
  localparam int IMG = 12, NCH = 64, K = 3, D = 2;
  localparam int VOUT = IMG - (K - 1) * D;     // 8
  localparam int STEP = R - (K - 1) * D;       // 2 wrap-free outputs per tile side

  logic clk = 1'b0;
  logic rst_n;
  logic start;
  layer_cfg_t cfg;
  logic busy, done, in_compute;
  logic pix_wr_en, wgt_wr_en;
  logic [ADDR_W-1:0] pix_wr_addr, wgt_wr_addr;
  pixel_t [C-1:0] pix_wr_data;
  weight_t [L-1:0] wgt_wr_data;
  logic out_valid;
  logic [$clog2(L)-1:0] out_lane;
  pixel_t out_data [R][C];

  cassod_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int image [NCH][IMG][IMG];
  int w3 [L][NCH][9];
  int got [L][R][C];
  int got_a [L][R][C];
  int result [L][VOUT][VOUT];
  int compute_cycles;
  int n_tiles = 0;

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(longint g, longint w, string what);
    checks++;
    if (g != w) begin
      failures++;
      if (failures < 20) $display("%s: got %0d expected %0d", what, g, w);
    end
  endtask

  task automatic write_tile(int y0, int x0);
    for (int ch = 0; ch < NCH; ch++)
      for (int r = 0; r < R; r++) begin
        pix_wr_en = 1'b1;
        pix_wr_addr = ADDR_W'(ch * R + r);
        for (int c = 0; c < C; c++)
          pix_wr_data[c] = pixel_t'(image[ch][(y0 + r) % IMG][(x0 + c) % IMG]);
        @(posedge clk); #1;
      end
    pix_wr_en = 1'b0;
  endtask

  // weights for filter side k at word base; pad = 1 writes the 3 x 3 filter
  // zero-padded into a 5 x 5 one
  task automatic write_weights(int base, bit pad);
    int k = pad ? 5 : 3;
    for (int ch = 0; ch < NCH; ch++)
      for (int t = 0; t < k * k; t++) begin
        int ky = t / k, kx = t % k;
        wgt_wr_en = 1'b1;
        wgt_wr_addr = ADDR_W'(base + ch * k * k + t);
        for (int m = 0; m < L; m++)
          if (!pad) wgt_wr_data[m] = weight_t'(w3[m][ch][t]);
          else if (ky % 2 == 0 && kx % 2 == 0) wgt_wr_data[m] = weight_t'(w3[m][ch][(ky / 2) * 3 + kx / 2]);
          else wgt_wr_data[m] = '0;
        @(posedge clk); #1;
      end
    wgt_wr_en = 1'b0;
  endtask

  task automatic run_op(int k, int d, int wbase, int nch, int sh);
    int seen = 0;
    compute_cycles = 0;
    cfg = '0;
    cfg.ksize = KSZ_W'(k); cfg.dilation = DIL_W'(d); cfg.num_ch = CH_W'(nch);
    cfg.pix_base = '0; cfg.wgt_base = ADDR_W'(wbase); cfg.out_shift = 5'(sh);
    start = 1'b1;
    @(posedge clk); #1;
    start = 1'b0;
    while (seen < L) begin
      if (in_compute) compute_cycles++;
      if (out_valid) begin
        for (int r = 0; r < R; r++)
          for (int c = 0; c < C; c++)
            got[out_lane][r][c] = int'(out_data[r][c]);
        seen++;
      end
      @(posedge clk); #1;
    end
  endtask

  function automatic int requant(longint s, int sh);
    longint q = s >>> sh;
    if (q > 127) return 127;
    if (q < -128) return -128;
    return int'(q);
  endfunction

  initial begin
    int cyc3, cyc5, cyc_cassod;
    rst_n = 1'b0; start = 1'b0; cfg = '0;
    pix_wr_en = 1'b0; wgt_wr_en = 1'b0; pix_wr_addr = '0; wgt_wr_addr = '0;
    pix_wr_data = '0; wgt_wr_data = '0;
    for (int ch = 0; ch < NCH; ch++)
      for (int y = 0; y < IMG; y++)
        for (int x = 0; x < IMG; x++)
          image[ch][y][x] = $urandom_range(0, 100) - 50;
    for (int m = 0; m < L; m++)
      for (int ch = 0; ch < NCH; ch++)
        for (int t = 0; t < 9; t++)
          w3[m][ch][t] = $urandom_range(0, 60) - 30;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    // ---------------- part 1: whole image, tile by tile
    write_weights(0, 1'b0);
    for (int ty = 0; ty < VOUT; ty += STEP)
      for (int tx = 0; tx < VOUT; tx += STEP) begin
        write_tile(ty, tx);
        run_op(K, D, 0, NCH, 12);
        n_tiles++;
        expect_eq(compute_cycles, NCH * K * K, "compute cycles per tile");
        for (int m = 0; m < L; m++)
          for (int r = 0; r < STEP; r++)
            for (int c = 0; c < STEP; c++)
              result[m][ty + r][tx + c] = got[m][r][c];
      end
    for (int m = 0; m < L; m++)
      for (int y = 0; y < VOUT; y++)
        for (int x = 0; x < VOUT; x++) begin
          automatic longint s = 0;
          for (int ch = 0; ch < NCH; ch++)
            for (int ky = 0; ky < K; ky++)
              for (int kx = 0; kx < K; kx++)
                s += longint'(image[ch][y + ky * D][x + kx * D]) * longint'(w3[m][ch][ky * K + kx]);
          expect_eq(result[m][y][x], requant(s, 12), "image output");
        end
    expect_eq(n_tiles, (VOUT / STEP) * (VOUT / STEP), "tiles run");

    // ---------------- part 2: hierarchical array against zero padding
    write_tile(0, 0);
    run_op(K, D, 0, NCH, 12);
    cyc3 = compute_cycles;
    got_a = got;
    write_weights(1000, 1'b1);
    run_op(5, 1, 1000, NCH, 12);
    cyc5 = compute_cycles;
    for (int m = 0; m < L; m++)
      for (int r = 0; r < R; r++)
        for (int c = 0; c < C; c++)
          expect_eq(got[m][r][c], got_a[m][r][c], "zero-padded 5x5 equals 3x3 at D=2");
    expect_eq(cyc3, NCH * 9, "3x3 D=2 compute cycles");
    expect_eq(cyc5, NCH * 25, "zero-padded 5x5 compute cycles");
    $display("3x3 D=2: %0d compute cycles; zero-padded 5x5: %0d; ratio %0.2f",
             cyc3, cyc5, real'(cyc5) / real'(cyc3));

    // ---------------- part 3: CASSOD-C on one tile, compute cycles only
    write_weights(2000, 1'b0);   // first 4 taps of each channel serve as a 2x2 filter
    run_op(2, D, 2000, NCH, 9);
    cyc_cassod = compute_cycles;
    run_op(2, D, 2000, NCH, 9);
    cyc_cassod += compute_cycles;
    expect_eq(cyc_cassod, 2 * NCH * 4, "CASSOD two-layer compute cycles");
    $display("CASSOD (two 2x2 layers, D=2): %0d compute cycles against %0d for 3x3", cyc_cassod, cyc3);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
