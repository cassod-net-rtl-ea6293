// cassod_top_tb: end-to-end test of the accelerator at its default size.
//
// The testbench plays the part of DRAM: it writes tiles into the pixel
// memory and filters into the weight memory through the top's write ports,
// starts operations and collects the output stream. Every output pixel is
// compared with a reference computed here from the same data: a convolution
// of the 6 x 6 tile with wrap-around at the tile edges (the array is a torus),
// out(r,c) = sum_ch sum_ky,kx I[ch][(r+ky*D)%6][(c+kx*D)%6] * W[ky][kx],
// followed by shift, ReLU, saturation and optional 2 x 2 max pooling.
//
// It runs
//   - standard 3 x 3 layers at every dilation rate D = 1..7 (each hierarchical
//     stage and every combination of stages), checking that the number of
//     compute cycles is the same for every D (9 per input channel);
//   - 2 x 2 layers with D = 2, 4, 6 and 7 x 7, 5 x 5 and 1 x 1 layers;
//   - depthwise layers (the mode switch), ReLU, pooling and saturation;
//   - the three CASSOD modules of the paper as two back-to-back operations
//     with the first layer's output written back as the second's input:
//     CASSOD-A (depthwise then standard 2 x 2), CASSOD-C (standard, standard)
//     and CASSOD-D (depthwise, depthwise), all with D = 2.
// Each mechanism is counted; one that never happened counts as a failure.
module cassod_top_tb;
  import cassod_pkg::*;

  localparam int R = ARR_ROWS, C = ARR_COLS, L = OCH_PAR;
  localparam int MAXC = 14;

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
  // mechanism counters
  int n_dil [8];
  int n_depthwise = 0, n_standard = 0, n_relu = 0, n_pool = 0, n_sat = 0;
  int n_cassod_a = 0, n_cassod_c = 0, n_cassod_d = 0, n_k2 = 0, n_k7 = 0;

  // data held by the "DRAM"
  int img  [MAXC][R][C];            // input tiles
  int wts  [L][MAXC][49];           // wts[m][c][tap]; depthwise uses wts[c][c][tap]
  int got  [L][R][C];               // collected outputs
  int refo [L][R][C];               // reference outputs
  int last_compute_cycles, last_total_cycles;

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
      if (failures < 20) $display("%t %s: got %0d expected %0d", $time, what, g, w);
    end
  endtask

  // ---------------------------------------------------------- DRAM side
  task automatic write_tiles(int base, int nch);
    for (int ch = 0; ch < nch; ch++)
      for (int r = 0; r < R; r++) begin
        pix_wr_en = 1'b1;
        pix_wr_addr = ADDR_W'(base + ch * R + r);
        for (int c = 0; c < C; c++) pix_wr_data[c] = pixel_t'(img[ch][r][c]);
        @(posedge clk); #1;
      end
    pix_wr_en = 1'b0;
  endtask

  task automatic write_weights(int base, int nch, int k);
    for (int ch = 0; ch < nch; ch++)
      for (int t = 0; t < k * k; t++) begin
        wgt_wr_en = 1'b1;
        wgt_wr_addr = ADDR_W'(base + ch * k * k + t);
        for (int m = 0; m < L; m++) wgt_wr_data[m] = weight_t'(wts[m][ch][t]);
        @(posedge clk); #1;
      end
    wgt_wr_en = 1'b0;
  endtask

  function automatic void random_data(int nch, int k, int pmax, int wmax);
    for (int ch = 0; ch < MAXC; ch++)
      for (int r = 0; r < R; r++)
        for (int c = 0; c < C; c++)
          img[ch][r][c] = (ch < nch) ? $urandom_range(0, 2 * pmax) - pmax : 0;
    for (int m = 0; m < L; m++)
      for (int ch = 0; ch < MAXC; ch++)
        for (int t = 0; t < 49; t++)
          wts[m][ch][t] = $urandom_range(0, 2 * wmax) - wmax;
  endfunction

  // ---------------------------------------------------------- reference
  function automatic int act(longint v, int sh, bit relu);
    longint q = v >>> sh;
    if (relu && q < 0) q = 0;
    if (q > 127) begin n_sat++; return 127; end
    if (q < -128) begin n_sat++; return -128; end
    return int'(q);
  endfunction

  function automatic void reference(int k, int d, bit dw, int nch, int sh, bit relu, bit pool);
    int nout = dw ? nch : L;
    int a [R][C];
    for (int m = 0; m < nout; m++) begin
      for (int r = 0; r < R; r++)
        for (int c = 0; c < C; c++) begin
          longint s = 0;
          for (int ch = 0; ch < nch; ch++) begin
            if (dw && ch != m) continue;
            for (int ky = 0; ky < k; ky++)
              for (int kx = 0; kx < k; kx++)
                s += longint'(img[ch][(r + ky * d) % R][(c + kx * d) % C]) *
                     longint'(wts[m][ch][ky * k + kx]);
          end
          a[r][c] = act(s, sh, relu);
        end
      for (int r = 0; r < R; r++)
        for (int c = 0; c < C; c++)
          refo[m][r][c] = pool ? 0 : a[r][c];
      if (pool)
        for (int r = 0; r < R / 2; r++)
          for (int c = 0; c < C / 2; c++) begin
            automatic int mx = a[2*r][2*c];
            if (a[2*r][2*c+1] > mx) mx = a[2*r][2*c+1];
            if (a[2*r+1][2*c] > mx) mx = a[2*r+1][2*c];
            if (a[2*r+1][2*c+1] > mx) mx = a[2*r+1][2*c+1];
            refo[m][r][c] = mx;
          end
    end
  endfunction

  // ---------------------------------------------------------- operation
  task automatic run_op(int k, int d, bit dw, int nch, int sh, bit relu, bit pool,
                        int pbase, int wbase, string name);
    int nout = dw ? nch : L;
    int seen = 0;
    int ccount = 0, total = 0;
    cfg = '0;
    cfg.ksize = KSZ_W'(k); cfg.dilation = DIL_W'(d); cfg.depthwise = dw;
    cfg.num_ch = CH_W'(nch); cfg.pix_base = ADDR_W'(pbase); cfg.wgt_base = ADDR_W'(wbase);
    cfg.out_shift = 5'(sh); cfg.relu = relu; cfg.pool = pool;
    start = 1'b1;
    @(posedge clk); #1;
    start = 1'b0;
    while (seen < nout) begin
      total++;
      if (in_compute) ccount++;
      if (out_valid) begin
        expect_eq(out_lane, seen, {name, ": output lane order"});
        for (int r = 0; r < R; r++)
          for (int c = 0; c < C; c++)
            got[out_lane][r][c] = int'(out_data[r][c]);
        seen++;
      end
      @(posedge clk); #1;
      if (total > 100000) break;
    end
    last_compute_cycles = ccount;
    last_total_cycles = total;
    expect_eq(busy, 0, {name, ": idle after last output"});
    expect_eq(ccount, nch * k * k, {name, ": compute cycles = channels x K*K"});
    reference(k, d, dw, nch, sh, relu, pool);
    for (int m = 0; m < nout; m++)
      for (int r = 0; r < R; r++)
        for (int c = 0; c < C; c++) begin
          checks++;
          if (got[m][r][c] != refo[m][r][c]) begin
            failures++;
            if (failures < 20)
              $display("%s K=%0d D=%0d dw=%0d lane %0d (%0d,%0d): %0d expected %0d",
                       name, k, d, dw, m, r, c, got[m][r][c], refo[m][r][c]);
          end
        end
    n_dil[d]++;
    if (dw) n_depthwise++; else n_standard++;
    if (relu) n_relu++;
    if (pool) n_pool++;
    if (k == 2) n_k2++;
    if (k == 7) n_k7++;
  endtask

  // Single layer on fresh random data.
  task automatic layer(int k, int d, bit dw, int nch, int sh, bit relu, bit pool);
    random_data(nch, k, 60, 40);
    write_tiles(100, nch);
    write_weights(200, nch, k);
    run_op(k, d, dw, nch, sh, relu, pool, 100, 200, "layer");
  endtask

  // CASSOD module: two 2 x 2 layers with dilation d; first layer's output
  // goes back through "DRAM" into the pixel memory as the second's input.
  task automatic cassod(bit dw1, bit dw2, int c1, int d, string name);
    int w2 [L][MAXC][49];
    random_data(c1, 2, 100, 30);
    // second-layer weights, kept aside
    for (int m = 0; m < L; m++)
      for (int ch = 0; ch < MAXC; ch++)
        for (int t = 0; t < 49; t++)
          w2[m][ch][t] = $urandom_range(0, 60) - 30;
    write_tiles(1000, c1);
    write_weights(2000, c1, 2);
    run_op(2, d, dw1, c1, 6, 1'b1, 1'b0, 1000, 2000, {name, " layer 1"});
    // layer-1 outputs (already checked against the reference) become the
    // input tiles of layer 2
    for (int ch = 0; ch < c1; ch++)
      for (int r = 0; r < R; r++)
        for (int c = 0; c < C; c++)
          img[ch][r][c] = got[ch][r][c];
    wts = w2;
    write_tiles(3000, c1);
    write_weights(2500, c1, 2);
    run_op(2, d, dw2, c1, 6, 1'b1, 1'b0, 3000, 2500, {name, " layer 2"});
  endtask

  int cc [8];

  initial begin
    rst_n = 1'b0; start = 1'b0; cfg = '0;
    pix_wr_en = 1'b0; wgt_wr_en = 1'b0; pix_wr_addr = '0; wgt_wr_addr = '0;
    pix_wr_data = '0; wgt_wr_data = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    // 3 x 3 at every dilation rate: the compute time must not depend on D
    for (int d = 1; d <= 7; d++) begin
      layer(3, d, 1'b0, 3, 8, d[0], 1'b0);
      cc[d] = last_compute_cycles;
    end
    for (int d = 2; d <= 7; d++) expect_eq(cc[d], cc[1], "3x3 compute cycles independent of D");

    // 2 x 2 filters at the dilation rates of the specification, other sizes
    layer(2, 2, 1'b0, 4, 7, 1'b1, 1'b0);
    layer(2, 4, 1'b0, 2, 7, 1'b0, 1'b1);
    layer(2, 6, 1'b0, 3, 7, 1'b1, 1'b1);
    layer(7, 1, 1'b0, 2, 10, 1'b0, 1'b0);
    layer(5, 1, 1'b0, 1, 9, 1'b1, 1'b0);
    layer(1, 5, 1'b0, 5, 4, 1'b0, 1'b0);
    layer(3, 3, 1'b0, 2, 2, 1'b0, 1'b0);   // small shift: saturates
    // depthwise
    layer(3, 2, 1'b1, 14, 6, 1'b0, 1'b0);
    layer(2, 6, 1'b1, 5, 5, 1'b1, 1'b1);

    // CASSOD modules, D = 2
    cassod(1'b1, 1'b0, 8, 2, "CASSOD-A");  n_cassod_a++;
    cassod(1'b0, 1'b0, 8, 2, "CASSOD-C");  n_cassod_c++;
    cassod(1'b1, 1'b1, 8, 2, "CASSOD-D");  n_cassod_d++;
    cassod(1'b1, 1'b0, 6, 4, "CASSOD-A D4");

    // every mechanism must have happened
    for (int d = 1; d <= 7; d++) expect_eq(n_dil[d] > 0, 1, "dilation rate exercised");
    expect_eq(n_depthwise > 0, 1, "depthwise mode exercised");
    expect_eq(n_standard > 0, 1, "standard mode exercised");
    expect_eq(n_relu > 0, 1, "ReLU exercised");
    expect_eq(n_pool > 0, 1, "pooling exercised");
    expect_eq(n_sat > 0, 1, "saturation exercised");
    expect_eq(n_k2 > 0 && n_k7 > 0, 1, "2x2 and 7x7 filters exercised");
    expect_eq(n_cassod_a * n_cassod_c * n_cassod_d > 0, 1, "CASSOD-A/C/D exercised");
    $display("mechanisms: D1..7=%0d %0d %0d %0d %0d %0d %0d depthwise=%0d standard=%0d relu=%0d pool=%0d saturated=%0d CASSOD A/C/D=%0d/%0d/%0d",
             n_dil[1], n_dil[2], n_dil[3], n_dil[4], n_dil[5], n_dil[6], n_dil[7],
             n_depthwise, n_standard, n_relu, n_pool, n_sat, n_cassod_a, n_cassod_c, n_cassod_d);
    $display("3x3 compute cycles per 3-channel operation: D=1 %0d, D=2 %0d, D=7 %0d", cc[1], cc[2], cc[7]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
