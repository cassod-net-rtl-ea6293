// layer_sequencer_tb: self-checking test of the operation sequencer.
//
// Runs the sequencer alone for filter sides K = 1, 2, 3, 5, 7, dilation
// rates D = 1..7, standard and depthwise mode and 1..3 input channels. A
// monitor follows every output each cycle and checks, independently of the
// sequencer's own counters:
//   - memory read addresses: base + c*ROWS + r and base + c*K*K + t;
//   - array load and cache write one cycle after the matching read;
//   - during COMPUTE, the tile offset accumulated from the move commands,
//     divided by D, is the filter tap whose cache address is presented in
//     the same cycle, and every tap is used exactly once per channel;
//   - lane enables/clears (all lanes, or lane c in depthwise mode);
//   - COMPUTE lasts exactly K*K cycles per channel for every D, and the
//     whole operation takes the documented number of cycles;
//   - the drain reads lanes 0, 1, ... with act_valid.
module layer_sequencer_tb;
  import cassod_pkg::*;

  localparam int R = ARR_ROWS, L = OCH_PAR, H = NUM_STAGES;

  logic clk = 1'b0;
  logic rst_n;
  logic start;
  layer_cfg_t cfg;
  logic busy, done;
  logic pix_rd_en, wgt_rd_en;
  logic [ADDR_W-1:0] pix_rd_addr, wgt_rd_addr;
  logic arr_load;
  shift_dir_e arr_dir;
  logic [H-1:0] arr_dist;
  logic cache_wr_en;
  logic [TAP_W-1:0] cache_wr_addr, cache_rd_addr;
  logic [L-1:0] lane_en, lane_clear;
  logic [$clog2(L)-1:0] rd_lane;
  logic act_valid, in_compute;
  logic [4:0] act_shift;
  logic act_relu, act_pool;
  int checks = 0, failures = 0;

  layer_sequencer dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(longint got, longint want, string what);
    checks++;
    if (got != want) begin
      failures++;
      if (failures < 20) $display("%t %s: got %0d expected %0d", $time, what, got, want);
    end
  endtask

  task automatic run(int k, int d, bit dw, int nch);
    int taps = k * k;
    int load_len = (taps > R) ? taps : R;
    int nlanes = dw ? nch : L;
    int cyc = 0, compute_cyc, ch = -1, load_i = 0, drain_i = 0;
    int dy, dx;
    bit used [49];
    bit prev_pix_rd, prev_wgt_rd;
    int prev_pix_i, prev_wgt_i;
    int expected_total = nch * (load_len + 1 + taps) + nlanes + 1;
    cfg = '0;
    cfg.ksize = KSZ_W'(k); cfg.dilation = DIL_W'(d); cfg.depthwise = dw;
    cfg.num_ch = CH_W'(nch);
    cfg.out_shift = 5'($urandom); cfg.relu = 1'($urandom); cfg.pool = 1'($urandom);
    cfg.pix_base = ADDR_W'($urandom_range(0, 1000));
    cfg.wgt_base = ADDR_W'($urandom_range(0, 1000));
    start = 1'b1;
    @(posedge clk); #1;
    start = 1'b0;
    prev_pix_rd = 0; prev_wgt_rd = 0; prev_pix_i = 0; prev_wgt_i = 0;
    compute_cyc = 0;
    while (!done) begin
      cyc++;
      // one-cycle delayed load / cache write
      expect_eq(arr_load, prev_pix_rd, "arr_load timing");
      expect_eq(cache_wr_en, prev_wgt_rd, "cache_wr timing");
      if (prev_wgt_rd) expect_eq(cache_wr_addr, prev_wgt_i, "cache_wr_addr");
      prev_pix_rd = pix_rd_en; prev_wgt_rd = wgt_rd_en;
      if (pix_rd_en || wgt_rd_en || (!in_compute && !act_valid)) begin
        // LOAD phase
        if (load_i == 0) begin ch++; dy = 0; dx = 0; foreach (used[i]) used[i] = 0; end
        expect_eq(pix_rd_en, load_i < R, "pix_rd_en");
        expect_eq(wgt_rd_en, load_i < taps, "wgt_rd_en");
        if (pix_rd_en) expect_eq(pix_rd_addr, cfg.pix_base + ch * R + load_i, "pix_rd_addr");
        if (wgt_rd_en) expect_eq(wgt_rd_addr, cfg.wgt_base + ch * taps + load_i, "wgt_rd_addr");
        prev_wgt_i = load_i;
        load_i = (load_i == load_len) ? 0 : load_i + 1;
        expect_eq(lane_en, 0, "no MAC during load");
      end else if (in_compute) begin
        int ky, kx;
        compute_cyc++;
        expect_eq(dy % d, 0, "vertical offset multiple of D");
        expect_eq(dx % d, 0, "horizontal offset multiple of D");
        ky = dy / d; kx = dx / d;
        expect_eq(cache_rd_addr, ky * k + kx, "tap matches tile offset");
        if (ky < k && kx < k) begin
          expect_eq(used[ky * k + kx], 0, "tap used once");
          used[ky * k + kx] = 1;
        end else expect_eq(1, 0, "offset outside filter");
        for (int m = 0; m < L; m++) begin
          bit first = (dy == 0 && dx == 0);
          bit en_exp = dw ? (m == ch) : 1'b1;
          bit clr_exp = dw ? (m == ch && first) : (first && ch == 0);
          expect_eq(lane_en[m], en_exp, "lane_en");
          expect_eq(lane_clear[m], clr_exp, "lane_clear");
        end
        // apply this cycle's move to the tracked offset
        case (arr_dir)
          DIR_LEFT:  dx += int'(arr_dist);
          DIR_RIGHT: dx -= int'(arr_dist);
          DIR_UP:    dy += int'(arr_dist);
          default:   dy -= int'(arr_dist);
        endcase
        expect_eq(arr_dist == 0 || int'(arr_dist) == d, 1, "move distance is 0 or D");
      end else begin
        expect_eq(act_valid, 1, "drain valid");
        expect_eq(act_shift, cfg.out_shift, "output shift held");
        expect_eq(act_relu, cfg.relu, "relu held");
        expect_eq(act_pool, cfg.pool, "pool held");
        expect_eq(rd_lane, drain_i, "drain lane order");
        drain_i++;
      end
      @(posedge clk); #1;
    end
    expect_eq(compute_cyc, nch * taps, "compute cycles = channels x K*K, for every D");
    expect_eq(drain_i, nlanes, "lanes drained");
    expect_eq(cyc + 1, expected_total, "total cycles");
    @(posedge clk); #1;
    expect_eq(busy, 0, "idle after done");
  endtask

  initial begin
    rst_n = 1'b0; start = 1'b0; cfg = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int ki = 0; ki < 5; ki++) begin
      int ks [5] = '{1, 2, 3, 5, 7};
      for (int d = 1; d <= 7; d++) begin
        run(ks[ki], d, 1'b0, 1 + (d % 3));
        run(ks[ki], d, 1'b1, 1 + ((d + 1) % 3));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
