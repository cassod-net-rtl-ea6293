// layer_sequencer: runs one convolution of one tile.
//
// For every input channel c the sequencer
//   LOAD:    reads the ROWS tile rows of channel c from the pixel memory into
//            the pixel array (word pix_base + c*ROWS + r) and, in the same
//            cycles, the K*K filter taps of channel c from the weight memory
//            into the filter weight cache (word wgt_base + c*K*K + t);
//            max(ROWS, K*K) read cycles plus one cycle for the last read;
//   COMPUTE: spends exactly K*K cycles, one per filter tap, walking the taps
//            in serpentine order. Between taps it moves the tile by D with a
//            single pixel-array command: left along even filter rows, right
//            along odd ones, up between rows. The conv unit at (r, c) thus
//            sees image pixel (r + ky*D, c + kx*D) while tap (ky, kx) is read
//            from the cache, and the number of cycles does not depend on D.
// After the last channel it drains the result of each output lane, one lane
// per cycle, into the activation/pooling unit, then pulses done.
//
// Standard layers accumulate over all channels in all LANES lanes (the first
// tap of channel 0 clears the sums). Depthwise layers (cfg.depthwise) enable
// only lane c while channel c is processed and clear it at its first tap, so
// up to LANES channels are filtered independently in one operation; the
// first num_ch lanes are drained.
//
// The paper describes the data flow between the blocks and that the pixels
// are "dumped consecutively" whatever D is, but no controller; the phases,
// the serpentine order and the memory layout are this design's choices.
//
// Interface: start is accepted in IDLE and cfg is latched then; the output
// settings (shift, ReLU, pooling) of the latched cfg drive the activation/
// pooling unit for the whole operation. busy is high
// from the cycle after start until done. Memory reads have one cycle of
// latency (see pixel_memory); the sequencer delays the array load and the
// cache write by one cycle to match.
module layer_sequencer
  import cassod_pkg::*;
#(
  parameter int unsigned ROWS  = ARR_ROWS,
  parameter int unsigned LANES = OCH_PAR,
  parameter int unsigned H     = NUM_STAGES
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  layer_cfg_t          cfg,
  output logic                busy,
  output logic                done,
  // pixel memory read port
  output logic                pix_rd_en,
  output logic [ADDR_W-1:0]   pix_rd_addr,
  // filter weight memory read port
  output logic                wgt_rd_en,
  output logic [ADDR_W-1:0]   wgt_rd_addr,
  // pixel array command
  output logic                arr_load,
  output shift_dir_e          arr_dir,
  output logic [H-1:0]        arr_dist,
  // filter weight cache
  output logic                cache_wr_en,
  output logic [TAP_W-1:0]    cache_wr_addr,
  output logic [TAP_W-1:0]    cache_rd_addr,
  // convolution processor
  output logic [LANES-1:0]    lane_en,
  output logic [LANES-1:0]    lane_clear,
  output logic [$clog2(LANES)-1:0] rd_lane,
  // activation / pooling unit
  output logic                act_valid,
  output logic [4:0]          act_shift,
  output logic                act_relu,
  output logic                act_pool,
  // current phase, for observation
  output logic                in_compute
);

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_COMPUTE, S_DRAIN, S_DONE} state_e;

  localparam int unsigned LANE_W = $clog2(LANES);

  state_e            state;
  layer_cfg_t        cfg_q;
  logic [CH_W-1:0]   ch;          // current input channel
  logic [6:0]        cnt;         // cycle counter within LOAD or DRAIN
  logic [TAP_W-1:0]  tap;         // cycle index within COMPUTE
  logic [KSZ_W-1:0]  ky, kx;      // current filter tap
  logic [TAP_W-1:0]  taps;        // K*K
  logic [6:0]        load_len;    // max(ROWS, K*K)
  logic [CH_W-1:0]   drain_len;   // lanes to drain
  logic              pix_rd_q, wgt_rd_q;
  logic [TAP_W-1:0]  wgt_tap_q;
  logic [ADDR_W-1:0] ch_pix_base, ch_wgt_base;

  always_comb begin
    taps      = TAP_W'(cfg_q.ksize) * TAP_W'(cfg_q.ksize);
    load_len  = (7'(taps) > 7'(ROWS)) ? 7'(taps) : 7'(ROWS);
    drain_len = cfg_q.depthwise ? cfg_q.num_ch : CH_W'(LANES);
    ch_pix_base = cfg_q.pix_base + ADDR_W'(ch) * ADDR_W'(ROWS);
    ch_wgt_base = cfg_q.wgt_base + ADDR_W'(ch) * ADDR_W'(taps);
  end

  // ------------------------------------------------------------ state
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cfg_q <= '0;
      ch    <= '0;
      cnt   <= '0;
      tap   <= '0;
      ky    <= '0;
      kx    <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          cfg_q <= cfg;
          ch    <= '0;
          cnt   <= '0;
          state <= S_LOAD;
        end
        S_LOAD: begin
          if (cnt == load_len) begin
            cnt   <= '0;
            tap   <= '0;
            ky    <= '0;
            kx    <= '0;
            state <= S_COMPUTE;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        S_COMPUTE: begin
          if (tap == taps - 1'b1) begin
            if (ch == cfg_q.num_ch - 1'b1) begin
              state <= S_DRAIN;
            end else begin
              ch    <= ch + 1'b1;
              state <= S_LOAD;
            end
          end else begin
            tap <= tap + 1'b1;
            if (!ky[0] && kx != cfg_q.ksize - 1'b1) kx <= kx + 1'b1;
            else if (ky[0] && kx != '0)            kx <= kx - 1'b1;
            else                                    ky <= ky + 1'b1;
          end
        end
        S_DRAIN: begin
          if (CH_W'(cnt) == drain_len - 1'b1) state <= S_DONE;
          else                                cnt   <= cnt + 1'b1;
        end
        default: state <= S_IDLE;   // S_DONE
      endcase
    end
  end

  // Memory reads issued in LOAD return one cycle later.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pix_rd_q  <= 1'b0;
      wgt_rd_q  <= 1'b0;
      wgt_tap_q <= '0;
    end else begin
      pix_rd_q  <= pix_rd_en;
      wgt_rd_q  <= wgt_rd_en;
      wgt_tap_q <= cnt[TAP_W-1:0];
    end
  end

  // ---------------------------------------------------------- outputs
  always_comb begin
    busy        = (state != S_IDLE);
    done        = (state == S_DONE);
    in_compute  = (state == S_COMPUTE);

    pix_rd_en   = (state == S_LOAD) && (cnt < 7'(ROWS));
    pix_rd_addr = ch_pix_base + ADDR_W'(cnt);
    wgt_rd_en   = (state == S_LOAD) && (cnt < 7'(taps));
    wgt_rd_addr = ch_wgt_base + ADDR_W'(cnt);

    arr_load      = pix_rd_q;
    cache_wr_en   = wgt_rd_q;
    cache_wr_addr = wgt_tap_q;
    cache_rd_addr = TAP_W'(ky) * TAP_W'(cfg_q.ksize) + TAP_W'(kx);

    // Move the tile towards the next tap, in the same cycle as this tap.
    arr_dir  = DIR_LEFT;
    arr_dist = '0;
    if (state == S_COMPUTE && tap != taps - 1'b1) begin
      arr_dist = cfg_q.dilation;
      if (!ky[0] && kx != cfg_q.ksize - 1'b1) arr_dir = DIR_LEFT;
      else if (ky[0] && kx != '0)            arr_dir = DIR_RIGHT;
      else                                    arr_dir = DIR_UP;
    end

    lane_en    = '0;
    lane_clear = '0;
    if (state == S_COMPUTE) begin
      if (cfg_q.depthwise) begin
        lane_en[ch[LANE_W-1:0]]    = 1'b1;
        lane_clear[ch[LANE_W-1:0]] = (tap == '0);
      end else begin
        lane_en    = '1;
        lane_clear = {LANES{(tap == '0) && (ch == '0)}};
      end
    end

    rd_lane   = cnt[LANE_W-1:0];
    act_valid = (state == S_DRAIN);
    act_shift = cfg_q.out_shift;
    act_relu  = cfg_q.relu;
    act_pool  = cfg_q.pool;
  end

  // --------------------------------------------------------- checks
  property p_cfg_ok;
    @(posedge clk) disable iff (!rst_n)
      (state == S_IDLE && start) |->
        (cfg.ksize != '0 && 32'(cfg.ksize) <= MAX_K && cfg.num_ch >= 1 &&
         (!cfg.depthwise || cfg.num_ch <= CH_W'(LANES)));
  endproperty
  a_cfg_ok: assert property (p_cfg_ok) else $error("layer_sequencer: unsupported configuration");

  // The pixel array is never asked to load and move in the same cycle.
  a_load_xor_move: assert property (@(posedge clk) disable iff (!rst_n) arr_load |-> arr_dist == '0)
    else $error("layer_sequencer: load and move in one cycle");

endmodule
