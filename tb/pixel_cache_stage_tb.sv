// pixel_cache_stage_tb: self-checking test of one hierarchical selector stage.
//
// Builds stages with SHIFT = 1, 2 and 4 (the three stages of the default
// array) on a 6 x 6 grid, fills the grid with random pixels and checks, for
// every direction and for en low and high, that each output equals the input
// pixel SHIFT positions away with wrap-around, as computed here.
module pixel_cache_stage_tb;
  import cassod_pkg::*;

  localparam int R = 6, C = 6;

  pixel_t     in [R][C];
  logic       en;
  shift_dir_e dir;
  pixel_t     out1 [R][C], out2 [R][C], out4 [R][C];
  int         checks = 0, failures = 0;

  pixel_cache_stage #(.ROWS(R), .COLS(C), .SHIFT(1)) s1 (.in, .en, .dir, .out(out1));
  pixel_cache_stage #(.ROWS(R), .COLS(C), .SHIFT(2)) s2 (.in, .en, .dir, .out(out2));
  pixel_cache_stage #(.ROWS(R), .COLS(C), .SHIFT(4)) s4 (.in, .en, .dir, .out(out4));

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic pixel_t expect_px(int r, int c, int s);
    int sr = r, sc = c;
    if (!en) return in[r][c];
    case (dir)
      DIR_LEFT:  sc = (c + s) % C;
      DIR_RIGHT: sc = (c - s + 2 * C) % C;
      DIR_UP:    sr = (r + s) % R;
      default:   sr = (r - s + 2 * R) % R;
    endcase
    return in[sr][sc];
  endfunction

  initial begin
    for (int trial = 0; trial < 20; trial++) begin
      for (int r = 0; r < R; r++)
        for (int c = 0; c < C; c++)
          in[r][c] = pixel_t'($urandom);
      for (int e = 0; e < 2; e++) begin
        for (int d = 0; d < 4; d++) begin
          en  = e[0];
          dir = shift_dir_e'(d);
          #1;
          for (int r = 0; r < R; r++)
            for (int c = 0; c < C; c++) begin
              checks += 3;
              if (out1[r][c] !== expect_px(r, c, 1)) failures++;
              if (out2[r][c] !== expect_px(r, c, 2)) failures++;
              if (out4[r][c] !== expect_px(r, c, 4)) failures++;
            end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
