// pixel_array_tb: self-checking test of the hierarchical pixel array.
//
// Loads a random 6 x 6 tile row by row (ROWS load cycles), checks it, then
// issues 600 random move commands: every direction and every distance
// D = 0..7 (all combinations of the three stages). A reference keeps the
// tile's offset on the torus and predicts every buffer after every cycle;
// each command must take effect in exactly one cycle, for every D. Reloads
// are mixed in to check that loading works after moves.
module pixel_array_tb;
  import cassod_pkg::*;

  localparam int R = 6, C = 6, H = 3;

  logic       clk = 1'b0;
  logic       rst_n;
  logic       load;
  pixel_t     load_row [C];
  shift_dir_e dir;
  logic [H-1:0] shift_dist;
  pixel_t     pix [R][C];
  int         checks = 0, failures = 0;
  int         moves_per_dist [8];

  pixel_t tile [R][C];
  int     dy, dx;

  pixel_array #(.ROWS(R), .COLS(C), .H(H)) dut (.clk, .rst_n, .load, .load_row, .dir, .shift_dist, .pix);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare(string what);
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++) begin
        checks++;
        if (pix[r][c] !== tile[(r + dy) % R][(c + dx) % C]) begin
          failures++;
          if (failures < 10)
            $display("%s: pix[%0d][%0d]=%0d expected %0d", what, r, c, pix[r][c],
                     tile[(r + dy) % R][(c + dx) % C]);
        end
      end
  endtask

  task automatic load_tile();
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++)
        tile[r][c] = pixel_t'($urandom);
    for (int r = 0; r < R; r++) begin
      load = 1'b1;
      for (int c = 0; c < C; c++) load_row[c] = tile[r][c];
      @(posedge clk); #1;
    end
    load = 1'b0;
    dy = 0; dx = 0;
    compare("after load");
  endtask

  initial begin
    rst_n = 1'b0; load = 1'b0; dir = DIR_LEFT; shift_dist = '0;
    for (int c = 0; c < C; c++) load_row[c] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    load_tile();
    for (int i = 0; i < 600; i++) begin
      if (i % 150 == 149) load_tile();
      dir        = shift_dir_e'($urandom_range(0, 3));
      shift_dist = H'($urandom_range(0, 7));
      @(posedge clk); #1;
      moves_per_dist[shift_dist]++;
      case (dir)
        DIR_LEFT:  dx = (dx + int'(shift_dist)) % C;
        DIR_RIGHT: dx = (dx - int'(shift_dist) + 2 * C) % C;
        DIR_UP:    dy = (dy + int'(shift_dist)) % R;
        default:   dy = (dy - int'(shift_dist) + 2 * R) % R;
      endcase
      compare("after move");
    end
    // every distance must have been exercised
    for (int d = 0; d < 8; d++) begin
      checks++;
      if (moves_per_dist[d] == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
