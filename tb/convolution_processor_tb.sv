// convolution_processor_tb: self-checking test of the MAC grid.
//
// Default size (6 x 6 positions, 14 lanes). For 400 cycles it drives a
// random pixel grid, random per-lane weights and random lane enables and
// clears, keeps a reference sum for every unit, and after each cycle checks
// one randomly chosen lane through the read port. At the end every lane is
// read out and compared.
module convolution_processor_tb;
  import cassod_pkg::*;

  localparam int R = ARR_ROWS, C = ARR_COLS, L = OCH_PAR;

  logic    clk = 1'b0;
  logic    rst_n;
  pixel_t  pix [R][C];
  weight_t wgt [L];
  logic [L-1:0] lane_en, clear;
  logic [$clog2(L)-1:0] rd_lane;
  acc_t    rd_data [R][C];
  longint  model [L][R][C];
  int      checks = 0, failures = 0;

  convolution_processor dut (.clk, .rst_n, .pix, .wgt, .lane_en, .clear, .rd_lane, .rd_data);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_lane(int m);
    rd_lane = $clog2(L)'(m);
    #1;
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++) begin
        checks++;
        if (longint'(rd_data[r][c]) != model[m][r][c]) begin
          failures++;
          if (failures < 10)
            $display("lane %0d (%0d,%0d): %0d expected %0d", m, r, c, rd_data[r][c], model[m][r][c]);
        end
      end
  endtask

  initial begin
    rst_n = 1'b0; lane_en = '0; clear = '0; rd_lane = '0;
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) pix[r][c] = '0;
    for (int m = 0; m < L; m++) wgt[m] = '0;
    for (int m = 0; m < L; m++) for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) model[m][r][c] = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int i = 0; i < 400; i++) begin
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) pix[r][c] = pixel_t'($urandom);
      for (int m = 0; m < L; m++) begin
        wgt[m]     = weight_t'($urandom);
        lane_en[m] = ($urandom_range(0, 3) != 0);
        clear[m]   = ($urandom_range(0, 9) == 0);
      end
      @(posedge clk);
      for (int m = 0; m < L; m++)
        if (lane_en[m])
          for (int r = 0; r < R; r++)
            for (int c = 0; c < C; c++)
              model[m][r][c] = (clear[m] ? 0 : model[m][r][c]) + longint'(pix[r][c]) * longint'(wgt[m]);
      #1;
      check_lane($urandom_range(0, L - 1));
    end
    lane_en = '0;
    for (int m = 0; m < L; m++) check_lane(m);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
