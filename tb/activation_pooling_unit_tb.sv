// activation_pooling_unit_tb: self-checking test of the output stage.
//
// Feeds 500 random 6 x 6 accumulator grids (values spread from small to
// beyond the 8-bit range, so saturation happens) with random shift, ReLU and
// pooling settings, and compares out_data one cycle later with a reference
// computed here: shift, ReLU, saturate to [-128, 127], then 2 x 2 max
// pooling into the top-left 3 x 3 corner with zeros elsewhere. Also checks
// out_valid and out_lane follow the inputs by exactly one cycle.
module activation_pooling_unit_tb;
  import cassod_pkg::*;

  localparam int R = 6, C = 6;

  logic       clk = 1'b0;
  logic       rst_n;
  logic       in_valid;
  logic [3:0] in_lane;
  acc_t       in_data [R][C];
  logic [4:0] out_shift;
  logic       relu, pool;
  logic       out_valid;
  logic [3:0] out_lane;
  pixel_t     out_data [R][C];
  int         checks = 0, failures = 0;
  int         n_relu = 0, n_pool = 0, n_sat = 0;

  activation_pooling_unit #(.ROWS(R), .COLS(C), .LANE_W(4)) dut (
    .clk, .rst_n, .in_valid, .in_lane, .in_data, .out_shift, .relu, .pool,
    .out_valid, .out_lane, .out_data);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int act_ref(longint v);
    longint q = v >>> out_shift;
    if (relu && q < 0) q = 0;
    if (q > 127) begin n_sat++; return 127; end
    if (q < -128) begin n_sat++; return -128; end
    return int'(q);
  endfunction

  initial begin
    int a [R][C];
    int e [R][C];
    rst_n = 1'b0; in_valid = 1'b0; in_lane = '0; out_shift = '0; relu = 1'b0; pool = 1'b0;
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) in_data[r][c] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    checks++;
    if (out_valid !== 1'b0) failures++;
    for (int i = 0; i < 500; i++) begin
      automatic int scale = $urandom_range(0, 20);
      in_valid  = 1'b1;
      in_lane   = 4'($urandom);
      out_shift = 5'($urandom_range(0, 12));
      relu      = $urandom_range(0, 1) != 0;
      pool      = $urandom_range(0, 1) != 0;
      n_relu   += relu;
      n_pool   += pool;
      for (int r = 0; r < R; r++)
        for (int c = 0; c < C; c++)
          in_data[r][c] = acc_t'(int'($urandom_range(0, 2 ** scale)) - (2 ** scale) / 2);
      for (int r = 0; r < R; r++)
        for (int c = 0; c < C; c++)
          a[r][c] = act_ref(longint'(in_data[r][c]));
      for (int r = 0; r < R; r++)
        for (int c = 0; c < C; c++)
          e[r][c] = pool ? 0 : a[r][c];
      if (pool)
        for (int r = 0; r < R / 2; r++)
          for (int c = 0; c < C / 2; c++) begin
            automatic int mx = a[2*r][2*c];
            if (a[2*r][2*c+1] > mx) mx = a[2*r][2*c+1];
            if (a[2*r+1][2*c] > mx) mx = a[2*r+1][2*c];
            if (a[2*r+1][2*c+1] > mx) mx = a[2*r+1][2*c+1];
            e[r][c] = mx;
          end
      @(posedge clk); #1;
      checks += 2;
      if (out_valid !== 1'b1) failures++;
      if (out_lane !== in_lane) failures++;
      for (int r = 0; r < R; r++)
        for (int c = 0; c < C; c++) begin
          checks++;
          if (int'(out_data[r][c]) != e[r][c]) begin
            failures++;
            if (failures < 10)
              $display("case %0d (%0d,%0d): %0d expected %0d (in %0d shift %0d relu %0d pool %0d)",
                       i, r, c, out_data[r][c], e[r][c], in_data[r][c], out_shift, relu, pool);
          end
        end
      if ($urandom_range(0, 4) == 0) begin
        in_valid = 1'b0;
        @(posedge clk); #1;
        checks++;
        if (out_valid !== 1'b0) failures++;
      end
    end
    checks += 3;
    if (n_relu == 0) failures++;
    if (n_pool == 0) failures++;
    if (n_sat == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
