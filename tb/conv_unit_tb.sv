// conv_unit_tb: self-checking test of one multiply-accumulate cell.
//
// Drives 2000 random cycles of enable, clear, pixel and weight values
// (including the extreme values -128 and 127) and compares the unit's result
// with a reference sum kept in the testbench. Also checks that the result
// moves exactly one cycle after the product is presented and holds while
// the unit is disabled.
module conv_unit_tb;
  import cassod_pkg::*;

  logic    clk = 1'b0;
  logic    rst_n;
  logic    en, clear;
  pixel_t  pix;
  weight_t wgt;
  acc_t    result;
  int      checks = 0, failures = 0;
  longint  ref_acc;

  conv_unit dut (.clk, .rst_n, .en, .clear, .pix, .wgt, .result);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int pick8();
    int r = $urandom_range(0, 9);
    if (r == 0) return -128;
    if (r == 1) return 127;
    return int'($urandom_range(0, 255)) - 128;
  endfunction

  initial begin
    rst_n = 1'b0; en = 1'b0; clear = 1'b0; pix = '0; wgt = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    ref_acc = 0;
    checks++;
    if (result !== 0) begin failures++; $display("reset value %0d", result); end
    for (int i = 0; i < 2000; i++) begin
      en    = ($urandom_range(0, 3) != 0);
      clear = ($urandom_range(0, 15) == 0);
      pix   = pixel_t'(pick8());
      wgt   = weight_t'(pick8());
      @(posedge clk);
      if (en) ref_acc = (clear ? 0 : ref_acc) + longint'(pix) * longint'(wgt);
      #1;
      checks++;
      if (longint'(result) != ref_acc) begin
        failures++;
        if (failures < 10) $display("cycle %0d: result %0d expected %0d", i, result, ref_acc);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
