// filter_weight_cache_tb: self-checking test of the filter weight cache.
//
// Writes all 49 entries with random weights for 14 lanes, reads them back in
// random order (combinational read, same cycle), overwrites some entries and
// checks that a write becomes visible right after its clock edge while the
// other entries keep their values.
module filter_weight_cache_tb;
  import cassod_pkg::*;

  localparam int L = 14, D = 49;

  logic clk = 1'b0;
  logic wr_en;
  logic [5:0] wr_addr, rd_addr;
  weight_t [L-1:0] wr_data, rd_data;
  weight_t [L-1:0] model [D];
  int checks = 0, failures = 0;

  filter_weight_cache #(.LANES(L), .DEPTH(D)) dut (.clk, .wr_en, .wr_addr, .wr_data, .rd_addr, .rd_data);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write(int a);
    for (int m = 0; m < L; m++) wr_data[m] = weight_t'($urandom);
    wr_en = 1'b1; wr_addr = 6'(a);
    model[a] = wr_data;
    @(posedge clk); #1;
    wr_en = 1'b0;
  endtask

  task automatic check(int a);
    rd_addr = 6'(a);
    #1;
    checks++;
    if (rd_data !== model[a]) begin
      failures++;
      if (failures < 10) $display("entry %0d: %h expected %h", a, rd_data, model[a]);
    end
  endtask

  initial begin
    wr_en = 1'b0; wr_addr = '0; rd_addr = '0; wr_data = '0;
    @(posedge clk); #1;
    for (int a = 0; a < D; a++) write(a);
    for (int i = 0; i < 300; i++) check($urandom_range(0, D - 1));
    for (int i = 0; i < 100; i++) begin
      automatic int a = $urandom_range(0, D - 1);
      write(a);
      check(a);
      check($urandom_range(0, D - 1));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
