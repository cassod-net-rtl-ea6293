// pixel_memory_tb: self-checking test of the on-chip pixel memory.
//
// Default size (64 KB, 10922 words of 6 pixels). Writes random rows to
// random addresses including the first and last word, reads them back and
// checks the one-cycle read latency, that rd_data holds while rd_en is low,
// that a simultaneous write and read of different words work, and that
// addresses beyond the last word read as zero and are not written.
module pixel_memory_tb;
  import cassod_pkg::*;

  localparam int COLS = ARR_COLS;
  localparam int DEPTH = PIX_MEM_BYTES / COLS;

  logic clk = 1'b0;
  logic wr_en, rd_en;
  logic [ADDR_W-1:0] wr_addr, rd_addr;
  pixel_t [COLS-1:0] wr_data, rd_data;
  pixel_t [COLS-1:0] model [int];
  int checks = 0, failures = 0;

  pixel_memory dut (.clk, .wr_en, .wr_addr, .wr_data, .rd_en, .rd_addr, .rd_data);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write(int a);
    for (int c = 0; c < COLS; c++) wr_data[c] = pixel_t'($urandom);
    wr_en = 1'b1; wr_addr = ADDR_W'(a);
    if (a < DEPTH) model[a] = wr_data;
    @(posedge clk); #1;
    wr_en = 1'b0;
  endtask

  task automatic read_check(int a);
    pixel_t [COLS-1:0] exp_data;
    exp_data = (a < DEPTH && model.exists(a)) ? model[a] : '0;
    rd_en = 1'b1; rd_addr = ADDR_W'(a);
    @(posedge clk); #1;
    rd_en = 1'b0; rd_addr = ADDR_W'($urandom);
    checks++;
    if (rd_data !== exp_data) begin
      failures++;
      if (failures < 10) $display("word %0d: %h expected %h", a, rd_data, exp_data);
    end
    @(posedge clk); #1;            // held while rd_en is low
    checks++;
    if (rd_data !== exp_data) failures++;
  endtask

  initial begin
    wr_en = 1'b0; rd_en = 1'b0; wr_addr = '0; rd_addr = '0; wr_data = '0;
    @(posedge clk); #1;
    write(0); write(DEPTH - 1);
    for (int i = 0; i < 400; i++) write($urandom_range(0, DEPTH - 1));
    read_check(0); read_check(DEPTH - 1);
    foreach (model[a]) read_check(a);
    // write one word while reading another
    begin
      int a = 5, b = 6;
      write(b);
      for (int c = 0; c < COLS; c++) wr_data[c] = pixel_t'($urandom);
      wr_en = 1'b1; wr_addr = ADDR_W'(a); rd_en = 1'b1; rd_addr = ADDR_W'(b);
      model[a] = wr_data;
      @(posedge clk); #1;
      wr_en = 1'b0; rd_en = 1'b0;
      checks++;
      if (rd_data !== model[b]) failures++;
      read_check(a);
    end
    // beyond the last word
    write(DEPTH); write(DEPTH + 7);
    read_check(DEPTH); read_check(DEPTH + 7);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
