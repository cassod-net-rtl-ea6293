// conv_unit: one multiply-accumulate cell of the convolution processor.
//
// As drawn in the paper's block diagram: the pixel is multiplied by the
// filter weight and the product is added to the value held in the unit's
// buffer, which then holds the running result. One MAC per clock.
//
// Interface (this design's choice of control): with en high the buffer takes
// buffer + pix*wgt, or just pix*wgt when clear is also high (first tap of a
// new output). With en low the buffer holds. result shows the buffer, so a
// product appears in result one cycle after it is presented. Synchronous
// active-low reset clears the buffer. Signed 8-bit operands, 32-bit buffer.
module conv_unit
  import cassod_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    en,
  input  logic    clear,
  input  pixel_t  pix,
  input  weight_t wgt,
  output acc_t    result
);

  acc_t buffer;
  acc_t product;

  always_comb product = acc_t'(pix) * acc_t'(wgt);

  always_ff @(posedge clk) begin
    if (!rst_n)      buffer <= '0;
    else if (en)     buffer <= (clear ? '0 : buffer) + product;
  end

  assign result = buffer;

endmodule
