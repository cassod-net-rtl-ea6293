// filter_weight_memory: on-chip SRAM for the filter weights.
//
// Written from DRAM through the write port and read by the sequencer into the
// filter weight cache. The paper gives 128 KB of on-chip memory in total but
// not its split; this design gives half (64 KB) to the weights. A word holds
// one filter tap for all LANES output-channel lanes, so the depth is
// BYTES / LANES words (4681 with the defaults).
//
// Interface: simple dual port, one write and one read per cycle. Writes take
// effect on the rising edge. A read presented with rd_en delivers rd_data on
// the next cycle (synchronous SRAM read); rd_data holds otherwise.
// Written as an array; a process-specific SRAM macro would take its place.
module filter_weight_memory
  import cassod_pkg::*;
#(
  parameter int unsigned LANES = OCH_PAR,
  parameter int unsigned BYTES = WGT_MEM_BYTES,
  parameter int unsigned DEPTH = BYTES / LANES
) (
  input  logic clk,
  input  logic wr_en,
  input  logic [ADDR_W-1:0] wr_addr,
  input  weight_t [LANES-1:0] wr_data,
  input  logic rd_en,
  input  logic [ADDR_W-1:0] rd_addr,
  output weight_t [LANES-1:0] rd_data
);

  weight_t [LANES-1:0] mem [DEPTH];

  localparam int unsigned IDX_W = $clog2(DEPTH);

  // Addresses at or beyond DEPTH are ignored on write and read as zero.
  logic wr_ok, rd_ok;
  always_comb begin
    wr_ok = wr_addr < ADDR_W'(DEPTH);
    rd_ok = rd_addr < ADDR_W'(DEPTH);
  end

  always_ff @(posedge clk) begin
    if (wr_en && wr_ok) mem[wr_addr[IDX_W-1:0]] <= wr_data;
    if (rd_en) rd_data <= rd_ok ? mem[rd_addr[IDX_W-1:0]] : '0;
  end

endmodule
