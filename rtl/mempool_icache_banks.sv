// L1 instruction-cache SRAM banks of one tile: a tag bank and a data bank.
//
// 2 KiB of data (paper) as 128 lines of 16 bytes, and 128 tags of 21 bits
// (line size and organisation are this design's choice). Both banks are
// single-port SRAMs with one cycle of read latency, like the SPM banks, and
// sit on the memory die in the 3D design. Valid bits are not kept here but in
// the controller, so that they can be reset.
module mempool_icache_banks
  import mempool_pkg::*;
(
  input  logic                  clk_i,
  input  logic                  tag_req_i,
  input  logic                  tag_we_i,
  input  logic [ICacheIdxW-1:0] tag_addr_i,
  input  logic [ICacheTagW-1:0] tag_wdata_i,
  output logic [ICacheTagW-1:0] tag_rdata_o,
  input  logic                  data_req_i,
  input  logic                  data_we_i,
  input  logic [ICacheIdxW-1:0] data_addr_i,
  input  icache_line_t          data_wdata_i,
  output icache_line_t          data_rdata_o
);

  logic [ICacheTagW-1:0] tag_mem  [ICacheLines];
  icache_line_t          data_mem [ICacheLines];

  always_ff @(posedge clk_i) begin
    if (tag_req_i) begin
      if (tag_we_i) tag_mem[tag_addr_i] <= tag_wdata_i;
      else          tag_rdata_o         <= tag_mem[tag_addr_i];
    end
  end

  always_ff @(posedge clk_i) begin
    if (data_req_i) begin
      if (data_we_i) data_mem[data_addr_i] <= data_wdata_i;
      else           data_rdata_o          <= data_mem[data_addr_i];
    end
  end

endmodule
