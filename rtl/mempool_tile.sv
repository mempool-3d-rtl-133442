// MemPool tile: the ports of 4 cores, the tile interconnect, 16 SPM banks and
// the L1 instruction cache.
//
// The structure follows the paper's tile figure. The tile interconnect and
// the I$ controller are the logic-die part; the 16 SPM banks and the I$ banks
// are the memory-die part, so in the 3D design every signal between
// mempool_tile_interconnect / mempool_icache_ctrl and the banks crosses the
// face-to-face bond. The cores themselves (Snitch RV32IMAXpulpimg) are not part
// of this RTL: their data ports (core_*) and instruction-fetch ports (fetch_*)
// are the tile's ports. The 4 master ports carry this tile's requests to the
// group networks (local, east, north, northeast); the 4 slave ports take
// requests from them. tile_id_i is the tile's number in the cluster (0..63).
//
// Latencies: see mempool_tile_interconnect (1 cycle to the tile's own banks)
// and mempool_icache_ctrl (1 cycle for an instruction-cache hit).
module mempool_tile
  import mempool_pkg::*;
#(
  parameter int unsigned BankWords = SpmBankWords
) (
  input  logic                        clk_i,
  input  logic                        rst_ni,
  input  tile_id_t                    tile_id_i,
  // Core data ports
  input  logic [NumCoresPerTile-1:0]  core_req_valid_i,
  input  tcdm_req_t                   core_req_i        [NumCoresPerTile],
  output logic [NumCoresPerTile-1:0]  core_req_ready_o,
  output logic [NumCoresPerTile-1:0]  core_rsp_valid_o,
  output tcdm_rsp_t                   core_rsp_o        [NumCoresPerTile],
  // Core instruction-fetch ports
  input  logic [NumCoresPerTile-1:0]  fetch_req_valid_i,
  input  logic [AddrWidth-1:0]        fetch_addr_i      [NumCoresPerTile],
  output logic [NumCoresPerTile-1:0]  fetch_req_ready_o,
  output logic [NumCoresPerTile-1:0]  fetch_rsp_valid_o,
  output logic [DataWidth-1:0]        fetch_rsp_data_o  [NumCoresPerTile],
  // Instruction-cache refill port
  output logic                        refill_req_valid_o,
  output logic [AddrWidth-1:0]        refill_req_addr_o,
  input  logic                        refill_req_ready_i,
  input  logic                        refill_rsp_valid_i,
  input  icache_line_t                refill_rsp_data_i,
  // Master ports
  output logic [NumRemotePorts-1:0]   mst_req_valid_o,
  output net_req_t                    mst_req_o         [NumRemotePorts],
  input  logic [NumRemotePorts-1:0]   mst_req_ready_i,
  input  logic [NumRemotePorts-1:0]   mst_rsp_valid_i,
  input  net_rsp_t                    mst_rsp_i         [NumRemotePorts],
  output logic [NumRemotePorts-1:0]   mst_rsp_ready_o,
  // Slave ports
  input  logic [NumRemotePorts-1:0]   slv_req_valid_i,
  input  net_req_t                    slv_req_i         [NumRemotePorts],
  output logic [NumRemotePorts-1:0]   slv_req_ready_o,
  output logic [NumRemotePorts-1:0]   slv_rsp_valid_o,
  output net_rsp_t                    slv_rsp_o         [NumRemotePorts],
  input  logic [NumRemotePorts-1:0]   slv_rsp_ready_i
);

  localparam int unsigned RowW = (BankWords > 1) ? $clog2(BankWords) : 1;

  logic [NumBanksPerTile-1:0] bank_req, bank_we;
  logic [RowW-1:0]            bank_addr  [NumBanksPerTile];
  logic [DataWidth-1:0]       bank_wdata [NumBanksPerTile];
  logic [BeWidth-1:0]         bank_be    [NumBanksPerTile];
  logic [DataWidth-1:0]       bank_rdata [NumBanksPerTile];

  mempool_tile_interconnect #(.BankWords(BankWords)) i_interco (
    .clk_i,
    .rst_ni,
    .tile_id_i,
    .core_req_valid_i,
    .core_req_i,
    .core_req_ready_o,
    .core_rsp_valid_o,
    .core_rsp_o,
    .mst_req_valid_o,
    .mst_req_o,
    .mst_req_ready_i,
    .mst_rsp_valid_i,
    .mst_rsp_i,
    .mst_rsp_ready_o,
    .slv_req_valid_i,
    .slv_req_i,
    .slv_req_ready_o,
    .slv_rsp_valid_o,
    .slv_rsp_o,
    .slv_rsp_ready_i,
    .bank_req_o   (bank_req),
    .bank_we_o    (bank_we),
    .bank_addr_o  (bank_addr),
    .bank_wdata_o (bank_wdata),
    .bank_be_o    (bank_be),
    .bank_rdata_i (bank_rdata)
  );

  for (genvar b = 0; b < NumBanksPerTile; b++) begin : gen_bank
    mempool_spm_bank #(.NumWords(BankWords), .DataWidth(DataWidth)) i_bank (
      .clk_i,
      .req_i   (bank_req[b]),
      .we_i    (bank_we[b]),
      .addr_i  (bank_addr[b]),
      .wdata_i (bank_wdata[b]),
      .be_i    (bank_be[b]),
      .rdata_o (bank_rdata[b])
    );
  end

  logic                  tag_req, tag_we, data_req, data_we;
  logic [ICacheIdxW-1:0] tag_addr, data_addr;
  logic [ICacheTagW-1:0] tag_wdata, tag_rdata;
  icache_line_t          data_wdata, data_rdata;

  mempool_icache_ctrl i_icache_ctrl (
    .clk_i,
    .rst_ni,
    .fetch_req_valid_i,
    .fetch_addr_i,
    .fetch_req_ready_o,
    .fetch_rsp_valid_o,
    .fetch_rsp_data_o,
    .refill_req_valid_o,
    .refill_req_addr_o,
    .refill_req_ready_i,
    .refill_rsp_valid_i,
    .refill_rsp_data_i,
    .tag_req_o    (tag_req),
    .tag_we_o     (tag_we),
    .tag_addr_o   (tag_addr),
    .tag_wdata_o  (tag_wdata),
    .tag_rdata_i  (tag_rdata),
    .data_req_o   (data_req),
    .data_we_o    (data_we),
    .data_addr_o  (data_addr),
    .data_wdata_o (data_wdata),
    .data_rdata_i (data_rdata)
  );

  mempool_icache_banks i_icache_banks (
    .clk_i,
    .tag_req_i    (tag_req),
    .tag_we_i     (tag_we),
    .tag_addr_i   (tag_addr),
    .tag_wdata_i  (tag_wdata),
    .tag_rdata_o  (tag_rdata),
    .data_req_i   (data_req),
    .data_we_i    (data_we),
    .data_addr_i  (data_addr),
    .data_wdata_i (data_wdata),
    .data_rdata_o (data_rdata)
  );

endmodule
