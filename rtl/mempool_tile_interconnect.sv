// Tile interconnect: joins the tile's 4 cores, its 4 remote ports and its 16
// SPM banks.
//
// Request side. Each core request is decoded from its address (see
// mempool_pkg): if it targets this tile it enters the bank crossbar; otherwise
// it is sent to one of the 4 master ports, picked by the XOR of the target and
// own group numbers (0: local network, 1: east, 2: north, 3: northeast), through
// a 4x4 crossbar that arbitrates between cores wanting the same port. Requests
// from other tiles arrive on the 4 slave ports, each behind an elastic
// register, and also enter the bank crossbar. The bank crossbar is 8x16 (4
// cores + 4 slave ports to 16 banks), round-robin per bank.
//
// Response side. Banks answer one cycle after the grant. A per-bank register
// remembers which crossbar input was granted; the response goes straight back
// to a local core, or to the slave port it came from. A slave port's response
// may be held off by the network; it then waits in a one-entry hold register
// and the port takes no new request until the hold register is sure to be
// free, so a bank response is never lost. Responses from remote tiles arrive
// on the 4 master ports, each behind an elastic register, and are
// steered to the core named in them. A core gets at most one response per
// cycle: its local bank response first, else round-robin over the master ports.
//
// Timing at zero load: same tile 1 cycle (request to response), other tile of
// the group 3 cycles, as the paper gives. Requests to other groups take 5 with
// the cluster's inter-group registers. Cores must always accept responses.
// Every request, loads and stores, is answered (stores with wen set); the
// transaction id is returned so that a core can match out-of-order responses.
module mempool_tile_interconnect
  import mempool_pkg::*;
#(
  parameter  int unsigned BankWords = SpmBankWords,
  localparam int unsigned RowW = (BankWords > 1) ? $clog2(BankWords) : 1
) (
  input  logic                        clk_i,
  input  logic                        rst_ni,
  input  tile_id_t                    tile_id_i,
  // Cores
  input  logic [NumCoresPerTile-1:0]  core_req_valid_i,
  input  tcdm_req_t                   core_req_i       [NumCoresPerTile],
  output logic [NumCoresPerTile-1:0]  core_req_ready_o,
  output logic [NumCoresPerTile-1:0]  core_rsp_valid_o,
  output tcdm_rsp_t                   core_rsp_o       [NumCoresPerTile],
  // Master ports: this tile's requests to other tiles, and their responses
  output logic [NumRemotePorts-1:0]   mst_req_valid_o,
  output net_req_t                    mst_req_o        [NumRemotePorts],
  input  logic [NumRemotePorts-1:0]   mst_req_ready_i,
  input  logic [NumRemotePorts-1:0]   mst_rsp_valid_i,
  input  net_rsp_t                    mst_rsp_i        [NumRemotePorts],
  output logic [NumRemotePorts-1:0]   mst_rsp_ready_o,
  // Slave ports: other tiles' requests to this tile's banks
  input  logic [NumRemotePorts-1:0]   slv_req_valid_i,
  input  net_req_t                    slv_req_i        [NumRemotePorts],
  output logic [NumRemotePorts-1:0]   slv_req_ready_o,
  output logic [NumRemotePorts-1:0]   slv_rsp_valid_o,
  output net_rsp_t                    slv_rsp_o        [NumRemotePorts],
  input  logic [NumRemotePorts-1:0]   slv_rsp_ready_i,
  // SPM banks
  output logic [NumBanksPerTile-1:0]  bank_req_o,
  output logic [NumBanksPerTile-1:0]  bank_we_o,
  output logic [RowW-1:0]             bank_addr_o      [NumBanksPerTile],
  output logic [DataWidth-1:0]        bank_wdata_o     [NumBanksPerTile],
  output logic [BeWidth-1:0]          bank_be_o        [NumBanksPerTile],
  input  logic [DataWidth-1:0]        bank_rdata_i     [NumBanksPerTile]
);

  localparam int unsigned NumBankIn = NumCoresPerTile + NumRemotePorts;
  localparam int unsigned BankInW   = $clog2(NumBankIn);

  // ---------------------------------------------------------------------------
  // Core request decode
  // ---------------------------------------------------------------------------
  logic [NumCoresPerTile-1:0] core_local;
  logic [1:0]                 core_dir   [NumCoresPerTile];
  net_req_t                   core_net   [NumCoresPerTile];
  logic [NumCoresPerTile-1:0] remote_ready;

  for (genvar c = 0; c < NumCoresPerTile; c++) begin : gen_core_dec
    tile_id_t tgt;
    assign tgt            = addr_tile(core_req_i[c].addr);
    assign core_local[c]  = (tgt == tile_id_i);
    assign core_dir[c]    = tgt[5:4] ^ tile_id_i[5:4];
    assign core_net[c]    = '{req: core_req_i[c], src_tile: tile_id_i, src_core: core_idx_t'(c)};
  end

  logic [1:0] remote_src [NumRemotePorts];

  mempool_xbar #(
    .NumIn     (NumCoresPerTile),
    .NumOut    (NumRemotePorts),
    .payload_t (net_req_t)
  ) i_remote_xbar (
    .clk_i,
    .rst_ni,
    .in_valid_i  (core_req_valid_i & ~core_local),
    .in_dest_i   (core_dir),
    .in_data_i   (core_net),
    .in_ready_o  (remote_ready),
    .out_valid_o (mst_req_valid_o),
    .out_data_o  (mst_req_o),
    .out_src_o   (remote_src),
    .out_ready_i (mst_req_ready_i)
  );

  // ---------------------------------------------------------------------------
  // Slave ports: input registers
  // ---------------------------------------------------------------------------
  logic [NumRemotePorts-1:0] slv_q_valid, slv_q_ready, slv_accept;
  net_req_t                  slv_q [NumRemotePorts];

  for (genvar d = 0; d < NumRemotePorts; d++) begin : gen_slv_reg
    mempool_spill_reg #(.T(net_req_t)) i_reg (
      .clk_i,
      .rst_ni,
      .valid_i (slv_req_valid_i[d]),
      .ready_o (slv_req_ready_o[d]),
      .data_i  (slv_req_i[d]),
      .valid_o (slv_q_valid[d]),
      .ready_i (slv_q_ready[d]),
      .data_o  (slv_q[d])
    );
  end

  // ---------------------------------------------------------------------------
  // Bank crossbar
  // ---------------------------------------------------------------------------
  logic [NumBankIn-1:0]       bx_in_valid, bx_in_ready;
  logic [BankSelW-1:0]        bx_in_dest [NumBankIn];
  net_req_t                   bx_in_data [NumBankIn];
  logic [NumBanksPerTile-1:0] bx_out_valid;
  net_req_t                   bx_out_data [NumBanksPerTile];
  logic [BankInW-1:0]         bx_out_src  [NumBanksPerTile];

  for (genvar c = 0; c < NumCoresPerTile; c++) begin : gen_bx_core
    assign bx_in_valid[c] = core_req_valid_i[c] && core_local[c];
    assign bx_in_data[c]  = core_net[c];
    assign bx_in_dest[c]  = addr_bank(core_req_i[c].addr);
    assign core_req_ready_o[c] = core_local[c] ? bx_in_ready[c] : remote_ready[c];
  end
  for (genvar d = 0; d < NumRemotePorts; d++) begin : gen_bx_slv
    assign bx_in_valid[NumCoresPerTile+d] = slv_q_valid[d] && slv_accept[d];
    assign bx_in_data[NumCoresPerTile+d]  = slv_q[d];
    assign bx_in_dest[NumCoresPerTile+d]  = addr_bank(slv_q[d].req.addr);
    assign slv_q_ready[d] = bx_in_ready[NumCoresPerTile+d];
  end

  mempool_xbar #(
    .NumIn     (NumBankIn),
    .NumOut    (NumBanksPerTile),
    .payload_t (net_req_t)
  ) i_bank_xbar (
    .clk_i,
    .rst_ni,
    .in_valid_i  (bx_in_valid),
    .in_dest_i   (bx_in_dest),
    .in_data_i   (bx_in_data),
    .in_ready_o  (bx_in_ready),
    .out_valid_o (bx_out_valid),
    .out_data_o  (bx_out_data),
    .out_src_o   (bx_out_src),
    .out_ready_i ('1)
  );

  // Bank requests, and what each bank must remember for its response.
  typedef struct packed {
    logic [BankInW-1:0] src;
    logic               wen;
    meta_id_t           id;
    tile_id_t           src_tile;
    core_idx_t          src_core;
  } bank_meta_t;

  logic [NumBanksPerTile-1:0] bank_rsp_valid_q;
  bank_meta_t                 bank_meta_q [NumBanksPerTile];

  for (genvar b = 0; b < NumBanksPerTile; b++) begin : gen_bank
    assign bank_req_o[b]   = bx_out_valid[b];
    assign bank_we_o[b]    = bx_out_data[b].req.wen;
    assign bank_addr_o[b]  = bx_out_data[b].req.addr[RowOffset +: RowW];
    assign bank_wdata_o[b] = bx_out_data[b].req.wdata;
    assign bank_be_o[b]    = bx_out_data[b].req.be;

    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) begin
        bank_rsp_valid_q[b] <= 1'b0;
        bank_meta_q[b]      <= '0;
      end else begin
        bank_rsp_valid_q[b] <= bx_out_valid[b];
        if (bx_out_valid[b]) begin
          bank_meta_q[b].src      <= bx_out_src[b];
          bank_meta_q[b].wen      <= bx_out_data[b].req.wen;
          bank_meta_q[b].id       <= bx_out_data[b].req.id;
          bank_meta_q[b].src_tile <= bx_out_data[b].src_tile;
          bank_meta_q[b].src_core <= bx_out_data[b].src_core;
        end
      end
    end
  end

  // ---------------------------------------------------------------------------
  // Bank responses: to local cores or slave ports
  // ---------------------------------------------------------------------------
  logic [NumCoresPerTile-1:0] local_rsp_valid;
  tcdm_rsp_t                  local_rsp   [NumCoresPerTile];
  logic [NumRemotePorts-1:0]  slv_bank_valid;
  net_rsp_t                   slv_bank_rsp [NumRemotePorts];

  always_comb begin
    local_rsp_valid = '0;
    slv_bank_valid  = '0;
    for (int unsigned c = 0; c < NumCoresPerTile; c++) local_rsp[c] = '0;
    for (int unsigned d = 0; d < NumRemotePorts; d++) slv_bank_rsp[d] = '0;
    for (int unsigned b = 0; b < NumBanksPerTile; b++) begin
      if (bank_rsp_valid_q[b]) begin
        if (int'(bank_meta_q[b].src) < NumCoresPerTile) begin
          local_rsp_valid[bank_meta_q[b].src[1:0]] = 1'b1;
          local_rsp[bank_meta_q[b].src[1:0]] = '{rdata: bank_rdata_i[b],
                                                 wen:   bank_meta_q[b].wen,
                                                 id:    bank_meta_q[b].id};
        end else begin
          slv_bank_valid[bank_meta_q[b].src[1:0]] = 1'b1;
          slv_bank_rsp[bank_meta_q[b].src[1:0]] =
            '{rsp: '{rdata: bank_rdata_i[b], wen: bank_meta_q[b].wen, id: bank_meta_q[b].id},
              src_tile: bank_meta_q[b].src_tile,
              src_core: bank_meta_q[b].src_core};
        end
      end
    end
  end

  // Slave response hold registers
  logic [NumRemotePorts-1:0] hold_valid_q;
  net_rsp_t                  hold_q [NumRemotePorts];

  for (genvar d = 0; d < NumRemotePorts; d++) begin : gen_slv_rsp
    assign slv_rsp_valid_o[d] = hold_valid_q[d] || slv_bank_valid[d];
    assign slv_rsp_o[d]       = hold_valid_q[d] ? hold_q[d] : slv_bank_rsp[d];
    // A new request may be granted only if its response, one cycle later,
    // will find the hold register empty.
    assign slv_accept[d] = !hold_valid_q[d] && !(slv_bank_valid[d] && !slv_rsp_ready_i[d]);

    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) begin
        hold_valid_q[d] <= 1'b0;
        hold_q[d]       <= '0;
      end else if (hold_valid_q[d]) begin
        if (slv_rsp_ready_i[d]) hold_valid_q[d] <= 1'b0;
      end else if (slv_bank_valid[d] && !slv_rsp_ready_i[d]) begin
        hold_valid_q[d] <= 1'b1;
        hold_q[d]       <= slv_bank_rsp[d];
      end
    end

    assert property (@(posedge clk_i) disable iff (!rst_ni) !(hold_valid_q[d] && slv_bank_valid[d]))
      else $error("slave port %0d: bank response while hold register full", d);
  end

  // ---------------------------------------------------------------------------
  // Master port responses to the cores
  // ---------------------------------------------------------------------------
  logic [NumRemotePorts-1:0] mst_q_valid, mst_q_ready;
  net_rsp_t                  mst_q [NumRemotePorts];

  for (genvar d = 0; d < NumRemotePorts; d++) begin : gen_mst_reg
    mempool_spill_reg #(.T(net_rsp_t)) i_reg (
      .clk_i,
      .rst_ni,
      .valid_i (mst_rsp_valid_i[d]),
      .ready_o (mst_rsp_ready_o[d]),
      .data_i  (mst_rsp_i[d]),
      .valid_o (mst_q_valid[d]),
      .ready_i (mst_q_ready[d]),
      .data_o  (mst_q[d])
    );
  end

  logic [NumRemotePorts-1:0] core_gnt [NumCoresPerTile];

  for (genvar c = 0; c < NumCoresPerTile; c++) begin : gen_core_rsp
    logic [NumRemotePorts-1:0] req;
    logic [1:0]                idx;
    logic                      valid;
    for (genvar d = 0; d < NumRemotePorts; d++) begin : gen_req
      assign req[d] = mst_q_valid[d] && (mst_q[d].src_core == core_idx_t'(c));
    end
    mempool_rr_arbiter #(.N(NumRemotePorts)) i_arb (
      .clk_i,
      .rst_ni,
      .req_i     (req),
      .advance_i (!local_rsp_valid[c]),
      .gnt_o     (core_gnt[c]),
      .idx_o     (idx),
      .valid_o   (valid)
    );
    assign core_rsp_valid_o[c] = local_rsp_valid[c] || valid;
    assign core_rsp_o[c]       = local_rsp_valid[c] ? local_rsp[c] : mst_q[idx].rsp;
  end

  always_comb begin
    mst_q_ready = '0;
    for (int unsigned c = 0; c < NumCoresPerTile; c++) begin
      if (!local_rsp_valid[c]) mst_q_ready |= core_gnt[c];
    end
  end

endmodule
