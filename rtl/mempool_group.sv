// MemPool group: 16 tiles and the four group networks.
//
// Each direction d (0 local, 1 east, 2 north, 3 northeast) has a 16x16
// radix-4 butterfly for requests and one for responses. Direction 0 links the
// group's own tiles: request network from the tiles' master ports 0 to their
// slave ports 0, response network back. For d = 1..3 the request network
// takes the tiles' master ports d and delivers, per destination tile, to the
// req_o[d-1] lanes, which the cluster carries to the slave ports d of group
// (group_id XOR d). The response network d takes the rsp_i[d-1] lanes coming
// back from that group and delivers them to the tiles' master ports d.
// Requests arriving from other groups (req_i) go straight to the tiles'
// slave ports d, and their responses leave straight from them (rsp_o).
// Request networks route on the target tile (address bits 9:6), response
// networks on the tile named in the response.
//
// The networks are combinational, so an access to another tile of the group
// takes 3 cycles at zero load (paper: "within three cycles"): the request is
// registered at the target tile, the bank takes one cycle and the response is
// registered at the requesting tile. The tile order inside the group (the
// floorplan of the paper's group figure) has no effect on the logic; tile t of
// the group has cluster number 16*group_id + t.
module mempool_group
  import mempool_pkg::*;
#(
  parameter int unsigned BankWords = SpmBankWords
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  input  group_id_t                  group_id_i,
  // Cores of the group: index 4*t + c is core c of tile t
  input  logic [63:0]                core_req_valid_i,
  input  tcdm_req_t                  core_req_i         [64],
  output logic [63:0]                core_req_ready_o,
  output logic [63:0]                core_rsp_valid_o,
  output tcdm_rsp_t                  core_rsp_o         [64],
  input  logic [63:0]                fetch_req_valid_i,
  input  logic [AddrWidth-1:0]       fetch_addr_i       [64],
  output logic [63:0]                fetch_req_ready_o,
  output logic [63:0]                fetch_rsp_valid_o,
  output logic [DataWidth-1:0]       fetch_rsp_data_o   [64],
  // Instruction-cache refill ports, one per tile
  output logic [15:0]                refill_req_valid_o,
  output logic [AddrWidth-1:0]       refill_req_addr_o  [16],
  input  logic [15:0]                refill_req_ready_i,
  input  logic [15:0]                refill_rsp_valid_i,
  input  icache_line_t               refill_rsp_data_i  [16],
  // Outgoing requests / returning responses, per direction 1..3 and tile lane
  output logic [15:0]                req_out_valid_o    [3],
  output net_req_t                   req_out_o          [3][16],
  input  logic [15:0]                req_out_ready_i    [3],
  input  logic [15:0]                rsp_in_valid_i     [3],
  input  net_rsp_t                   rsp_in_i           [3][16],
  output logic [15:0]                rsp_in_ready_o     [3],
  // Incoming requests / leaving responses, per direction 1..3 and tile
  input  logic [15:0]                req_in_valid_i     [3],
  input  net_req_t                   req_in_i           [3][16],
  output logic [15:0]                req_in_ready_o     [3],
  output logic [15:0]                rsp_out_valid_o    [3],
  output net_rsp_t                   rsp_out_o          [3][16],
  input  logic [15:0]                rsp_out_ready_i    [3]
);

  // Tile master/slave ports, indexed [direction][tile]
  logic [15:0] t_mst_req_valid [4], t_mst_req_ready [4];
  net_req_t    t_mst_req       [4][16];
  logic [15:0] t_mst_rsp_valid [4], t_mst_rsp_ready [4];
  net_rsp_t    t_mst_rsp       [4][16];
  logic [15:0] t_slv_req_valid [4], t_slv_req_ready [4];
  net_req_t    t_slv_req       [4][16];
  logic [15:0] t_slv_rsp_valid [4], t_slv_rsp_ready [4];
  net_rsp_t    t_slv_rsp       [4][16];

  for (genvar t = 0; t < 16; t++) begin : gen_tile
    logic [NumRemotePorts-1:0] mrv, mrr, msv, msr, srv, srr, ssv, ssr;
    net_req_t mrq [NumRemotePorts];
    net_rsp_t msp [NumRemotePorts];
    net_req_t srq [NumRemotePorts];
    net_rsp_t ssp [NumRemotePorts];

    for (genvar d = 0; d < NumRemotePorts; d++) begin : gen_port
      assign t_mst_req_valid[d][t] = mrv[d];
      assign t_mst_req[d][t]       = mrq[d];
      assign mrr[d]                = t_mst_req_ready[d][t];
      assign msv[d]                = t_mst_rsp_valid[d][t];
      assign msp[d]                = t_mst_rsp[d][t];
      assign t_mst_rsp_ready[d][t] = msr[d];
      assign srv[d]                = t_slv_req_valid[d][t];
      assign srq[d]                = t_slv_req[d][t];
      assign t_slv_req_ready[d][t] = srr[d];
      assign t_slv_rsp_valid[d][t] = ssv[d];
      assign t_slv_rsp[d][t]       = ssp[d];
      assign ssr[d]                = t_slv_rsp_ready[d][t];
    end

    mempool_tile #(.BankWords(BankWords)) i_tile (
      .clk_i,
      .rst_ni,
      .tile_id_i          ({group_id_i, tile_idx_t'(t)}),
      .core_req_valid_i   (core_req_valid_i[4*t +: 4]),
      .core_req_i         (core_req_i[4*t +: 4]),
      .core_req_ready_o   (core_req_ready_o[4*t +: 4]),
      .core_rsp_valid_o   (core_rsp_valid_o[4*t +: 4]),
      .core_rsp_o         (core_rsp_o[4*t +: 4]),
      .fetch_req_valid_i  (fetch_req_valid_i[4*t +: 4]),
      .fetch_addr_i       (fetch_addr_i[4*t +: 4]),
      .fetch_req_ready_o  (fetch_req_ready_o[4*t +: 4]),
      .fetch_rsp_valid_o  (fetch_rsp_valid_o[4*t +: 4]),
      .fetch_rsp_data_o   (fetch_rsp_data_o[4*t +: 4]),
      .refill_req_valid_o (refill_req_valid_o[t]),
      .refill_req_addr_o  (refill_req_addr_o[t]),
      .refill_req_ready_i (refill_req_ready_i[t]),
      .refill_rsp_valid_i (refill_rsp_valid_i[t]),
      .refill_rsp_data_i  (refill_rsp_data_i[t]),
      .mst_req_valid_o    (mrv),
      .mst_req_o          (mrq),
      .mst_req_ready_i    (mrr),
      .mst_rsp_valid_i    (msv),
      .mst_rsp_i          (msp),
      .mst_rsp_ready_o    (msr),
      .slv_req_valid_i    (srv),
      .slv_req_i          (srq),
      .slv_req_ready_o    (srr),
      .slv_rsp_valid_o    (ssv),
      .slv_rsp_o          (ssp),
      .slv_rsp_ready_i    (ssr)
    );
  end

  // Slave ports 1..3 connect straight to the group's incoming lanes.
  for (genvar d = 1; d < NumRemotePorts; d++) begin : gen_ext
    assign t_slv_req_valid[d] = req_in_valid_i[d-1];
    assign t_slv_req[d]       = req_in_i[d-1];
    assign req_in_ready_o[d-1] = t_slv_req_ready[d];
    assign rsp_out_valid_o[d-1] = t_slv_rsp_valid[d];
    assign rsp_out_o[d-1]       = t_slv_rsp[d];
    assign t_slv_rsp_ready[d]   = rsp_out_ready_i[d-1];
  end

  // Network inputs and outputs, per direction
  logic [15:0] rq_out_valid [4], rq_out_ready [4];
  net_req_t    rq_out       [4][16];
  logic [15:0] rs_in_valid  [4], rs_in_ready  [4];
  net_rsp_t    rs_in        [4][16];

  assign t_slv_req_valid[0] = rq_out_valid[0];
  assign t_slv_req[0]       = rq_out[0];
  assign rq_out_ready[0]    = t_slv_req_ready[0];
  assign rs_in_valid[0]     = t_slv_rsp_valid[0];
  assign rs_in[0]           = t_slv_rsp[0];
  assign t_slv_rsp_ready[0] = rs_in_ready[0];

  for (genvar d = 1; d < NumRemotePorts; d++) begin : gen_net_ext
    assign req_out_valid_o[d-1] = rq_out_valid[d];
    assign req_out_o[d-1]       = rq_out[d];
    assign rq_out_ready[d]      = req_out_ready_i[d-1];
    assign rs_in_valid[d]       = rsp_in_valid_i[d-1];
    assign rs_in[d]             = rsp_in_i[d-1];
    assign rsp_in_ready_o[d-1]  = rs_in_ready[d];
  end

  for (genvar d = 0; d < NumRemotePorts; d++) begin : gen_net
    logic [3:0] rq_dest [16];
    logic [3:0] rs_dest [16];
    for (genvar t = 0; t < 16; t++) begin : gen_dest
      assign rq_dest[t] = t_mst_req[d][t].req.addr[TileOffset +: 4];
      assign rs_dest[t] = rs_in[d][t].src_tile[3:0];
    end

    mempool_butterfly #(.NumPorts(16), .Radix(4), .payload_t(net_req_t)) i_req_net (
      .clk_i,
      .rst_ni,
      .in_valid_i  (t_mst_req_valid[d]),
      .in_dest_i   (rq_dest),
      .in_data_i   (t_mst_req[d]),
      .in_ready_o  (t_mst_req_ready[d]),
      .out_valid_o (rq_out_valid[d]),
      .out_data_o  (rq_out[d]),
      .out_ready_i (rq_out_ready[d])
    );

    mempool_butterfly #(.NumPorts(16), .Radix(4), .payload_t(net_rsp_t)) i_rsp_net (
      .clk_i,
      .rst_ni,
      .in_valid_i  (rs_in_valid[d]),
      .in_dest_i   (rs_dest),
      .in_data_i   (rs_in[d]),
      .in_ready_o  (rs_in_ready[d]),
      .out_valid_o (t_mst_rsp_valid[d]),
      .out_data_o  (t_mst_rsp[d]),
      .out_ready_i (t_mst_rsp_ready[d])
    );
  end

endmodule
