// MemPool cluster: 4 groups, 256 cores' ports, 1024 SPM banks.
//
// The groups sit in a 2x2 arrangement (group 1 east of group 0, group 2 north
// of it, group 3 north-east) and are joined only by point-to-point links, as
// in the paper's cluster figure: for every group g and direction d in
// {east=1, north=2, northeast=3}, the 16 request lanes of g's network d go to
// the slave ports d of group g XOR d, and the 16 response lanes come back. Each
// link has one elastic register in each direction, which makes an access to
// another group take 5 cycles at zero load (paper: five cycles).
//
// Ports are the cores' data and instruction-fetch ports (core k is core k%4 of
// tile k/4, tile t in group t/16) and the tiles' instruction-cache refill
// ports. SpmCapacityBytes sets the total scratchpad; the default 4 MiB gives
// 1024 words per bank. The paper's other capacities, 1, 2 and 8 MiB, are the
// same design with a different bank depth.
module mempool_cluster
  import mempool_pkg::*;
#(
  parameter int unsigned SpmCapacity = SpmCapacityBytes
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  logic [NumCores-1:0]   core_req_valid_i,
  input  tcdm_req_t             core_req_i         [NumCores],
  output logic [NumCores-1:0]   core_req_ready_o,
  output logic [NumCores-1:0]   core_rsp_valid_o,
  output tcdm_rsp_t             core_rsp_o         [NumCores],
  input  logic [NumCores-1:0]   fetch_req_valid_i,
  input  logic [AddrWidth-1:0]  fetch_addr_i       [NumCores],
  output logic [NumCores-1:0]   fetch_req_ready_o,
  output logic [NumCores-1:0]   fetch_rsp_valid_o,
  output logic [DataWidth-1:0]  fetch_rsp_data_o   [NumCores],
  output logic [NumTiles-1:0]   refill_req_valid_o,
  output logic [AddrWidth-1:0]  refill_req_addr_o  [NumTiles],
  input  logic [NumTiles-1:0]   refill_req_ready_i,
  input  logic [NumTiles-1:0]   refill_rsp_valid_i,
  input  icache_line_t          refill_rsp_data_i  [NumTiles]
);

  localparam int unsigned BankWords = SpmCapacity / (NumBanks * BeWidth);

  logic [15:0] req_out_valid [4][3], req_out_ready [4][3];
  net_req_t    req_out       [4][3][16];
  logic [15:0] rsp_in_valid  [4][3], rsp_in_ready  [4][3];
  net_rsp_t    rsp_in        [4][3][16];
  logic [15:0] req_in_valid  [4][3], req_in_ready  [4][3];
  net_req_t    req_in        [4][3][16];
  logic [15:0] rsp_out_valid [4][3], rsp_out_ready [4][3];
  net_rsp_t    rsp_out       [4][3][16];

  for (genvar g = 0; g < NumGroups; g++) begin : gen_group
    mempool_group #(.BankWords(BankWords)) i_group (
      .clk_i,
      .rst_ni,
      .group_id_i         (group_id_t'(g)),
      .core_req_valid_i   (core_req_valid_i[64*g +: 64]),
      .core_req_i         (core_req_i[64*g +: 64]),
      .core_req_ready_o   (core_req_ready_o[64*g +: 64]),
      .core_rsp_valid_o   (core_rsp_valid_o[64*g +: 64]),
      .core_rsp_o         (core_rsp_o[64*g +: 64]),
      .fetch_req_valid_i  (fetch_req_valid_i[64*g +: 64]),
      .fetch_addr_i       (fetch_addr_i[64*g +: 64]),
      .fetch_req_ready_o  (fetch_req_ready_o[64*g +: 64]),
      .fetch_rsp_valid_o  (fetch_rsp_valid_o[64*g +: 64]),
      .fetch_rsp_data_o   (fetch_rsp_data_o[64*g +: 64]),
      .refill_req_valid_o (refill_req_valid_o[16*g +: 16]),
      .refill_req_addr_o  (refill_req_addr_o[16*g +: 16]),
      .refill_req_ready_i (refill_req_ready_i[16*g +: 16]),
      .refill_rsp_valid_i (refill_rsp_valid_i[16*g +: 16]),
      .refill_rsp_data_i  (refill_rsp_data_i[16*g +: 16]),
      .req_out_valid_o    (req_out_valid[g]),
      .req_out_o          (req_out[g]),
      .req_out_ready_i    (req_out_ready[g]),
      .rsp_in_valid_i     (rsp_in_valid[g]),
      .rsp_in_i           (rsp_in[g]),
      .rsp_in_ready_o     (rsp_in_ready[g]),
      .req_in_valid_i     (req_in_valid[g]),
      .req_in_i           (req_in[g]),
      .req_in_ready_o     (req_in_ready[g]),
      .rsp_out_valid_o    (rsp_out_valid[g]),
      .rsp_out_o          (rsp_out[g]),
      .rsp_out_ready_i    (rsp_out_ready[g])
    );
  end

  // Inter-group links with one register stage each way.
  for (genvar g = 0; g < NumGroups; g++) begin : gen_link_g
    for (genvar d = 1; d < 4; d++) begin : gen_link_d
      localparam int unsigned Peer = g ^ d;
      for (genvar t = 0; t < 16; t++) begin : gen_lane
        // Requests of group g, direction d, to tile t of group Peer
        mempool_spill_reg #(.T(net_req_t)) i_req_reg (
          .clk_i,
          .rst_ni,
          .valid_i (req_out_valid[g][d-1][t]),
          .ready_o (req_out_ready[g][d-1][t]),
          .data_i  (req_out[g][d-1][t]),
          .valid_o (req_in_valid[Peer][d-1][t]),
          .ready_i (req_in_ready[Peer][d-1][t]),
          .data_o  (req_in[Peer][d-1][t])
        );
        // Responses of group Peer's slave ports d back to group g
        mempool_spill_reg #(.T(net_rsp_t)) i_rsp_reg (
          .clk_i,
          .rst_ni,
          .valid_i (rsp_out_valid[Peer][d-1][t]),
          .ready_o (rsp_out_ready[Peer][d-1][t]),
          .data_i  (rsp_out[Peer][d-1][t]),
          .valid_o (rsp_in_valid[g][d-1][t]),
          .ready_i (rsp_in_ready[g][d-1][t]),
          .data_o  (rsp_in[g][d-1][t])
        );
      end
    end
  end

endmodule
