// L1 instruction-cache controller of one tile, shared by its four cores.
//
// The paper gives each tile 2 KiB of L1 instruction cache, with the
// controller on the logic die and the cache banks on the memory die, and no
// further detail. This is the simplest controller that serves four cores:
// direct mapped, 16-byte lines, blocking.
//
// Operation: a round-robin arbiter takes one fetch per cycle (fetch_req_ready_o
// is the grant). In that cycle the tag and data banks are read; in the next
// cycle the tag is compared. On a hit the word is returned to the core
// (fetch_rsp_valid_o, one cycle after the grant) and a new fetch can be taken
// in the same cycle, so hits stream at one per cycle. On a miss the controller
// stops taking fetches, requests the line on the refill port (valid/ready),
// waits for refill_rsp_valid_i, writes tag and line, sets the valid bit and
// returns the requested word to the waiting core in that same cycle.
// Valid bits are flip-flops and are cleared at reset.
module mempool_icache_ctrl
  import mempool_pkg::*;
(
  input  logic                        clk_i,
  input  logic                        rst_ni,
  // Core fetch ports
  input  logic [NumCoresPerTile-1:0]  fetch_req_valid_i,
  input  logic [AddrWidth-1:0]        fetch_addr_i      [NumCoresPerTile],
  output logic [NumCoresPerTile-1:0]  fetch_req_ready_o,
  output logic [NumCoresPerTile-1:0]  fetch_rsp_valid_o,
  output logic [DataWidth-1:0]        fetch_rsp_data_o  [NumCoresPerTile],
  // Refill port towards the instruction memory
  output logic                        refill_req_valid_o,
  output logic [AddrWidth-1:0]        refill_req_addr_o,
  input  logic                        refill_req_ready_i,
  input  logic                        refill_rsp_valid_i,
  input  icache_line_t                refill_rsp_data_i,
  // Cache banks
  output logic                        tag_req_o,
  output logic                        tag_we_o,
  output logic [ICacheIdxW-1:0]       tag_addr_o,
  output logic [ICacheTagW-1:0]       tag_wdata_o,
  input  logic [ICacheTagW-1:0]       tag_rdata_i,
  output logic                        data_req_o,
  output logic                        data_we_o,
  output logic [ICacheIdxW-1:0]       data_addr_o,
  output icache_line_t                data_wdata_o,
  input  icache_line_t                data_rdata_i
);

  typedef enum logic [1:0] {Idle, RefillReq, RefillWait} state_e;

  state_e                   state_q, state_d;
  logic [ICacheLines-1:0]   line_valid_q;
  logic                     lk_valid_q;
  core_idx_t                lk_core_q;
  logic [AddrWidth-1:0]     lk_addr_q;

  logic [NumCoresPerTile-1:0] arb_gnt;
  core_idx_t                  arb_idx;
  logic                       arb_valid;

  function automatic logic [ICacheIdxW-1:0] idx_of(logic [AddrWidth-1:0] a);
    return a[ICacheOffW +: ICacheIdxW];
  endfunction
  function automatic logic [ICacheTagW-1:0] tag_of(logic [AddrWidth-1:0] a);
    return a[AddrWidth-1 -: ICacheTagW];
  endfunction
  function automatic logic [DataWidth-1:0] word_of(icache_line_t l, logic [AddrWidth-1:0] a);
    return l[a[ICacheOffW-1:2]*DataWidth +: DataWidth];
  endfunction

  wire hit  = lk_valid_q && line_valid_q[idx_of(lk_addr_q)] && (tag_rdata_i == tag_of(lk_addr_q));
  wire miss = lk_valid_q && !hit;
  wire can_accept = (state_q == Idle) && !miss;
  wire refill_done = (state_q == RefillWait) && refill_rsp_valid_i;
  wire [AddrWidth-1:0] arb_addr = fetch_addr_i[arb_idx];

  mempool_rr_arbiter #(.N(NumCoresPerTile)) i_arb (
    .clk_i,
    .rst_ni,
    .req_i     (fetch_req_valid_i),
    .advance_i (can_accept),
    .gnt_o     (arb_gnt),
    .idx_o     (arb_idx),
    .valid_o   (arb_valid)
  );

  assign fetch_req_ready_o = arb_gnt & {NumCoresPerTile{can_accept}};

  // Bank accesses: a lookup read, or the line write at the end of a refill.
  always_comb begin
    tag_req_o    = (can_accept && arb_valid) || refill_done;
    tag_we_o     = refill_done;
    tag_addr_o   = refill_done ? idx_of(lk_addr_q) : idx_of(arb_addr);
    tag_wdata_o  = tag_of(lk_addr_q);
    data_req_o   = tag_req_o;
    data_we_o    = refill_done;
    data_addr_o  = tag_addr_o;
    data_wdata_o = refill_rsp_data_i;
  end

  // Responses
  always_comb begin
    fetch_rsp_valid_o = '0;
    for (int unsigned c = 0; c < NumCoresPerTile; c++) fetch_rsp_data_o[c] = '0;
    if (hit) begin
      fetch_rsp_valid_o[lk_core_q] = 1'b1;
      fetch_rsp_data_o[lk_core_q]  = word_of(data_rdata_i, lk_addr_q);
    end else if (refill_done) begin
      fetch_rsp_valid_o[lk_core_q] = 1'b1;
      fetch_rsp_data_o[lk_core_q]  = word_of(refill_rsp_data_i, lk_addr_q);
    end
  end

  assign refill_req_valid_o = (state_q == RefillReq);
  assign refill_req_addr_o  = {lk_addr_q[AddrWidth-1:ICacheOffW], {ICacheOffW{1'b0}}};

  always_comb begin
    state_d = state_q;
    unique case (state_q)
      Idle:       if (miss) state_d = RefillReq;
      RefillReq:  if (refill_req_ready_i) state_d = RefillWait;
      RefillWait: if (refill_rsp_valid_i) state_d = Idle;
      default:    state_d = Idle;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q      <= Idle;
      line_valid_q <= '0;
      lk_valid_q   <= 1'b0;
      lk_core_q    <= '0;
      lk_addr_q    <= '0;
    end else begin
      state_q    <= state_d;
      lk_valid_q <= can_accept && arb_valid;
      if (can_accept && arb_valid) begin
        lk_core_q <= arb_idx;
        lk_addr_q <= arb_addr;
      end
      if (refill_done) line_valid_q[idx_of(lk_addr_q)] <= 1'b1;
    end
  end

endmodule
