// Testbench for mempool_tile_interconnect, with 16 small SPM banks
// (mempool_spm_bank, 16 words) and models of everything around the tile.
//
// The tile under test is tile 21 (group 1). Its four cores issue random loads
// and stores, half to their own tile and half to random other tiles. The
// four master-port models accept the outgoing requests at random, check that
// each left on the port that points to the target's group (XOR of group
// numbers), and answer later with data h(addr). The four slave-port models
// send requests from "remote tiles" to this tile's banks and accept the
// responses at random, which makes the hold registers fill.
// Rows are owned (cores: rows 0-7, two per core; slave ports: rows 8-15,
// two per port), so every expected value follows from the issuing side's
// own order. Checked: every response's data, id and store flag, that a local
// access answers exactly one cycle after it is accepted, that slave-port
// responses come back in order with the right source, and that bank
// conflicts, port contention, hold-register use and response collisions
// (local and remote responses for one core in one cycle) all happened.
module tb_mempool_tile_interconnect;
  import mempool_pkg::*;
  localparam int unsigned BW = 16;
  localparam tile_id_t MyTile = 6'd21;

  logic clk = 1'b0, rst_n = 1'b1;
  // falling reset edge at 1 ns so the asynchronous resets act before the first clock
  initial #1 rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [3:0]  core_req_valid, core_req_ready, core_rsp_valid;
  tcdm_req_t   core_req [4];
  tcdm_rsp_t   core_rsp [4];
  logic [3:0]  mst_req_valid, mst_req_ready, mst_rsp_valid, mst_rsp_ready;
  net_req_t    mst_req [4];
  net_rsp_t    mst_rsp [4];
  logic [3:0]  slv_req_valid, slv_req_ready, slv_rsp_valid, slv_rsp_ready;
  net_req_t    slv_req [4];
  net_rsp_t    slv_rsp [4];
  logic [15:0] bank_req, bank_we;
  logic [3:0]  bank_addr [16];
  logic [31:0] bank_wdata [16], bank_rdata [16];
  logic [3:0]  bank_be [16];

  mempool_tile_interconnect #(.BankWords(BW)) dut (
    .clk_i(clk), .rst_ni(rst_n), .tile_id_i(MyTile),
    .core_req_valid_i(core_req_valid), .core_req_i(core_req), .core_req_ready_o(core_req_ready),
    .core_rsp_valid_o(core_rsp_valid), .core_rsp_o(core_rsp),
    .mst_req_valid_o(mst_req_valid), .mst_req_o(mst_req), .mst_req_ready_i(mst_req_ready),
    .mst_rsp_valid_i(mst_rsp_valid), .mst_rsp_i(mst_rsp), .mst_rsp_ready_o(mst_rsp_ready),
    .slv_req_valid_i(slv_req_valid), .slv_req_i(slv_req), .slv_req_ready_o(slv_req_ready),
    .slv_rsp_valid_o(slv_rsp_valid), .slv_rsp_o(slv_rsp), .slv_rsp_ready_i(slv_rsp_ready),
    .bank_req_o(bank_req), .bank_we_o(bank_we), .bank_addr_o(bank_addr),
    .bank_wdata_o(bank_wdata), .bank_be_o(bank_be), .bank_rdata_i(bank_rdata)
  );

  function automatic logic [31:0] h(logic [31:0] a);
    return a * 32'h2545F491 ^ 32'h5bd1e995;
  endfunction

  logic [31:0] model [16][BW];

  for (genvar b = 0; b < 16; b++) begin : gen_bank
    mempool_spm_bank #(.NumWords(BW), .DataWidth(32)) i_bank (
      .clk_i(clk), .req_i(bank_req[b]), .we_i(bank_we[b]), .addr_i(bank_addr[b]),
      .wdata_i(bank_wdata[b]), .be_i(bank_be[b]), .rdata_o(bank_rdata[b])
    );
    initial begin
      for (int r = 0; r < BW; r++) begin
        i_bank.mem[r] = h(32'(b * 100 + r));
        model[b][r]   = h(32'(b * 100 + r));
      end
    end
  end

  int checks = 0, failures = 0, cyc = 0;
  int n_conflict = 0, n_contention = 0, n_hold = 0, n_collide = 0, n_local = 0, n_remote = 0, n_slv = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at cycle %0d", what, cyc); end
  endtask

  function automatic logic [31:0] apply_be(logic [31:0] old, logic [31:0] wd, logic [3:0] be);
    for (int i = 0; i < 4; i++) if (be[i]) old[i*8 +: 8] = wd[i*8 +: 8];
    return old;
  endfunction

  function automatic logic [31:0] mk_addr(tile_id_t t, int bank, int row);
    return {16'h0, 4'(row), t, 4'(bank), 2'b00};
  endfunction

  // Core state: outstanding table indexed by id
  bit          out_v   [4][16];
  logic [31:0] out_exp [4][16];
  bit          out_wen [4][16];
  bit          out_loc [4][16];
  int          out_cyc [4][16];
  int          issued  [4];
  // Master port models
  net_req_t    mst_q [4][$];
  // Slave port models
  net_rsp_t    slv_exp [4][$];
  int          slv_issued [4];

  localparam int unsigned PerCore = 600, PerSlv = 400;
  logic [3:0] c_acc = '0, m_acc = '0, s_acc = '0;

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    core_req_valid = '0; mst_req_ready = '0; mst_rsp_valid = '0; slv_req_valid = '0; slv_rsp_ready = '0;
    for (int i = 0; i < 4; i++) begin
      core_req[i] = '0; mst_rsp[i] = '0; slv_req[i] = '0;
      issued[i] = 0; slv_issued[i] = 0;
      for (int j = 0; j < 16; j++) out_v[i][j] = 0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    forever begin
      @(negedge clk);
      cyc++;
      // ---- drive ----
      // Handshakes seen in the previous cycle completed at the clock edge.
      core_req_valid &= ~c_acc;
      mst_rsp_valid  &= ~m_acc;
      slv_req_valid  &= ~s_acc;
      c_acc = '0; m_acc = '0; s_acc = '0;
      for (int c = 0; c < 4; c++) begin
        if (!core_req_valid[c] && issued[c] < PerCore && ($urandom % 4) != 0) begin
          automatic int id = -1;
          for (int j = 0; j < 16; j++) if (!out_v[c][j] && id < 0) id = j;
          if (id >= 0) begin
            automatic bit loc = ($urandom % 2) == 0;
            automatic tile_id_t t = MyTile;
            automatic int row = (c < 2 && cyc < 600) ? 2 * c : 2 * c + ($urandom % 2);
            automatic int bank = (cyc < 600) ? ($urandom % 2) : ($urandom % 16);
            if (!loc) while (t == MyTile) t = tile_id_t'($urandom);
            core_req_valid[c] = 1'b1;
            core_req[c] = '{addr: mk_addr(t, bank, row), wen: $urandom % 2, be: 4'($urandom),
                            wdata: $urandom, id: meta_id_t'(id)};
          end
        end
      end
      for (int d = 0; d < 4; d++) begin
        mst_req_ready[d] = ($urandom % 3) != 0;
        if (!mst_rsp_valid[d] && mst_q[d].size() > 0 && ($urandom % 2) == 0) begin
          automatic net_req_t r = mst_q[d][0];
          mst_rsp_valid[d] = 1'b1;
          mst_rsp[d] = '{rsp: '{rdata: h(r.req.addr), wen: r.req.wen, id: r.req.id},
                         src_tile: r.src_tile, src_core: r.src_core};
        end
        slv_rsp_ready[d] = ($urandom % 3) != 0;
        if (!slv_req_valid[d] && slv_issued[d] < PerSlv && ($urandom % 3) != 0) begin
          slv_req_valid[d] = 1'b1;
          slv_req[d] = '{req: '{addr: mk_addr(MyTile, $urandom % 16, 8 + 2 * d + ($urandom % 2)),
                                wen: $urandom % 2, be: 4'($urandom), wdata: $urandom,
                                id: meta_id_t'(slv_issued[d])},
                         src_tile: tile_id_t'($urandom), src_core: core_idx_t'($urandom)};
        end
      end
      #1;
      // ---- observe ----
      // core responses
      for (int c = 0; c < 4; c++) begin
        if (core_rsp_valid[c]) begin
          automatic int id = int'(core_rsp[c].id);
          check(out_v[c][id], "response to an outstanding id");
          if (out_v[c][id]) begin
            check(core_rsp[c].wen == out_wen[c][id], "store flag echoed");
            if (!out_wen[c][id]) check(core_rsp[c].rdata == out_exp[c][id], "core load data");
            if (out_loc[c][id]) check(cyc == out_cyc[c][id] + 1, "local access answers in 1 cycle");
            else check(cyc >= out_cyc[c][id] + 2, "remote response not early");
            out_v[c][id] = 0;
          end
        end
        if (dut.local_rsp_valid[c] && (dut.mst_q_valid & ~dut.mst_q_ready) != '0) n_collide++;
      end
      // core request handshakes
      for (int c = 0; c < 4; c++) begin
        if (core_req_valid[c]) begin
          automatic tcdm_req_t r = core_req[c];
          automatic bit loc = addr_tile(r.addr) == MyTile;
          if (core_req_ready[c]) begin
            automatic int id = int'(r.id);
            out_v[c][id] = 1; out_wen[c][id] = r.wen; out_loc[c][id] = loc; out_cyc[c][id] = cyc;
            if (loc) begin
              automatic int b = int'(addr_bank(r.addr));
              automatic int row = int'(r.addr[RowOffset +: 4]);
              out_exp[c][id] = model[b][row];
              if (r.wen) model[b][row] = apply_be(model[b][row], r.wdata, r.be);
              n_local++;
            end else begin
              out_exp[c][id] = h(r.addr);
              n_remote++;
            end
            issued[c]++;
            c_acc[c] = 1'b1;
          end else if (loc) begin
            n_conflict++;
          end else begin
            n_contention++;
          end
        end
      end
      // master ports
      for (int d = 0; d < 4; d++) begin
        if (mst_req_valid[d] && mst_req_ready[d]) begin
          automatic net_req_t r = mst_req[d];
          check(2'(d) == (addr_tile(r.req.addr) >> 4) ^ (MyTile >> 4), "request on the port of its direction");
          check(r.src_tile == MyTile, "source tile stamped");
          check(core_req[r.src_core] == r.req || !core_req_valid[r.src_core], "payload is the core's request");
          mst_q[d].push_back(r);
        end
        if (mst_rsp_valid[d] && mst_rsp_ready[d]) begin
          void'(mst_q[d].pop_front());
          m_acc[d] = 1'b1;
        end
      end
      // slave ports
      for (int d = 0; d < 4; d++) begin
        if (slv_rsp_valid[d] && !slv_rsp_ready[d]) n_hold++;
        if (slv_rsp_valid[d] && slv_rsp_ready[d]) begin
          check(slv_exp[d].size() > 0, "slave response expected");
          if (slv_exp[d].size() > 0) begin
            automatic net_rsp_t e = slv_exp[d].pop_front();
            check(slv_rsp[d].src_tile == e.src_tile && slv_rsp[d].src_core == e.src_core &&
                  slv_rsp[d].rsp.id == e.rsp.id && slv_rsp[d].rsp.wen == e.rsp.wen, "slave response header");
            if (!e.rsp.wen) check(slv_rsp[d].rsp.rdata == e.rsp.rdata, "slave load data");
          end
          n_slv++;
        end
        if (slv_req_valid[d] && slv_req_ready[d]) begin
          // The model is updated when the request reaches its bank.
          slv_issued[d]++;
          s_acc[d] = 1'b1;
        end
      end
      // Bank grants of slave-port requests: update the model in bank order.
      for (int b = 0; b < 16; b++) begin
        if (dut.bx_out_valid[b] && int'(dut.bx_out_src[b]) >= 4) begin
          automatic net_req_t r = dut.bx_out_data[b];
          automatic int row = int'(r.req.addr[RowOffset +: 4]);
          slv_exp[int'(dut.bx_out_src[b]) - 4].push_back(
            '{rsp: '{rdata: model[b][row], wen: r.req.wen, id: r.req.id}, src_tile: r.src_tile, src_core: r.src_core});
          if (r.req.wen) model[b][row] = apply_be(model[b][row], r.req.wdata, r.req.be);
        end
      end
      // done?
      begin
        automatic bit busy = 0;
        for (int c = 0; c < 4; c++) begin
          if (issued[c] < PerCore || (core_req_valid[c] && !c_acc[c])) busy = 1;
          for (int j = 0; j < 16; j++) if (out_v[c][j]) busy = 1;
          if (slv_issued[c] < PerSlv || slv_exp[c].size() > 0 || mst_q[c].size() > 0) busy = 1;
        end
        if (!busy) break;
      end
    end
    check(n_conflict > 0, "bank conflicts exercised");
    check(n_contention > 0, "master-port contention exercised");
    check(n_hold > 0, "slave response back-pressure exercised");
    check(n_collide > 0, "local/remote response collision exercised");
    check(n_slv == 4 * PerSlv, "all slave requests answered");
    $display("local=%0d remote=%0d slave=%0d conflicts=%0d contention=%0d hold=%0d collide=%0d cycles=%0d",
             n_local, n_remote, n_slv, n_conflict, n_contention, n_hold, n_collide, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
