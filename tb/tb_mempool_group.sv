// Testbench for mempool_group with 16-word banks. The group's three
// external directions are looped back (requests leaving towards group
// g XOR d re-enter this group's slave ports d, responses likewise), so every
// address lands in this group: tile addr[9:6], bank addr[5:2], row addr[15:12].
// The 64 core models issue random loads and stores with up to 8 outstanding;
// core c only uses rows r with r mod 16 == c mod 16 and bank (c/16)*4..+3, so
// expected data follow from its own order. The group bits are derived from the
// tile, so each word is always reached over the same route, as in a cluster. Checks data, ids and store flags,
// zero-load latency 1 (own tile) and 3 (another tile, through the local
// butterfly, or through a looped-back direction), and that bank conflicts,
// network back-pressure and every direction were exercised.
module tb_mempool_group;
  import mempool_pkg::*;
  localparam int unsigned BW = 16, PerCore = 40;

  logic clk = 1'b0, rst_n = 1'b1;
  // falling reset edge at 1 ns so the asynchronous resets act before the first clock
  initial #1 rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [63:0] core_req_valid, core_req_ready, core_rsp_valid;
  tcdm_req_t   core_req [64];
  tcdm_rsp_t   core_rsp [64];
  logic [63:0] fetch_valid, fetch_ready, fetch_rsp_valid;
  logic [31:0] fetch_addr [64], fetch_data [64];
  logic [15:0] refill_req_valid, refill_rsp_valid;
  logic [31:0] refill_req_addr [16];
  icache_line_t refill_rsp_data [16];
  logic [15:0] rq_v [3], rq_r [3], rs_v [3], rs_r [3];
  net_req_t    rq [3][16];
  net_rsp_t    rs [3][16];

  mempool_group #(.BankWords(BW)) dut (
    .clk_i(clk), .rst_ni(rst_n), .group_id_i(2'd1),
    .core_req_valid_i(core_req_valid), .core_req_i(core_req), .core_req_ready_o(core_req_ready),
    .core_rsp_valid_o(core_rsp_valid), .core_rsp_o(core_rsp),
    .fetch_req_valid_i(fetch_valid), .fetch_addr_i(fetch_addr), .fetch_req_ready_o(fetch_ready),
    .fetch_rsp_valid_o(fetch_rsp_valid), .fetch_rsp_data_o(fetch_data),
    .refill_req_valid_o(refill_req_valid), .refill_req_addr_o(refill_req_addr), .refill_req_ready_i(16'h0),
    .refill_rsp_valid_i(refill_rsp_valid), .refill_rsp_data_i(refill_rsp_data),
    .req_out_valid_o(rq_v), .req_out_o(rq), .req_out_ready_i(rq_r),
    .rsp_in_valid_i(rs_v), .rsp_in_i(rs), .rsp_in_ready_o(rs_r),
    .req_in_valid_i(rq_v), .req_in_i(rq), .req_in_ready_o(rq_r),
    .rsp_out_valid_o(rs_v), .rsp_out_o(rs), .rsp_out_ready_i(rs_r)
  );

  function automatic logic [31:0] h(int unsigned w);
    return w * 32'h2545F491 ^ 32'h5bd1e995;
  endfunction

  // Model index: row * 256 + tile * 16 + bank
  logic [31:0] model [BW * 256];
  for (genvar t = 0; t < 16; t++) begin : gen_pt
    for (genvar b = 0; b < 16; b++) begin : gen_pb
      initial for (int unsigned r = 0; r < BW; r++)
        dut.gen_tile[t].i_tile.gen_bank[b].i_bank.mem[r] = h(r * 256 + t * 16 + b);
    end
  end

  int checks = 0, failures = 0, cyc = 0;
  int n_dir [4];
  int n_own = 0, n_conflict = 0, n_backpressure = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at cycle %0d", what, cyc); end
  endtask

  function automatic logic [31:0] apply_be(logic [31:0] old, logic [31:0] wd, logic [3:0] be);
    for (int i = 0; i < 4; i++) if (be[i]) old[i*8 +: 8] = wd[i*8 +: 8];
    return old;
  endfunction

  // Address of row r, group grp, tile t, bank b
  function automatic logic [31:0] mk(int r, int grp, int t, int b);
    return {16'h0, 4'(r), 2'(grp), 4'(t), 4'(b), 2'b00};
  endfunction
  function automatic int unsigned key(logic [31:0] a);
    return int'(a[15:12]) * 256 + int'(a[9:6]) * 16 + int'(a[5:2]);
  endfunction

  bit          out_v   [64][8];
  logic [31:0] out_exp [64][8];
  bit          out_wen [64][8];
  int          issued  [64];
  logic [63:0] c_acc = '0;

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic lone_load(input int c, input logic [31:0] a, output int lat);
    int acc_cyc;
    @(negedge clk); cyc++;
    core_req_valid[c] = 1'b1;
    core_req[c] = '{addr: a, wen: 1'b0, be: 4'hf, wdata: '0, id: '0};
    #1;
    while (!core_req_ready[c]) begin @(negedge clk); cyc++; #1; end
    acc_cyc = cyc;
    @(negedge clk); cyc++;
    core_req_valid[c] = 1'b0;
    #1;
    while (!core_rsp_valid[c]) begin @(negedge clk); cyc++; #1; end
    check(core_rsp[c].rdata == model[key(a)], "lone load data");
    lat = cyc - acc_cyc;
  endtask

  initial begin
    core_req_valid = '0; fetch_valid = '0; refill_rsp_valid = '0;
    for (int c = 0; c < 64; c++) begin
      core_req[c] = '0; fetch_addr[c] = '0; issued[c] = 0;
      for (int j = 0; j < 8; j++) out_v[c][j] = 0;
    end
    for (int t = 0; t < 16; t++) refill_rsp_data[t] = '0;
    for (int d = 0; d < 4; d++) n_dir[d] = 0;
    for (int unsigned w = 0; w < BW * 256; w++) model[w] = h(w);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    begin
      int lat;
      // core 9 is in tile 2 of group 1
      lone_load(9, mk(3, 1, 2, 5), lat);  check(lat == 1, "own tile: 1 cycle");
      lone_load(9, mk(3, 1, 14, 5), lat); check(lat == 3, "other tile of group: 3 cycles");
      lone_load(9, mk(4, 0, 7, 1), lat);  check(lat == 3, "east network, looped back: 3 cycles");
      lone_load(9, mk(4, 3, 0, 1), lat);  check(lat == 3, "north network, looped back: 3 cycles");
      lone_load(9, mk(4, 2, 9, 1), lat);  check(lat == 3, "northeast network, looped back: 3 cycles");
    end
    forever begin
      @(negedge clk); cyc++;
      core_req_valid &= ~c_acc;
      c_acc = '0;
      for (int c = 0; c < 64; c++) begin
        if (!core_req_valid[c] && issued[c] < PerCore && ($urandom % 2) == 0) begin
          automatic int id = -1;
          for (int j = 0; j < 8; j++) if (!out_v[c][j] && id < 0) id = j;
          if (id >= 0) begin
            automatic int t = ($urandom % 4 == 0) ? c / 4 : $urandom % 16;
            // one route per word: the group bits follow from the tile
            automatic int grp = (t == c / 4) ? 1 : t % 4;
            core_req_valid[c] = 1'b1;
            core_req[c] = '{addr: mk(c % 16, grp, t, (c / 16) * 4 + ($urandom % 4)),
                            wen: $urandom % 2, be: 4'($urandom), wdata: $urandom, id: meta_id_t'(id)};
          end
        end
      end
      #1;
      for (int c = 0; c < 64; c++) begin
        if (core_rsp_valid[c]) begin
          automatic int id = int'(core_rsp[c].id);
          check(id < 8 && out_v[c][id], "response to an outstanding id");
          if (id < 8 && out_v[c][id]) begin
            check(core_rsp[c].wen == out_wen[c][id], "store flag echoed");
            if (!out_wen[c][id]) check(core_rsp[c].rdata == out_exp[c][id], "load data");
            out_v[c][id] = 0;
          end
        end
      end
      for (int c = 0; c < 64; c++) begin
        if (core_req_valid[c]) begin
          automatic tcdm_req_t r = core_req[c];
          automatic tile_id_t tgt = addr_tile(r.addr);
          automatic tile_id_t own = {2'd1, 4'(c / 4)};
          if (core_req_ready[c]) begin
            automatic int id = int'(r.id);
            out_v[c][id] = 1; out_wen[c][id] = r.wen;
            out_exp[c][id] = model[key(r.addr)];
            if (r.wen) model[key(r.addr)] = apply_be(model[key(r.addr)], r.wdata, r.be);
            if (tgt == own) n_own++; else n_dir[int'(tgt[5:4] ^ own[5:4])]++;
            issued[c]++;
            c_acc[c] = 1'b1;
          end else if (tgt == own) n_conflict++;
          else n_backpressure++;
        end
      end
      begin
        automatic bit busy = 0;
        for (int c = 0; c < 64; c++) begin
          if (issued[c] < PerCore || (core_req_valid[c] && !c_acc[c])) busy = 1;
          for (int j = 0; j < 8; j++) if (out_v[c][j]) busy = 1;
        end
        if (!busy) break;
      end
    end
    check(n_own > 0, "own-tile accesses");
    for (int d = 0; d < 4; d++) check(n_dir[d] > 0, "every direction used");
    check(n_conflict > 0, "bank conflicts");
    check(n_backpressure > 0, "network back-pressure");
    $display("own=%0d local=%0d east=%0d north=%0d northeast=%0d conflicts=%0d backpressure=%0d cycles=%0d",
             n_own, n_dir[0], n_dir[1], n_dir[2], n_dir[3], n_conflict, n_backpressure, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
