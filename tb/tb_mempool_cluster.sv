// End-to-end testbench for mempool_cluster at its default size: 256 cores,
// 64 tiles, 1024 banks, 4 MiB of SPM.
//
// The SPM is preloaded with h(word index) and mirrored in a reference array.
// The 256 core models then run three phases:
//  1. Zero-load latency: single loads, one at a time, from a core to its own
//     tile, to another tile of its group, and to each of the three other
//     groups. Expected: 1, 3 and 5 cycles from acceptance to response.
//  2. Random traffic: every core issues loads and stores with up to 8
//     outstanding (ids), to random banks of the whole cluster, a third of
//     them to four hot tiles to provoke conflicts. Each core only touches the
//     rows it owns (row mod 256 == core), so the expected value of every load
//     follows from that core's own issue order.
//  3. Instruction fetch: every core fetches 8 consecutive words; the refill
//     ports are served by a model returning f(addr) after 3 cycles.
// Besides the data, ids and store flags, the test counts how often each
// mechanism occurred and fails if one never did: accesses to the own tile,
// the own group and each other direction (east, north, northeast), bank
// conflicts (local request held off), network back-pressure (remote request
// held off), slave-response hold registers in use, a local and a remote
// response meeting at one core, instruction-cache hits and misses.
module tb_mempool_cluster;
  import mempool_pkg::*;

  localparam int unsigned Rows = SpmBankWords;   // 1024
  localparam int unsigned RowsPerCore = Rows / NumCores;
  localparam int unsigned PerCore = 12;

  logic clk = 1'b0, rst_n = 1'b1;
  // falling reset edge at 1 ns so the asynchronous resets act before the first clock
  initial #1 rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [NumCores-1:0]  core_req_valid, core_req_ready, core_rsp_valid;
  tcdm_req_t            core_req [NumCores];
  tcdm_rsp_t            core_rsp [NumCores];
  logic [NumCores-1:0]  fetch_valid, fetch_ready, fetch_rsp_valid;
  logic [31:0]          fetch_addr [NumCores], fetch_data [NumCores];
  logic [NumTiles-1:0]  refill_req_valid, refill_req_ready, refill_rsp_valid;
  logic [31:0]          refill_req_addr [NumTiles];
  icache_line_t         refill_rsp_data [NumTiles];

  mempool_cluster dut (
    .clk_i(clk), .rst_ni(rst_n),
    .core_req_valid_i(core_req_valid), .core_req_i(core_req), .core_req_ready_o(core_req_ready),
    .core_rsp_valid_o(core_rsp_valid), .core_rsp_o(core_rsp),
    .fetch_req_valid_i(fetch_valid), .fetch_addr_i(fetch_addr), .fetch_req_ready_o(fetch_ready),
    .fetch_rsp_valid_o(fetch_rsp_valid), .fetch_rsp_data_o(fetch_data),
    .refill_req_valid_o(refill_req_valid), .refill_req_addr_o(refill_req_addr), .refill_req_ready_i(refill_req_ready),
    .refill_rsp_valid_i(refill_rsp_valid), .refill_rsp_data_i(refill_rsp_data)
  );

  function automatic logic [31:0] h(int unsigned w);
    return w * 32'h2545F491 ^ 32'h5bd1e995;
  endfunction
  function automatic logic [31:0] f(logic [31:0] a);
    return a * 32'h9E3779B1 + 32'h1234567;
  endfunction

  // Word index = row * 1024 + global bank; global bank = group, tile, bank.
  logic [31:0] model [Rows * NumBanks];

  for (genvar g = 0; g < NumGroups; g++) begin : gen_pg
    for (genvar t = 0; t < NumTilesPerGroup; t++) begin : gen_pt
      for (genvar b = 0; b < NumBanksPerTile; b++) begin : gen_pb
        initial begin
          for (int unsigned r = 0; r < Rows; r++) begin
            dut.gen_group[g].i_group.gen_tile[t].i_tile.gen_bank[b].i_bank.mem[r] = h(r * NumBanks + g * 256 + t * 16 + b);
          end
        end
      end
    end
  end

  int checks = 0, failures = 0, cyc = 0, phase = 1;
  int n_dir [4];
  int n_own = 0, n_conflict = 0, n_backpressure = 0, n_hold = 0, n_collide = 0, n_hit = 0, n_miss = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at cycle %0d", what, cyc);
    end
  endtask

  function automatic logic [31:0] apply_be(logic [31:0] old, logic [31:0] wd, logic [3:0] be);
    for (int i = 0; i < 4; i++) if (be[i]) old[i*8 +: 8] = wd[i*8 +: 8];
    return old;
  endfunction

  function automatic logic [31:0] word_addr(int unsigned w);
    return {w[29:0], 2'b00};
  endfunction

  // Monitors of internal mechanisms
  for (genvar g = 0; g < NumGroups; g++) begin : gen_mg
    for (genvar t = 0; t < NumTilesPerGroup; t++) begin : gen_mt
      always @(posedge clk) begin
        if (rst_n) begin
          if (|dut.gen_group[g].i_group.gen_tile[t].i_tile.i_interco.hold_valid_q) n_hold++;
          if (|(dut.gen_group[g].i_group.gen_tile[t].i_tile.i_interco.local_rsp_valid) &&
              |(dut.gen_group[g].i_group.gen_tile[t].i_tile.i_interco.mst_q_valid &
                ~dut.gen_group[g].i_group.gen_tile[t].i_tile.i_interco.mst_q_ready)) n_collide++;
        end
      end
    end
  end

  // Refill model: accepts at once, answers 3 cycles later.
  int refill_wait [NumTiles];
  logic [31:0] refill_line [NumTiles];
  always @(negedge clk) begin
    for (int t = 0; t < NumTiles; t++) begin
      refill_rsp_valid[t] = 1'b0;
      if (refill_wait[t] > 0) begin
        refill_wait[t]--;
        if (refill_wait[t] == 0) begin
          refill_rsp_valid[t] = 1'b1;
          for (int w = 0; w < 4; w++) refill_rsp_data[t][w*32 +: 32] = f(refill_line[t] + 32'(4 * w));
        end
      end else if (refill_req_valid[t] && refill_req_ready[t]) begin
        refill_line[t] = refill_req_addr[t];
        refill_wait[t] = 3;
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired in phase %0d", phase);
    for (int c = 0; c < NumCores; c++) begin
      automatic int n = 0;
      for (int j = 0; j < 8; j++) n += int'(out_v[c][j]);
      if (n > 0 || issued[c] < PerCore) $display("core %0d issued %0d outstanding %0d valid %b", c, issued[c], n, core_req_valid[c]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Core model state
  bit          out_v   [NumCores][8];
  logic [31:0] out_exp [NumCores][8];
  bit          out_wen [NumCores][8];
  int          out_cyc [NumCores][8];
  int          issued  [NumCores];
  logic [NumCores-1:0] c_acc = '0;

  // One load from core c to word w, alone in the system; returns latency.
  task automatic lone_load(input int c, input int unsigned w, output int lat);
    int acc_cyc;
    @(negedge clk);
    cyc++;
    core_req_valid[c] = 1'b1;
    core_req[c] = '{addr: word_addr(w), wen: 1'b0, be: 4'hf, wdata: '0, id: '0};
    #1;
    while (!core_req_ready[c]) begin
      @(negedge clk); cyc++; #1;
    end
    acc_cyc = cyc;
    @(negedge clk); cyc++;
    core_req_valid[c] = 1'b0;
    #1;
    while (!core_rsp_valid[c]) begin
      @(negedge clk); cyc++; #1;
    end
    check(core_rsp[c].rdata == model[w], "lone load data");
    lat = cyc - acc_cyc;
  endtask

  initial begin
    core_req_valid = '0; fetch_valid = '0; refill_req_ready = '1; refill_rsp_valid = '0;
    for (int c = 0; c < NumCores; c++) begin
      core_req[c] = '0; fetch_addr[c] = '0; issued[c] = 0;
      for (int j = 0; j < 8; j++) out_v[c][j] = 0;
    end
    for (int t = 0; t < NumTiles; t++) begin refill_wait[t] = 0; refill_rsp_data[t] = '0; refill_line[t] = '0; end
    for (int d = 0; d < 4; d++) n_dir[d] = 0;
    for (int unsigned w = 0; w < Rows * NumBanks; w++) model[w] = h(w);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // ---- Phase 1: zero-load latency ----
    begin
      int lat;
      // core 5 is in tile 1 (group 0); core 130 in tile 32 (group 2)
      lone_load(5, 1 * 16 + 3, lat);          check(lat == 1, "own tile: 1 cycle");
      lone_load(5, 9 * 16 + 7, lat);          check(lat == 3, "same group: 3 cycles");
      lone_load(5, 256 + 2 * 16 + 1, lat);    check(lat == 5, "east group: 5 cycles");
      lone_load(5, 512 + 4 * 16, lat);        check(lat == 5, "north group: 5 cycles");
      lone_load(5, 768 + 15 * 16 + 15, lat);  check(lat == 5, "northeast group: 5 cycles");
      lone_load(130, 512 + 0 * 16 + 4, lat);  check(lat == 1, "own tile (group 2): 1 cycle");
      lone_load(130, 512 + 13 * 16 + 4, lat); check(lat == 3, "same group (group 2): 3 cycles");
      lone_load(130, 0 + 2 * 16 + 4, lat);    check(lat == 5, "group 2 to group 0: 5 cycles");
      lone_load(130, 256 + 2 * 16 + 4, lat);  check(lat == 5, "group 2 to group 1: 5 cycles");
    end

    // ---- Phase 2: random traffic ----
    phase = 2;
    forever begin
      @(negedge clk);
      cyc++;
      core_req_valid &= ~c_acc;
      c_acc = '0;
      for (int c = 0; c < NumCores; c++) begin
        if (!core_req_valid[c] && issued[c] < PerCore && ($urandom % 2) == 0) begin
          automatic int id = -1;
          for (int j = 0; j < 8; j++) if (!out_v[c][j] && id < 0) id = j;
          if (id >= 0) begin
            automatic int unsigned gb = $urandom % NumBanks;
            automatic int unsigned row = c + NumCores * ($urandom % RowsPerCore);
            if (($urandom % 3) == 0) gb = (($urandom % 4) * 17) * 16 + ($urandom % 16);
            core_req_valid[c] = 1'b1;
            core_req[c] = '{addr: word_addr(row * NumBanks + gb), wen: $urandom % 2, be: 4'($urandom),
                            wdata: $urandom, id: meta_id_t'(id)};
          end
        end
      end
      #1;
      for (int c = 0; c < NumCores; c++) begin
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
      for (int c = 0; c < NumCores; c++) begin
        if (core_req_valid[c]) begin
          automatic tcdm_req_t r = core_req[c];
          automatic tile_id_t tgt = addr_tile(r.addr);
          automatic tile_id_t own = tile_id_t'(c / 4);
          if (core_req_ready[c]) begin
            automatic int unsigned w = r.addr[31:2];
            automatic int id = int'(r.id);
            out_v[c][id] = 1; out_wen[c][id] = r.wen; out_cyc[c][id] = cyc;
            out_exp[c][id] = model[w];
            if (r.wen) model[w] = apply_be(model[w], r.wdata, r.be);
            if (tgt == own) n_own++;
            else n_dir[int'(tgt[5:4] ^ own[5:4])]++;
            issued[c]++;
            c_acc[c] = 1'b1;
          end else if (tgt == own) begin
            n_conflict++;
          end else begin
            n_backpressure++;
          end
        end
      end
      begin
        automatic bit busy = 0;
        for (int c = 0; c < NumCores; c++) begin
          if (issued[c] < PerCore || (core_req_valid[c] && !c_acc[c])) busy = 1;
          for (int j = 0; j < 8; j++) if (out_v[c][j]) busy = 1;
        end
        if (!busy) break;
      end
    end
    @(negedge clk);
    core_req_valid = '0;

    // ---- Phase 3: instruction fetch ----
    phase = 3;
    begin
      int fetched [NumCores];
      bit waiting [NumCores];
      int gcyc [NumCores];
      bit all_done;
      for (int c = 0; c < NumCores; c++) begin fetched[c] = 0; waiting[c] = 0; end
      all_done = 0;
      while (!all_done) begin
        @(negedge clk);
        cyc++;
        // Handshakes seen in the previous cycle completed at the clock edge.
        for (int c = 0; c < NumCores; c++) if (waiting[c]) fetch_valid[c] = 1'b0;
        for (int c = 0; c < NumCores; c++) begin
          if (!waiting[c] && fetched[c] < 8 && !fetch_valid[c]) begin
            fetch_valid[c] = 1'b1;
            fetch_addr[c] = 32'h8000_0000 + 32'((c / 4) * 1024 + (c % 4) * 64 + fetched[c] * 4);
          end
        end
        #1;
        all_done = 1;
        for (int c = 0; c < NumCores; c++) begin
          if (waiting[c] && fetch_rsp_valid[c]) begin
            check(fetch_data[c] == f(fetch_addr[c]), "fetched instruction");
            if (cyc == gcyc[c] + 1) n_hit++; else n_miss++;
            waiting[c] = 0;
            fetched[c]++;
          end
        end
        for (int c = 0; c < NumCores; c++) begin
          if (fetch_valid[c] && fetch_ready[c] && !waiting[c]) begin
            waiting[c] = 1;
            gcyc[c] = cyc;
          end
          if (fetched[c] < 8) all_done = 0;
        end
      end
    end

    check(n_own > 0, "own-tile accesses");
    check(n_dir[0] > 0, "same-group accesses");
    check(n_dir[1] > 0, "east accesses");
    check(n_dir[2] > 0, "north accesses");
    check(n_dir[3] > 0, "northeast accesses");
    check(n_conflict > 0, "bank conflicts");
    check(n_backpressure > 0, "network back-pressure");
    check(n_hold > 0, "slave response hold");
    check(n_collide > 0, "response collision at a core");
    check(n_hit > 0, "instruction-cache hits");
    check(n_miss > 0, "instruction-cache misses");
    $display("own=%0d group=%0d east=%0d north=%0d northeast=%0d conflicts=%0d backpressure=%0d hold=%0d collide=%0d ihit=%0d imiss=%0d cycles=%0d",
             n_own, n_dir[0], n_dir[1], n_dir[2], n_dir[3], n_conflict, n_backpressure, n_hold, n_collide, n_hit, n_miss, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
