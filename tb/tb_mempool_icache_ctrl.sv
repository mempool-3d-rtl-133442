// Testbench for mempool_icache_ctrl with its banks (mempool_icache_banks)
// and an instruction memory model on the refill port that returns word
// f(a) = a * 0x9E3779B1 + 0x1234567 for byte address a, after a random delay.
// Four cores fetch from a 4 KiB window (twice the cache, so lines conflict)
// with one fetch outstanding each. Checks every returned word against f,
// checks that a hit returns exactly one cycle after the grant, that a miss
// issues a line-aligned refill for the right line, and that both hits and
// misses occur.
module tb_mempool_icache_ctrl;
  import mempool_pkg::*;
  logic clk = 1'b0, rst_n = 1'b1;
  // falling reset edge at 1 ns so the asynchronous resets act before the first clock
  initial #1 rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [3:0]  fetch_valid, fetch_ready, rsp_valid;
  logic [31:0] fetch_addr [4], rsp_data [4];
  logic        refill_req_valid, refill_req_ready, refill_rsp_valid;
  logic [31:0] refill_req_addr;
  icache_line_t refill_rsp_data;
  logic                  tag_req, tag_we, data_req, data_we;
  logic [ICacheIdxW-1:0] tag_addr, data_addr;
  logic [ICacheTagW-1:0] tag_wdata, tag_rdata;
  icache_line_t          data_wdata, data_rdata;

  int checks = 0, failures = 0, hits = 0, misses = 0, done = 0;

  mempool_icache_ctrl dut (
    .clk_i(clk), .rst_ni(rst_n),
    .fetch_req_valid_i(fetch_valid), .fetch_addr_i(fetch_addr), .fetch_req_ready_o(fetch_ready),
    .fetch_rsp_valid_o(rsp_valid), .fetch_rsp_data_o(rsp_data),
    .refill_req_valid_o(refill_req_valid), .refill_req_addr_o(refill_req_addr), .refill_req_ready_i(refill_req_ready),
    .refill_rsp_valid_i(refill_rsp_valid), .refill_rsp_data_i(refill_rsp_data),
    .tag_req_o(tag_req), .tag_we_o(tag_we), .tag_addr_o(tag_addr), .tag_wdata_o(tag_wdata), .tag_rdata_i(tag_rdata),
    .data_req_o(data_req), .data_we_o(data_we), .data_addr_o(data_addr), .data_wdata_o(data_wdata), .data_rdata_i(data_rdata)
  );

  mempool_icache_banks i_banks (
    .clk_i(clk),
    .tag_req_i(tag_req), .tag_we_i(tag_we), .tag_addr_i(tag_addr), .tag_wdata_i(tag_wdata), .tag_rdata_o(tag_rdata),
    .data_req_i(data_req), .data_we_i(data_we), .data_addr_i(data_addr), .data_wdata_i(data_wdata), .data_rdata_o(data_rdata)
  );

  function automatic logic [31:0] f(logic [31:0] a);
    return a * 32'h9E3779B1 + 32'h1234567;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Instruction memory model
  logic [31:0] pending_line;
  initial begin
    refill_req_ready = 1'b0; refill_rsp_valid = 1'b0; refill_rsp_data = '0;
    forever begin
      @(negedge clk);
      refill_req_ready = ($urandom % 2) == 0;
      if (refill_req_valid && refill_req_ready) begin
        pending_line = refill_req_addr;
        check(refill_req_addr[3:0] == 4'h0, "refill address line aligned");
        @(negedge clk);
        refill_req_ready = 1'b0;
        repeat ($urandom % 6) @(negedge clk);
        refill_rsp_valid = 1'b1;
        for (int w = 0; w < 4; w++) refill_rsp_data[w*32 +: 32] = f(pending_line + 32'(4*w));
        @(negedge clk);
        refill_rsp_valid = 1'b0;
      end
    end
  end

  // Core fetch streams
  for (genvar c = 0; c < 4; c++) begin : gen_core
    initial begin
      fetch_valid[c] = 1'b0;
      fetch_addr[c]  = '0;
      @(posedge rst_n);
      for (int n = 0; n < 400; n++) begin
        automatic int unsigned lat = 0;
        automatic logic [31:0] a;
        // Mostly sequential fetch with occasional jumps.
        a = (($urandom % 8) == 0) ? 32'h8000 + 32'(($urandom % 1024) * 4) : fetch_addr[c] + 4;
        if (n == 0) a = 32'h8000 + 32'(c * 256);
        a = 32'h8000 + (a & 32'hffc);
        @(negedge clk);
        fetch_valid[c] = 1'b1;
        fetch_addr[c]  = a;
        #1;
        while (!fetch_ready[c]) begin
          @(negedge clk);
          #1;
        end
        @(negedge clk);
        fetch_valid[c] = 1'b0;
        #1;
        while (!rsp_valid[c]) begin
          lat++;
          @(negedge clk);
          #1;
        end
        check(rsp_data[c] == f(a), "fetched word");
        if (lat == 0) hits++; else misses++;
      end
      done++;
    end
  end

  // Hit latency: a lookup that hits answers one cycle after its grant,
  // and a missing lookup starts a refill.
  logic [3:0] granted_q;
  always @(posedge clk) begin
    if (rst_n) begin
      if (dut.lk_valid_q) begin
        if (dut.hit) check(rsp_valid == granted_q, "hit answers one cycle after grant");
        else check(rsp_valid == '0, "no response during miss");
      end
    end
    granted_q <= fetch_valid & fetch_ready;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    wait (done == 4);
    check(hits > 0, "hits exercised");
    check(misses > 0, "misses exercised");
    $display("hits=%0d misses=%0d", hits, misses);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
