// Testbench for mempool_icache_banks: writes random tags and lines to all
// 128 entries, then reads them back in random order and checks the data one
// cycle after each read.
module tb_mempool_icache_banks;
  import mempool_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic                  tag_req, tag_we, data_req, data_we;
  logic [ICacheIdxW-1:0] tag_addr, data_addr;
  logic [ICacheTagW-1:0] tag_wdata, tag_rdata;
  icache_line_t          data_wdata, data_rdata;
  logic [ICacheTagW-1:0] tag_model  [ICacheLines];
  icache_line_t          data_model [ICacheLines];
  int checks = 0, failures = 0;

  mempool_icache_banks dut (
    .clk_i(clk),
    .tag_req_i(tag_req), .tag_we_i(tag_we), .tag_addr_i(tag_addr), .tag_wdata_i(tag_wdata), .tag_rdata_o(tag_rdata),
    .data_req_i(data_req), .data_we_i(data_we), .data_addr_i(data_addr), .data_wdata_i(data_wdata), .data_rdata_o(data_rdata)
  );

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    tag_req = 0; tag_we = 0; data_req = 0; data_we = 0;
    tag_addr = 0; data_addr = 0; tag_wdata = 0; data_wdata = 0;
    for (int i = 0; i < ICacheLines; i++) begin
      @(negedge clk);
      tag_req = 1; tag_we = 1; tag_addr = ICacheIdxW'(i); tag_wdata = ICacheTagW'($urandom);
      data_req = 1; data_we = 1; data_addr = ICacheIdxW'(ICacheLines - 1 - i);
      data_wdata = {$urandom, $urandom, $urandom, $urandom};
      tag_model[i] = tag_wdata;
      data_model[ICacheLines - 1 - i] = data_wdata;
    end
    for (int n = 0; n < 500; n++) begin
      automatic int ti = $urandom % ICacheLines;
      automatic int di = $urandom % ICacheLines;
      @(negedge clk);
      tag_req = 1; tag_we = 0; tag_addr = ICacheIdxW'(ti);
      data_req = 1; data_we = 0; data_addr = ICacheIdxW'(di);
      @(negedge clk);
      tag_req = 0; data_req = 0;
      checks += 2;
      if (tag_rdata !== tag_model[ti]) begin failures++; $display("FAIL tag %0d", ti); end
      if (data_rdata !== data_model[di]) begin failures++; $display("FAIL data %0d", di); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
