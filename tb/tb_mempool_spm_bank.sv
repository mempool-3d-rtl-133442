// Testbench for mempool_spm_bank: random byte-masked writes and reads on a
// 64-word bank, checked against a reference array. Checks that read data
// appears exactly one cycle after the request and holds while the bank idles.
module tb_mempool_spm_bank;
  localparam int unsigned Words = 64;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic        req, we;
  logic [5:0]  addr;
  logic [31:0] wdata, rdata;
  logic [3:0]  be;
  logic [31:0] model [Words];
  int checks = 0, failures = 0;

  mempool_spm_bank #(.NumWords(Words), .DataWidth(32)) dut (
    .clk_i(clk), .req_i(req), .we_i(we), .addr_i(addr), .wdata_i(wdata), .be_i(be), .rdata_o(rdata)
  );

  task automatic check(input logic [31:0] got, input logic [31:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h exp %h", what, got, exp);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req = 0; we = 0; addr = 0; wdata = 0; be = 0;
    // Fill every word with full writes.
    for (int i = 0; i < Words; i++) begin
      @(negedge clk);
      req = 1; we = 1; addr = 6'(i); be = 4'hf; wdata = $urandom;
      model[i] = wdata;
    end
    @(negedge clk) req = 0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      req = ($urandom % 4) != 0;
      we  = $urandom % 2;
      addr = 6'($urandom % Words);
      be = 4'($urandom);
      wdata = $urandom;
      if (req && we) begin
        for (int b = 0; b < 4; b++) if (be[b]) model[addr][b*8 +: 8] = wdata[b*8 +: 8];
      end else if (req) begin
        automatic logic [31:0] exp = model[addr];
        @(negedge clk);
        check(rdata, exp, "read data one cycle after request");
        req = 0;
        @(negedge clk);
        check(rdata, exp, "read data held while idle");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
