// Testbench for mempool_xbar (8 inputs, 16 outputs, as in the tile's bank
// crossbar). Random valid/destination/ready every cycle. A reference model
// keeps its own round-robin pointer per output and predicts exactly which
// input each output grants; the test checks out_valid, out_src, out_data and
// every in_ready against it, and counts cycles with a conflict (two inputs
// wanting one output).
module tb_mempool_xbar;
  localparam int unsigned NI = 8, NO = 16;
  logic clk = 1'b0, rst_n = 1'b1;
  // falling reset edge at 1 ns so the asynchronous resets act before the first clock
  initial #1 rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [NI-1:0] in_valid, in_ready;
  logic [3:0]    in_dest [NI];
  logic [31:0]   in_data [NI];
  logic [NO-1:0] out_valid, out_ready;
  logic [31:0]   out_data [NO];
  logic [2:0]    out_src  [NO];
  int checks = 0, failures = 0, conflicts = 0;
  int ptr [NO];

  mempool_xbar #(.NumIn(NI), .NumOut(NO), .payload_t(logic [31:0])) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .in_valid_i(in_valid), .in_dest_i(in_dest), .in_data_i(in_data), .in_ready_o(in_ready),
    .out_valid_o(out_valid), .out_data_o(out_data), .out_src_o(out_src), .out_ready_i(out_ready)
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = '0; out_ready = '0;
    for (int i = 0; i < NI; i++) begin in_dest[i] = '0; in_data[i] = '0; end
    for (int o = 0; o < NO; o++) ptr[o] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      for (int i = 0; i < NI; i++) begin
        in_valid[i] = ($urandom % 3) != 0;
        in_dest[i]  = 4'($urandom % ((n < 2500) ? 4 : NO));
        in_data[i]  = $urandom;
      end
      out_ready = NO'($urandom) | NO'($urandom);
      #1;
      begin
        automatic logic [NI-1:0] exp_ready = '0;
        for (int o = 0; o < NO; o++) begin
          automatic int win = -1;
          automatic int nreq = 0;
          for (int k = 0; k < NI; k++) begin
            automatic int j = (ptr[o] + k) % NI;
            if (in_valid[j] && in_dest[j] == 4'(o)) begin
              nreq++;
              if (win < 0) win = j;
            end
          end
          if (nreq > 1) conflicts++;
          check(out_valid[o] == (win >= 0), "out_valid");
          if (win >= 0) begin
            check(out_src[o] == 3'(win), "round-robin winner");
            check(out_data[o] == in_data[win], "payload");
            if (out_ready[o]) begin
              exp_ready[win] = 1'b1;
              ptr[o] = (win + 1) % NI;
            end
          end
        end
        check(in_ready == exp_ready, "in_ready");
      end
    end
    check(conflicts > 0, "conflicts exercised");
    $display("conflicts=%0d", conflicts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
