// Testbench for mempool_butterfly (16x16, radix 4). Every input sends a
// stream of packets {source, sequence number, destination} to random
// destinations and holds each one until it is accepted; outputs accept at
// random. Checks that each packet comes out at its destination, that each
// source's packets arrive in order at each destination, that every packet
// is delivered, and that blocking (an input held off) happened. Zero-load
// latency is 0 cycles: a lone packet must be accepted in its first cycle.
module tb_mempool_butterfly;
  localparam int unsigned N = 16, PerSrc = 300;
  typedef struct packed {
    logic [3:0]  src;
    logic [3:0]  dst;
    logic [15:0] seq;
  } pkt_t;

  logic clk = 1'b0, rst_n = 1'b1;
  // falling reset edge at 1 ns so the asynchronous resets act before the first clock
  initial #1 rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [N-1:0] in_valid, in_ready, out_valid, out_ready;
  logic [3:0]   in_dest [N];
  pkt_t         in_data [N], out_data [N];
  int checks = 0, failures = 0, blocked = 0, delivered = 0;
  int sent [N];
  int next_seq [N][N];   // [src][dst] expected sequence number

  mempool_butterfly #(.NumPorts(N), .Radix(4), .payload_t(pkt_t)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .in_valid_i(in_valid), .in_dest_i(in_dest), .in_data_i(in_data), .in_ready_o(in_ready),
    .out_valid_o(out_valid), .out_data_o(out_data), .out_ready_i(out_ready)
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Per-source sequence counters per destination
  int seq_cnt [N][N];

  task automatic new_packet(input int s);
    automatic int d = $urandom % N;
    in_dest[s] = 4'(d);
    in_data[s] = '{src: 4'(s), dst: 4'(d), seq: 16'(seq_cnt[s][d])};
    seq_cnt[s][d]++;
  endtask

  initial begin
    in_valid = '0; out_ready = '0;
    for (int s = 0; s < N; s++) begin
      sent[s] = 0; in_dest[s] = '0; in_data[s] = '0;
      for (int d = 0; d < N; d++) begin seq_cnt[s][d] = 0; next_seq[s][d] = 0; end
    end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // Zero-load: a single packet from input 5 to output 10 passes at once.
    @(negedge clk);
    in_valid[5] = 1'b1; in_dest[5] = 4'd10; in_data[5] = '{src: 4'd5, dst: 4'd10, seq: 16'hffff};
    out_ready = '1;
    #1;
    check(in_ready[5] && out_valid[10] && out_data[10] == in_data[5], "zero-load pass-through");
    @(negedge clk);
    in_valid = '0;
    // Random traffic
    for (int s = 0; s < N; s++) new_packet(s);
    while (delivered < N * PerSrc) begin
      @(negedge clk);
      for (int s = 0; s < N; s++) in_valid[s] = (sent[s] < PerSrc);
      out_ready = N'($urandom) | N'($urandom);
      #1;
      for (int o = 0; o < N; o++) begin
        if (out_valid[o] && out_ready[o]) begin
          automatic pkt_t p = out_data[o];
          check(p.dst == 4'(o), "delivered to its destination");
          check(int'(p.seq) == next_seq[p.src][p.dst], "in order per source and destination");
          next_seq[p.src][p.dst] = int'(p.seq) + 1;
          delivered++;
        end
      end
      @(posedge clk);
      for (int s = 0; s < N; s++) begin
        if (in_valid[s] && in_ready[s]) begin
          sent[s]++;
          new_packet(s);
        end else if (in_valid[s]) begin
          blocked++;
        end
      end
    end
    check(blocked > 0, "blocking exercised");
    $display("delivered=%0d blocked_cycles=%0d", delivered, blocked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
