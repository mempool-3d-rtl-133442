// Fully connected crossbar with one round-robin arbiter per output.
//
// Every input carries a payload, a destination output index and a valid bit.
// Each output grants one of the inputs that address it; the grant and the
// payload pass combinationally, so the crossbar adds no latency. An input is
// ready when its output granted it and that output is ready (valid/ready
// handshake on both sides). out_src_o names the granted input, which the tile
// uses to route the response back.
//
// The paper calls the tile crossbar a fully connected logarithmic crossbar; it
// gives no arbitration policy. Round-robin is this design's choice.
module mempool_xbar #(
  parameter  int unsigned NumIn  = 4,
  parameter  int unsigned NumOut = 4,
  parameter  type         payload_t = logic [31:0],
  localparam int unsigned InW  = (NumIn  > 1) ? $clog2(NumIn)  : 1,
  localparam int unsigned OutW = (NumOut > 1) ? $clog2(NumOut) : 1
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic [NumIn-1:0]    in_valid_i,
  input  logic [OutW-1:0]     in_dest_i  [NumIn],
  input  payload_t            in_data_i  [NumIn],
  output logic [NumIn-1:0]    in_ready_o,
  output logic [NumOut-1:0]   out_valid_o,
  output payload_t            out_data_o [NumOut],
  output logic [InW-1:0]      out_src_o  [NumOut],
  input  logic [NumOut-1:0]   out_ready_i
);

  logic [NumIn-1:0] req [NumOut];
  logic [NumIn-1:0] gnt [NumOut];

  for (genvar o = 0; o < NumOut; o++) begin : gen_out
    for (genvar i = 0; i < NumIn; i++) begin : gen_req
      assign req[o][i] = in_valid_i[i] && (int'(in_dest_i[i]) == o);
    end

    mempool_rr_arbiter #(.N(NumIn)) i_arb (
      .clk_i,
      .rst_ni,
      .req_i     (req[o]),
      .advance_i (out_ready_i[o]),
      .gnt_o     (gnt[o]),
      .idx_o     (out_src_o[o]),
      .valid_o   (out_valid_o[o])
    );

    assign out_data_o[o] = in_data_i[out_src_o[o]];
  end

  always_comb begin
    in_ready_o = '0;
    for (int unsigned o = 0; o < NumOut; o++) begin
      in_ready_o |= gnt[o] & {NumIn{out_ready_i[o]}};
    end
  end

  // An input is never granted by two outputs at once.
  for (genvar i = 0; i < NumIn; i++) begin : gen_chk
    always_comb begin
      int unsigned n;
      n = 0;
      for (int unsigned o = 0; o < NumOut; o++) n += int'(gnt[o][i]);
      assert (n <= 1) else $error("input %0d granted by %0d outputs", i, n);
    end
  end

endmodule
