// Radix-4 butterfly network, 16x16 by default.
//
// The group uses four of these for requests (local, north, northeast, east),
// and four more, running the other way, for the responses. Each of the
// log4(16) = 2 stages is a column of 4x4 crossbar switches (mempool_xbar).
// Stage s resolves one base-4 digit of the destination, most significant
// first: a switch gathers the positions that differ only in that digit, and
// its output k sends the packet on at the same position with the digit
// replaced by k. After the last stage the position equals the destination.
// There is exactly one path per input/output pair, so the network can block
// when two packets want the same switch output; the loser waits
// (valid/ready). The network is combinational; the registers that set the
// paper's 3-cycle in-group latency sit at the tile boundaries.
//
// The paper fixes the size and radix (16x16, radix 4); the switch
// arbitration (round-robin) and the digit order are this design's choices.
module mempool_butterfly #(
  parameter  int unsigned NumPorts = 16,
  parameter  int unsigned Radix    = 4,
  parameter  type         payload_t = logic [31:0],
  localparam int unsigned PortW  = $clog2(NumPorts),
  localparam int unsigned DigitW = $clog2(Radix),
  localparam int unsigned Stages = PortW / DigitW
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic [NumPorts-1:0] in_valid_i,
  input  logic [PortW-1:0]    in_dest_i  [NumPorts],
  input  payload_t            in_data_i  [NumPorts],
  output logic [NumPorts-1:0] in_ready_o,
  output logic [NumPorts-1:0] out_valid_o,
  output payload_t            out_data_o [NumPorts],
  input  logic [NumPorts-1:0] out_ready_i
);

  localparam int unsigned NumSwitches = NumPorts / Radix;

  // What travels through the stages: the payload and its destination.
  typedef struct packed {
    logic [PortW-1:0] dest;
    payload_t         data;
  } flit_t;

  // Each stage has its own input-side signals, indexed by position; stage s
  // reads stage s-1's switch outputs. Stage 0 is fed by the network inputs.
  for (genvar s = 0; s < Stages; s++) begin : gen_stage
    // Digit resolved by this stage and its weight Radix**Digit.
    localparam int unsigned Digit  = Stages - 1 - s;
    localparam int unsigned Weight = Radix ** Digit;

    logic  [NumPorts-1:0] st_in_valid, st_in_ready, st_out_valid, st_out_ready;
    flit_t                st_in  [NumPorts];
    flit_t                st_out [NumPorts];

    if (s == 0) begin : gen_first
      for (genvar p = 0; p < NumPorts; p++) begin : gen_p
        assign st_in[p].dest = in_dest_i[p];
        assign st_in[p].data = in_data_i[p];
      end
      assign st_in_valid = in_valid_i;
      assign in_ready_o  = st_in_ready;
    end else begin : gen_mid
      assign st_in_valid = gen_stage[s-1].st_out_valid;
      assign st_in       = gen_stage[s-1].st_out;
    end

    if (s == Stages - 1) begin : gen_last
      for (genvar p = 0; p < NumPorts; p++) begin : gen_p
        assign out_data_o[p] = st_out[p].data;
      end
      assign out_valid_o  = st_out_valid;
      assign st_out_ready = out_ready_i;
    end else begin : gen_next
      assign st_out_ready = gen_stage[s+1].st_in_ready;
    end

    for (genvar w = 0; w < NumSwitches; w++) begin : gen_switch
      logic  [Radix-1:0]  sw_in_valid, sw_in_ready, sw_out_valid, sw_out_ready;
      logic  [DigitW-1:0] sw_in_dest [Radix];
      flit_t              sw_in_data [Radix];
      flit_t              sw_out_data[Radix];
      logic  [DigitW-1:0] sw_out_src [Radix];

      for (genvar k = 0; k < Radix; k++) begin : gen_port
        // Position of switch w's port k: digit `Digit` of it equals k.
        localparam int unsigned Pos = (w / Weight) * Weight * Radix + k * Weight + (w % Weight);

        assign sw_in_valid[k]    = st_in_valid[Pos];
        assign sw_in_data[k]     = st_in[Pos];
        assign sw_in_dest[k]     = st_in[Pos].dest[Digit*DigitW +: DigitW];
        assign st_in_ready[Pos]  = sw_in_ready[k];
        assign st_out_valid[Pos] = sw_out_valid[k];
        assign st_out[Pos]       = sw_out_data[k];
        assign sw_out_ready[k]   = st_out_ready[Pos];
      end

      mempool_xbar #(
        .NumIn     (Radix),
        .NumOut    (Radix),
        .payload_t (flit_t)
      ) i_switch (
        .clk_i,
        .rst_ni,
        .in_valid_i  (sw_in_valid),
        .in_dest_i   (sw_in_dest),
        .in_data_i   (sw_in_data),
        .in_ready_o  (sw_in_ready),
        .out_valid_o (sw_out_valid),
        .out_data_o  (sw_out_data),
        .out_src_o   (sw_out_src),
        .out_ready_i (sw_out_ready)
      );
    end
  end

endmodule
