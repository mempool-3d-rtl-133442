// Round-robin arbiter.
//
// Grants the first requester at or after a rotating priority pointer. The
// grant is combinational from req_i. When a grant is consumed (valid_o and
// advance_i in the same cycle) the pointer moves to the input after the
// winner, so every requester is served within N grants. The pointer resets to
// input 0.
module mempool_rr_arbiter #(
  parameter  int unsigned N    = 4,
  localparam int unsigned IdxW = (N > 1) ? $clog2(N) : 1
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic [N-1:0]    req_i,
  input  logic            advance_i,
  output logic [N-1:0]    gnt_o,
  output logic [IdxW-1:0] idx_o,
  output logic            valid_o
);

  logic [IdxW-1:0] ptr_q;

  always_comb begin
    valid_o = 1'b0;
    idx_o   = '0;
    for (int unsigned k = 0; k < N; k++) begin
      int unsigned j;
      j = int'(ptr_q) + k;
      if (j >= N) j = j - N;
      if (!valid_o && req_i[j]) begin
        valid_o = 1'b1;
        idx_o   = IdxW'(j);
      end
    end
    gnt_o = '0;
    if (valid_o) gnt_o[idx_o] = 1'b1;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ptr_q <= '0;
    end else if (valid_o && advance_i) begin
      ptr_q <= (int'(idx_o) == N - 1) ? '0 : idx_o + 1'b1;
    end
  end

endmodule
