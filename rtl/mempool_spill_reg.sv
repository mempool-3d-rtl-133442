// Two-entry elastic pipeline register (valid/ready).
//
// Adds one cycle of latency and keeps full throughput. ready_o depends only on
// the register's own state, so it cuts both the forward and the backward
// combinational path. The interconnect uses it wherever the paper's latencies
// (1, 3 and 5 cycles) put a register boundary.
module mempool_spill_reg #(
  parameter type T = logic [31:0]
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  logic valid_i,
  output logic ready_o,
  input  T     data_i,
  output logic valid_o,
  input  logic ready_i,
  output T     data_o
);

  T           mem_q [2];
  logic       wr_ptr_q, rd_ptr_q;
  logic [1:0] count_q;

  wire push = valid_i && ready_o;
  wire pop  = valid_o && ready_i;

  assign ready_o = (count_q != 2'd2);
  assign valid_o = (count_q != 2'd0);
  assign data_o  = mem_q[rd_ptr_q];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wr_ptr_q <= 1'b0;
      rd_ptr_q <= 1'b0;
      count_q  <= 2'd0;
    end else begin
      if (push) wr_ptr_q <= ~wr_ptr_q;
      if (pop)  rd_ptr_q <= ~rd_ptr_q;
      count_q <= count_q + {1'b0, push} - {1'b0, pop};
    end
  end

  always_ff @(posedge clk_i) begin
    if (push) mem_q[wr_ptr_q] <= data_i;
  end

endmodule
