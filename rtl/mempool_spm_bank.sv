// One scratchpad (SPM) SRAM bank, 32-bit words with byte enables.
//
// Models a single-port SRAM macro: a request in one cycle (req_i, with we_i
// for a write) is served at the clock edge, and read data appears on rdata_o
// in the next cycle and holds until the next read. Writes only update the
// bytes whose be_i bit is set. In the 3D design these macros sit on the memory
// die. The array is not reset, as an SRAM is not.
//
// The paper gives 16 banks per tile and single-cycle access from the tile; the
// depth follows from the capacity: 1024 words for the 4 MiB cluster (1 MiB:
// 256, 2 MiB: 512, 8 MiB: 2048).
module mempool_spm_bank #(
  parameter  int unsigned NumWords  = mempool_pkg::SpmBankWords,
  parameter  int unsigned DataWidth = 32,
  localparam int unsigned AddrW = (NumWords > 1) ? $clog2(NumWords) : 1,
  localparam int unsigned BeW   = DataWidth / 8
) (
  input  logic                 clk_i,
  input  logic                 req_i,
  input  logic                 we_i,
  input  logic [AddrW-1:0]     addr_i,
  input  logic [DataWidth-1:0] wdata_i,
  input  logic [BeW-1:0]       be_i,
  output logic [DataWidth-1:0] rdata_o
);

  logic [DataWidth-1:0] mem [NumWords];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (we_i) begin
        for (int unsigned b = 0; b < BeW; b++) begin
          if (be_i[b]) mem[addr_i][b*8 +: 8] <= wdata_i[b*8 +: 8];
        end
      end else begin
        rdata_o <= mem[addr_i];
      end
    end
  end

endmodule
