// shared_local_memory: the unified scratchpad shared by all PE cores.
//
// NBANK independent single-port banks of 64-bit words, word-interleaved:
// global word address a lives in bank a % NBANK at row a / NBANK. Each bank
// takes one read or write per cycle; read data appears one cycle after the
// request (synchronous SRAM behaviour). The paper gives the scratchpad's role
// and the chip's total SRAM (1.25 MB) but not its size, banking or port
// count; 512 KiB in 4 banks is this design's choice. The ports carry
// bank-local row addresses; the global interconnect does the interleaving.
module shared_local_memory
  import reason_pkg::*;
#(
  parameter int NBANK = SHM_BANKS,
  parameter int WORDS = 1 << SHM_AW
) (
  input  logic                                   clk,
  input  logic [NBANK-1:0]                       en,
  input  logic [NBANK-1:0]                       we,
  input  logic [NBANK-1:0][$clog2(WORDS/NBANK)-1:0] row,
  input  logic [NBANK-1:0][SHM_W-1:0]            wdata,
  output logic [NBANK-1:0][SHM_W-1:0]            rdata
);

  localparam int ROWS = WORDS / NBANK;

  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    logic [SHM_W-1:0] mem [ROWS];
    always_ff @(posedge clk) begin
      if (en[b]) begin
        if (we[b]) mem[row[b]] <= wdata[b];
        else       rdata[b]    <= mem[row[b]];
      end
    end
  end

endmodule
