// reg_bank_file: banked register file feeding the tree engine.
//
// B independent banks of R registers each (the paper's selected design
// point is B=64, R=32). Every bank has one read port and one write port that
// work in the same cycle, like the dual-port SRAM banks the paper describes.
// Reads are synchronous: rd_data is valid one clock after rd_en.
//
// Writes use the paper's automatic write-address policy: a write goes to
// the lowest free register of its bank, so instructions carry no write
// address; the address used is reported on wr_addr in the same cycle so a
// compiler (or testbench) can check its prediction. A register becomes free
// again when it is read with rd_release set, or on clear. The paper does not
// say how registers are freed; release-on-last-read is this design's choice.
// A write to a full bank is dropped and flagged on wr_overflow.
module reg_bank_file #(
  parameter int B = 64,
  parameter int R = 32,
  parameter int W = 16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clear,
  // read side
  input  logic [B-1:0]                  rd_en,
  input  logic [B-1:0][$clog2(R)-1:0]   rd_addr,
  input  logic [B-1:0]                  rd_release,
  output logic [B-1:0][W-1:0]           rd_data,
  // write side (automatic address)
  input  logic [B-1:0]                  wr_en,
  input  logic [B-1:0][W-1:0]           wr_data,
  output logic [B-1:0][$clog2(R)-1:0]   wr_addr,
  output logic [B-1:0]                  wr_overflow,
  output logic [B-1:0]                  bank_full
);

  localparam int AW = $clog2(R);

  for (genvar b = 0; b < B; b++) begin : g_bank
    logic [W-1:0] mem [R];
    logic [R-1:0] used;
    logic [AW-1:0] free_idx;
    logic          has_free;

    // lowest free register (priority encoder)
    always_comb begin
      free_idx = '0;
      has_free = 1'b0;
      for (int r = R - 1; r >= 0; r--) begin
        if (!used[r]) begin
          free_idx = AW'(r);
          has_free = 1'b1;
        end
      end
    end

    assign wr_addr[b]     = free_idx;
    assign wr_overflow[b] = wr_en[b] & ~has_free;
    assign bank_full[b]   = ~has_free;

    always_ff @(posedge clk) begin
      if (wr_en[b] && has_free) mem[free_idx] <= wr_data[b];
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        rd_data[b] <= '0;
      end else if (rd_en[b]) begin
        rd_data[b] <= mem[rd_addr[b]];
      end
    end

    logic [R-1:0] used_nxt;
    always_comb begin
      used_nxt = used;
      if (rd_en[b] && rd_release[b]) used_nxt[rd_addr[b]] = 1'b0;
      if (wr_en[b] && has_free)      used_nxt[free_idx]   = 1'b1;
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)     used <= '0;
      else if (clear) used <= '0;
      else            used <= used_nxt;
    end
  end

endmodule
