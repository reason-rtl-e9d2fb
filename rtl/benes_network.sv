// benes_network: N-to-N Benes distribution crossbar.
//
// The paper places a Benes network between the register banks and the tree
// inputs so that any bank can feed any tree operand without conflicts; the
// routing is computed by the compiler and carried in the instruction. This
// is a combinational, rearrangeable network of 2*log2(N)-1 stages of N/2
// two-by-two switches, written in the in-place form: in stage s the switches
// pair the positions that differ only in address bit b(s), where b runs
// log2(N)-1, ..., 1, 0, 1, ..., log2(N)-1 (a butterfly followed by an
// inverse butterfly, which is topologically a Benes network). Switch j of
// stage s joins position i (bit b of i clear, j-th such position in
// increasing order) with i | (1<<b); ctrl bit s*N/2 + j set means "cross".
// All control bits clear give the identity permutation. N must be a power of
// two and at least 2.
module benes_network #(
  parameter int N = 64,
  parameter int W = 16
) (
  input  logic [N-1:0][W-1:0]                    in,
  input  logic [(2*$clog2(N)-1)*(N/2)-1:0]       ctrl,
  output logic [N-1:0][W-1:0]                    out
);

  localparam int LN = $clog2(N);
  localparam int S  = 2 * LN - 1;

  logic [S:0][N-1:0][W-1:0] st;

  assign st[0] = in;

  for (genvar s = 0; s < S; s++) begin : g_stage
    localparam int B = (s < LN) ? (LN - 1 - s) : (s - LN + 1);
    for (genvar j = 0; j < N / 2; j++) begin : g_sw
      localparam int I0 = ((j >> B) << (B + 1)) | (j & ((1 << B) - 1));
      localparam int I1 = I0 | (1 << B);
      logic x;
      assign x = ctrl[s*(N/2)+j];
      assign st[s+1][I0] = x ? st[s][I1] : st[s][I0];
      assign st[s+1][I1] = x ? st[s][I0] : st[s][I1];
    end
  end

  assign out = st[S];

endmodule
