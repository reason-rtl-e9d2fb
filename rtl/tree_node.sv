// tree_node: one two-input node of the reconfigurable tree engine.
//
// Following the node micro-architecture of the paper, a node holds a
// multiplier/comparator unit and an adder. Per instruction the node is told
// which operation to perform: add or multiply in probabilistic mode (sum and
// product nodes of a circuit or HMM step), multiply at the leaves and add at
// inner nodes in SpMSpM mode, a comparator (max) for decoding-style maxima,
// or plain forwarding of one operand so a short DAG branch can pass through a
// tree level. The result is registered: every tree level is one pipeline
// stage, so out/out_valid follow in/in_valid by one clock.
//
// Arithmetic is unsigned fixed point with FRAC_W fraction bits and saturates
// at all-ones; the number format and the saturation are choices of this
// design, the paper gives no word width.
module tree_node
  import reason_pkg::*;
#(
  parameter int W = DATA_W
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  node_op_e     op,
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic         out_valid,
  output logic [W-1:0] out
);

  logic [W:0]     sum;
  logic [2*W-1:0] prod;
  logic [2*W-1:0] prod_sh;
  logic [W-1:0]   res;

  always_comb begin
    sum     = {1'b0, a} + {1'b0, b};
    prod    = a * b;
    prod_sh = prod >> FRAC_W;
    unique case (op)
      NODE_ADD:   res = sum[W] ? '1 : sum[W-1:0];
      NODE_MUL:   res = (prod_sh[2*W-1:W] != '0) ? '1 : prod_sh[W-1:0];
      NODE_MAX:   res = (a < b) ? b : a;
      NODE_PASSA: res = a;
      NODE_PASSB: res = b;
      default:    res = '0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out       <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out <= res;
    end
  end

endmodule
