// rte_tree: datapath of the Reconfigurable Tree Engine (RTE).
//
// A complete binary tree of D levels of two-input tree_node instances with
// 2**D operand inputs and 2**D-1 nodes. Each level is one pipeline stage, so
// a new set of operands can enter every cycle and its results leave D cycles
// later. Every node receives its own operation from the instruction (the
// paper's VLIW-programmed nodes), which lets one tree evaluate a regularised
// two-input DAG block: sum/product for probabilistic circuits and HMM steps,
// multiply at leaves and add inside for SpMSpM.
//
// Node numbering is heap order: node 0 is the root, nodes 2k+1 and 2k+2 are
// the children of node k, and nodes 2**(D-1)-1 .. 2**D-2 are the leaf level,
// whose leaf node j takes operands 2j and 2j+1. The per-node operations are
// captured with the operands and travel down the pipeline with them, so
// back-to-back instructions may use different node operations. All node
// outputs are exposed (node_out) so that intermediate DAG values can be
// forwarded back to the register banks; node_out of level l is valid D-l
// cycles before the root result would be, but for simplicity every node
// value is also delayed to the common output cycle (out_valid).
module rte_tree
  import reason_pkg::*;
#(
  parameter int D = TREE_D,
  parameter int W = DATA_W
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  input  logic [(1<<D)-1:0][W-1:0]    operand,
  input  logic [(1<<D)-2:0][2:0]      node_op,
  output logic                        out_valid,
  output logic [W-1:0]                root,
  output logic [(1<<D)-2:0][W-1:0]    node_out
);

  localparam int NN = (1 << D) - 1;

  // node value and valid, heap-indexed
  logic [NN-1:0][W-1:0] val;
  logic [NN-1:0]        vld;
  // operations delayed to the level at which they are used: ops_d[l] is the
  // op vector seen by level-l stage inputs (level D-1 = leaves uses it first)
  logic [D-1:0][NN-1:0][2:0] ops_d;

  assign ops_d[D-1] = node_op;
  for (genvar l = D - 2; l >= 0; l--) begin : g_opdly
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) ops_d[l] <= '0;
      else        ops_d[l] <= ops_d[l+1];
    end
  end

  for (genvar l = 0; l < D; l++) begin : g_lvl
    for (genvar k = (1 << l) - 1; k < (1 << (l + 1)) - 1; k++) begin : g_node
      logic         iv;
      logic [W-1:0] ia, ib;
      if (l == D - 1) begin : g_leaf
        assign iv = in_valid;
        assign ia = operand[2*(k-((1<<l)-1))];
        assign ib = operand[2*(k-((1<<l)-1))+1];
      end else begin : g_inner
        assign iv = vld[2*k+1];
        assign ia = val[2*k+1];
        assign ib = val[2*k+2];
      end
      tree_node #(.W(W)) u_node (
        .clk(clk), .rst_n(rst_n), .in_valid(iv),
        .op(node_op_e'(ops_d[l][k])), .a(ia), .b(ib),
        .out_valid(vld[k]), .out(val[k])
      );
    end
  end

  // align every node's value to the root's output cycle
  for (genvar l = 0; l < D; l++) begin : g_align
    for (genvar k = (1 << l) - 1; k < (1 << (l + 1)) - 1; k++) begin : g_n
      if (l == 0) begin : g_root
        assign node_out[k] = val[k];
      end else begin : g_dly
        logic [l-1:0][W-1:0] dly;
        always_ff @(posedge clk or negedge rst_n) begin
          if (!rst_n) dly <= '0;
          else begin
            dly[0] <= val[k];
            for (int i = 1; i < l; i++) dly[i] <= dly[i-1];
          end
        end
        assign node_out[k] = dly[l-1];
      end
    end
  end

  assign root      = val[0];
  assign out_valid = vld[0];

endmodule
