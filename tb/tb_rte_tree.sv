// tb_rte_tree: pipelined random test of the depth-3 reconfigurable tree.
//
// A new random set of 8 operands and 7 per-node operations is applied every
// cycle (with random gaps), so several evaluations are in flight at once.
// The expected root and all node outputs are computed here by an
// independent model (heap numbering: node 0 root, children 2k+1 and 2k+2,
// leaf node j takes operands 2j and 2j+1) and compared when out_valid rises
// D=3 cycles later; the number of results must equal the number of inputs.
module tb_rte_tree;
  import reason_pkg::*;

  localparam int D = TREE_D;
  localparam int NI = 1 << D;
  localparam int NN = NI - 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0;
  logic [NI-1:0][15:0] operand = '0;
  logic [NN-1:0][2:0] node_op = '0;
  logic out_valid;
  logic [15:0] root;
  logic [NN-1:0][15:0] node_out;

  rte_tree dut (.*);

  function automatic int f(input int o, input int x, input int y);
    longint p;
    case (o)
      1: return (x + y > 65535) ? 65535 : x + y;
      2: begin p = (longint'(x) * longint'(y)) / 32768; return (p > 65535) ? 65535 : int'(p); end
      3: return (x > y) ? x : y;
      4: return x;
      5: return y;
      default: return 0;
    endcase
  endfunction

  int exp_q [$];                      // NN values per evaluation, node 0 first
  int checks = 0, failures = 0, n_in = 0, n_out = 0;

  always @(posedge clk) if (rst_n && out_valid) begin
    int e [NN];
    n_out++;
    checks++;
    if (exp_q.size() < NN) begin failures++; $display("FAIL unexpected result"); end
    else begin
      for (int k = 0; k < NN; k++) e[k] = exp_q.pop_front();
      if (int'(root) != e[0]) begin failures++; $display("FAIL root %h expected %h", root, e[0]); end
      for (int k = 0; k < NN; k++)
        if (int'(node_out[k]) != e[k]) begin failures++; $display("FAIL node %0d %h expected %h", k, node_out[k], e[k]); end
    end
  end

  initial begin
    int e [NN];
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      in_valid = ($urandom_range(3) != 0);
      for (int j = 0; j < NI; j++) operand[j] = ($urandom_range(1)) ? 16'($urandom) : 16'($urandom_range(16'h6000));
      for (int k = 0; k < NN; k++) node_op[k] = 3'($urandom_range(5));
      for (int k = NN - 1; k >= 0; k--)
        if (k >= NI / 2 - 1) e[k] = f(int'(node_op[k]), int'(operand[2 * (k - (NI / 2 - 1))]), int'(operand[2 * (k - (NI / 2 - 1)) + 1]));
        else                  e[k] = f(int'(node_op[k]), e[2 * k + 1], e[2 * k + 2]);
      if (in_valid) begin for (int k = 0; k < NN; k++) exp_q.push_back(e[k]); n_in++; end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (D + 2) @(negedge clk);
    checks++;
    if (n_in != n_out || exp_q.size() != 0) begin failures++; $display("FAIL %0d inputs %0d results", n_in, n_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
