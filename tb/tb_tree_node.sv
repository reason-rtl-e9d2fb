// tb_tree_node: random test of one tree node against an independent model.
//
// Every cycle a random operation (NOP, ADD, MUL, MAX, PASSA, PASSB) and random
// operands are applied with random in_valid; one cycle later out and
// out_valid are compared with a model written here (saturating Q1.15 add
// and multiply computed with plain integers). Operands are drawn both from
// the full range and from small values so that saturation and
// non-saturation both occur; both are counted and must happen.
module tb_tree_node;
  import reason_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0;
  node_op_e op = NODE_NOP;
  logic [15:0] a = '0, b = '0;
  logic out_valid;
  logic [15:0] out;

  tree_node dut (.*);

  int checks = 0, failures = 0, n_sat = 0, n_nosat = 0;

  function automatic int model(input node_op_e o, input int x, input int y);
    longint p;
    case (o)
      NODE_ADD:   return (x + y > 65535) ? 65535 : x + y;
      NODE_MUL:   begin p = (longint'(x) * longint'(y)) / 32768; return (p > 65535) ? 65535 : int'(p); end
      NODE_MAX:   return (x > y) ? x : y;
      NODE_PASSA: return x;
      NODE_PASSB: return y;
      default:    return 0;
    endcase
  endfunction

  initial begin
    int exp_v, exp_valid;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      in_valid = 1'($urandom_range(1));
      op = node_op_e'($urandom_range(5));
      a = ($urandom_range(1)) ? 16'($urandom) : 16'($urandom_range(16'h4000));
      b = ($urandom_range(1)) ? 16'($urandom) : 16'($urandom_range(16'h4000));
      exp_v = model(op, int'(a), int'(b));
      exp_valid = int'(in_valid);
      if ((op == NODE_ADD || op == NODE_MUL) && exp_v == 65535) n_sat++;
      if ((op == NODE_ADD || op == NODE_MUL) && exp_v != 65535) n_nosat++;
      @(negedge clk);
      checks++;
      if (int'(out_valid) != exp_valid || (exp_valid == 1 && int'(out) != exp_v)) begin
        failures++;
        $display("FAIL op %0d a %h b %h: out %h valid %0d expected %h", op, a, b, out, out_valid, exp_v);
      end
    end
    checks++;
    if (n_sat == 0 || n_nosat == 0) begin failures++; $display("FAIL saturation not exercised"); end
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
