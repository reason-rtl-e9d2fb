// tb_clause_eval: random test of the leaf clause evaluator.
//
// The testbench keeps its own variable assignment and mirrors it into the
// leaf through the update port (single updates and clears). Random clauses
// of 1..K literals (packed from slot 0, the rest empty) are started; the
// result kind (SAT / UNIT / CONFLICT / NONE) and, for UNIT, the literal are
// compared with a model, and the latency must be at most K+1 cycles with
// busy high meanwhile. Every result kind must occur.
module tb_clause_eval;
  import reason_pkg::*;
  localparam int K = CLAUSE_K, VW = VAR_W, NV = 12;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic upd_valid = 0, upd_clear = 0, start = 0;
  logic [VW-1:0] upd_var = '0;
  val_e upd_val = VAL_UNASSIGNED;
  logic [K-1:0][VW:0] lits = '0;
  logic busy, res_valid;
  res_kind_e res_kind;
  logic [VW:0] res_lit;

  clause_eval #(.K(K), .VW(VW)) dut (.*);

  int val [NV];
  int checks = 0, failures = 0;
  int n_kind [4];

  initial begin
    for (int i = 0; i < 4; i++) n_kind[i] = 0;
    for (int v = 0; v < NV; v++) val[v] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    upd_clear = 1;
    @(negedge clk);
    upd_clear = 0;
    for (int t = 0; t < 6000; t++) begin
      int n, nf, nu, ns, ul, ek, lat;
      // assignment changes
      if ($urandom_range(50) == 0) begin
        upd_clear = 1;
        for (int v = 0; v < NV; v++) val[v] = 0;
        @(negedge clk);
        upd_clear = 0;
      end
      repeat ($urandom_range(2)) begin
        int v;
        v = 1 + $urandom_range(NV - 2);
        val[v] = $urandom_range(2);
        upd_valid = 1; upd_var = VW'(v); upd_val = val_e'(val[v]);
        @(negedge clk);
        upd_valid = 0;
      end
      // clause
      n = 1 + $urandom_range(K - 1);
      nf = 0; nu = 0; ns = 0; ul = 0;
      lits = '0;
      for (int i = 0; i < n; i++) begin
        int v, ng, s;
        v = 1 + $urandom_range(NV - 2);
        ng = $urandom_range(1);
        lits[i] = (VW + 1)'(2 * v + ng);
        s = (val[v] == 0) ? 0 : (((val[v] == 2) != (ng == 1)) ? 2 : 1);
        if (s == 2) ns++;
        else if (s == 1) nf++;
        else begin nu++; ul = 2 * v + ng; end
      end
      ek = (ns > 0) ? int'(RES_SAT) : (nu == 0) ? int'(RES_CONFLICT) : (nu == 1) ? int'(RES_UNIT) : int'(RES_NONE);
      start = 1;
      @(negedge clk);
      start = 0;
      lat = 1;
      while (!res_valid && lat <= K + 2) begin
        checks++;
        if (!busy) begin failures++; $display("FAIL busy low before result"); end
        @(negedge clk);
        lat++;
      end
      checks++;
      if (!res_valid || lat > K + 1) begin
        failures++;
        $display("FAIL t %0d: no result within %0d cycles", t, K + 1);
      end else if (int'(res_kind) != ek || (ek == int'(RES_UNIT) && int'(res_lit) != ul)) begin
        failures++;
        $display("FAIL t %0d: kind %0d lit %0d expected %0d lit %0d", t, res_kind, res_lit, ek, ul);
      end
      n_kind[ek]++;
      @(negedge clk);
    end
    checks++;
    if (n_kind[0] == 0 || n_kind[1] == 0 || n_kind[2] == 0 || n_kind[3] == 0) begin
      failures++;
      $display("FAIL result kinds not all seen");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
