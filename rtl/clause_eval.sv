// clause_eval: symbolic-mode datapath of one leaf tree node.
//
// In symbolic mode the paper reuses the leaf node's comparator to check the
// state of each literal (TRUE, FALSE or UNASSIGNED) and its adder as a
// counter of FALSE literals, which finds unit clauses and conflicts. This
// module does exactly that, one literal per cycle: after start it walks the
// clause's CLAUSE_K literal slots (slot index = the "literal index" added to
// the clause base), and when the slots are exhausted, an empty slot is
// reached or a TRUE literal is seen it reports one result for one cycle:
//   RES_SAT      some literal is TRUE
//   RES_CONFLICT every literal is FALSE
//   RES_UNIT     exactly one literal unassigned, the rest FALSE (lit = it)
//   RES_NONE     otherwise
// Empty slots hold variable 0; literals are packed from slot 0, so the first
// empty slot ends the clause. Latency: a clause started in
// cycle t reports in cycle t+1+j, where j is the slot where it finished
// (at most CLAUSE_K-1); busy is high meanwhile.
//
// Each leaf keeps its own copy of the variable assignment, written by the
// broadcast path (upd_*). The copy is this design's choice: the paper
// broadcasts assignments to the leaves but does not say where the leaf looks
// up literal values.
module clause_eval
  import reason_pkg::*;
#(
  parameter int K  = CLAUSE_K,
  parameter int VW = VAR_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // assignment broadcast
  input  logic                 upd_valid,
  input  logic                 upd_clear,
  input  logic [VW-1:0]        upd_var,
  input  val_e                 upd_val,
  // clause to evaluate
  input  logic                 start,
  input  logic [K-1:0][VW:0]   lits,
  output logic                 busy,
  // result
  output logic                 res_valid,
  output res_kind_e            res_kind,
  output logic [VW:0]          res_lit
);

  localparam int NV = 1 << VW;
  localparam int IW = (K > 1) ? $clog2(K) : 1;

  logic [NV-1:0][1:0] table_q;
  logic [K-1:0][VW:0] lits_q;
  logic [IW-1:0]      idx;
  logic [IW:0]        nfalse, nvalid;
  logic [VW:0]        unit_q;

  // current literal and its state (comparator)
  logic [VW:0]  cur;
  logic [VW-1:0] cvar;
  logic         cneg, cempty, ctrue, cfalse, cun;
  val_e         cval;
  logic [IW:0]  nfalse_n, nvalid_n;
  logic [VW:0]  unit_n;
  logic         last;

  always_comb begin
    cur    = lits_q[idx];
    cvar   = cur[VW:1];
    cneg   = cur[0];
    cempty = (cvar == '0);
    cval   = val_e'(table_q[cvar]);
    ctrue  = !cempty && ((cval == VAL_TRUE  && !cneg) || (cval == VAL_FALSE && cneg));
    cfalse = !cempty && ((cval == VAL_FALSE && !cneg) || (cval == VAL_TRUE  && cneg));
    cun    = !cempty && (cval == VAL_UNASSIGNED);
    nvalid_n = nvalid + (IW+1)'(!cempty);
    nfalse_n = nfalse + (IW+1)'(cfalse);     // adder used as FALSE counter
    unit_n   = cun ? cur : unit_q;
    last     = (idx == IW'(K - 1)) || ctrue || cempty;  // literals are packed from slot 0
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) table_q <= '0;
    else if (upd_clear) table_q <= '0;
    else if (upd_valid) table_q[upd_var] <= upd_val;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      idx       <= '0;
      nfalse    <= '0;
      nvalid    <= '0;
      unit_q    <= '0;
      lits_q    <= '0;
      res_valid <= 1'b0;
      res_kind  <= RES_NONE;
      res_lit   <= '0;
    end else begin
      res_valid <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy   <= 1'b1;
          lits_q <= lits;
          idx    <= '0;
          nfalse <= '0;
          nvalid <= '0;
          unit_q <= '0;
        end
      end else begin
        idx    <= idx + 1'b1;
        nfalse <= nfalse_n;
        nvalid <= nvalid_n;
        unit_q <= unit_n;
        if (last) begin
          busy      <= 1'b0;
          res_valid <= 1'b1;
          res_lit   <= unit_n;
          if (ctrue)                         res_kind <= RES_SAT;
          else if (nfalse_n == nvalid_n)     res_kind <= RES_CONFLICT;
          else if (nfalse_n + 1'b1 == nvalid_n) res_kind <= RES_UNIT;
          else                               res_kind <= RES_NONE;
        end
      end
    end
  end

endmodule
