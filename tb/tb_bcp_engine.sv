// tb_bcp_engine: checks symbolic propagation against a software model.
//
// Random 2-literal CNF instances (for which the two static watches of each
// clause see every relevant assignment, so propagation is complete) are
// loaded into the watched-literal store: clause i at pointer i, lists built
// by prepending. Pointers >= LOCAL live in a modelled scratchpad and are
// fetched over the DMA port. For each instance the testbench clears the
// assignment, makes a few decisions and compares, after each, the conflict
// flag, the number of assignments and (when there is no conflict) every
// variable's value with a reference unit propagation computed here.
// Instances alternate between sparse (40 variables) and dense (12
// variables, long watch lists, frequent conflicts). The test also counts
// clause stalls,
// bypasses, queued implications, multi-implication cycles, conflicts,
// misses and dropped duplicates and fails if any never happened.
module tb_bcp_engine;
  import reason_pkg::*;

  localparam int LOCAL = 48;
  localparam int DEPTH = BCP_FIFO_DEPTH;
  localparam int NV    = 40;     // variables used (1..NV-1)
  localparam int NC    = 80;     // clauses

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_we = 0, cfg_sel_clause = 0;
  logic [CPTR_W-1:0] cfg_addr = '0;
  logic [SHM_W-1:0]  cfg_wdata = '0;
  logic [SHM_AW-1:0] clause_base = 16'h1000;
  logic cmd_valid = 0;
  bcp_cmd_e cmd = BCP_CLEAR;
  lit_t cmd_lit = '0;
  logic cmd_ready, done, conflict;
  logic [VAR_W:0] n_assign;
  logic [VAR_W-1:0] q_var = '0;
  val_e q_val;
  logic dma_req_valid, dma_req_ready, dma_rsp_valid, dma_abort;
  logic [SHM_AW-1:0] dma_req_addr;
  logic [SHM_W-1:0] dma_rsp_data;
  logic ev_bypass, ev_queue, ev_multi, ev_stall, ev_conflict, ev_miss, ev_drop;

  bcp_engine #(.D(3), .DEPTH(DEPTH), .LOCAL(LOCAL)) dut (.*);

  // scratchpad model for clause fetches
  logic [SHM_W-1:0] remote [NC];
  logic rsp_pend = 0;
  logic [SHM_AW-1:0] rsp_addr;
  assign dma_req_ready = dma_req_valid;
  always_ff @(posedge clk) begin
    rsp_pend <= dma_req_valid;
    rsp_addr <= dma_req_addr;
  end
  assign dma_rsp_valid = rsp_pend;
  assign dma_rsp_data  = remote[rsp_addr - clause_base];

  int checks = 0, failures = 0;
  int n_bypass = 0, n_queue = 0, n_multi = 0, n_stall = 0, n_conf = 0, n_miss = 0, n_drop = 0;
  always @(posedge clk) if (rst_n) begin
    n_bypass += int'(ev_bypass); n_queue += int'(ev_queue); n_multi += int'(ev_multi);
    n_stall += int'(ev_stall); n_conf += int'(ev_conflict); n_miss += int'(ev_miss);
    n_drop += int'(ev_drop);
  end

  // instance
  int nv = NV;                        // variables of the current instance
  int cl_a [NC], cl_b [NC];          // literal codes
  int ref_val [NUM_VARS];            // 0 unassigned, 1 false, 2 true

  task automatic cfg_write(input logic sel, input int addr, input logic [SHM_W-1:0] d);
    @(negedge clk);
    cfg_we = 1; cfg_sel_clause = sel; cfg_addr = CPTR_W'(addr); cfg_wdata = d;
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic load_instance();
    int head [NUM_LITS];
    clause_t c;
    for (int l = 0; l < NUM_LITS; l++) head[l] = int'(CPTR_NULL);
    for (int i = 0; i < NC; i++) begin
      int va, vb;
      va = 1 + $urandom_range(nv - 2);
      do vb = 1 + $urandom_range(nv - 2); while (vb == va);
      cl_a[i] = 2 * va + int'($urandom_range(1));
      cl_b[i] = 2 * vb + int'($urandom_range(1));
      c = '0;
      c.lits[0] = lit_t'(cl_a[i]);
      c.lits[1] = lit_t'(cl_b[i]);
      c.next0 = CPTR_W'(head[cl_a[i]]);
      c.next1 = CPTR_W'(head[cl_b[i]]);
      head[cl_a[i]] = i;
      head[cl_b[i]] = i;
      if (i < LOCAL) cfg_write(1, i, SHM_W'(c));
      remote[i] = SHM_W'(c);
    end
    for (int l = 0; l < 2 * NV + 2; l++) cfg_write(0, l, SHM_W'(head[l]));
  endtask

  // reference unit propagation; returns conflict
  function automatic bit ref_propagate(input int lit, output int nasg);
    bit changed, conf;
    nasg = 0;
    conf = 0;
    if (ref_val[lit/2] != 0) return ((ref_val[lit/2] == 2) == (lit % 2 == 1));
    ref_val[lit/2] = (lit % 2) ? 1 : 2;
    nasg = 1;
    do begin
      changed = 0;
      for (int i = 0; i < NC; i++) begin
        int la, lb; int sa, sb;   // literal states: 0 unassigned, 1 false, 2 true
        la = cl_a[i]; lb = cl_b[i];
        sa = (ref_val[la/2] == 0) ? 0 : (((ref_val[la/2] == 2) != (la % 2 == 1)) ? 2 : 1);
        sb = (ref_val[lb/2] == 0) ? 0 : (((ref_val[lb/2] == 2) != (lb % 2 == 1)) ? 2 : 1);
        if (sa == 1 && sb == 1) conf = 1;
        else if (sa == 1 && sb == 0) begin ref_val[lb/2] = (lb % 2) ? 1 : 2; nasg++; changed = 1; end
        else if (sb == 1 && sa == 0) begin ref_val[la/2] = (la % 2) ? 1 : 2; nasg++; changed = 1; end
      end
    end while (changed && !conf);
    return conf;
  endfunction

  task automatic issue(input bcp_cmd_e c, input int lit, output int cycles);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1; cmd = c; cmd_lit = lit_t'(lit);
    @(negedge clk);
    cmd_valid = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
  endtask

  initial begin
    int cyc, nref;
    bit cref;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int inst = 0; inst < 40; inst++) begin
      nv = (inst % 2 == 1) ? 12 : NV;   // alternate sparse and dense instances
      load_instance();
      issue(BCP_CLEAR, 0, cyc);
      for (int v = 0; v < NUM_VARS; v++) ref_val[v] = 0;
      for (int d = 0; d < 4; d++) begin
        int lit;
        lit = 2 * (1 + $urandom_range(nv - 2)) + int'($urandom_range(1));
        cref = ref_propagate(lit, nref);
        issue(BCP_DECIDE, lit, cyc);
        checks++;
        if (conflict !== cref) begin
          failures++;
          $display("FAIL inst %0d decide %0d: conflict %0d expected %0d", inst, lit, conflict, cref);
        end
        if (cref) break;
        checks++;
        if (int'(n_assign) != nref) begin
          failures++;
          $display("FAIL inst %0d decide %0d: n_assign %0d expected %0d", inst, lit, n_assign, nref);
        end
        for (int v = 1; v < nv; v++) begin
          q_var = VAR_W'(v);
          #1;
          checks++;
          if (int'(q_val) != ref_val[v]) begin
            failures++;
            $display("FAIL inst %0d var %0d: %0d expected %0d", inst, v, q_val, ref_val[v]);
          end
        end
      end
    end
    // a decision on an already assigned variable with the opposite value
    issue(BCP_CLEAR, 0, cyc);
    for (int v = 0; v < NUM_VARS; v++) ref_val[v] = 0;
    issue(BCP_DECIDE, 2 * 5, cyc);
    cref = ref_propagate(2 * 5, nref);
    issue(BCP_UNASSIGN, 2 * 5, cyc);
    q_var = 5; #1;
    checks++;
    if (q_val != VAL_UNASSIGNED) begin failures++; $display("FAIL unassign"); end

    checks++;
    if (n_bypass == 0 || n_queue == 0 || n_multi == 0 || n_stall == 0 || n_conf == 0 || n_miss == 0 || n_drop == 0) begin
      failures++;
      $display("FAIL mechanism not exercised: bypass %0d queue %0d multi %0d stall %0d conflict %0d miss %0d drop %0d",
               n_bypass, n_queue, n_multi, n_stall, n_conf, n_miss, n_drop);
    end
    $display("events: bypass %0d queue %0d multi %0d stall %0d conflict %0d miss %0d drop %0d",
             n_bypass, n_queue, n_multi, n_stall, n_conf, n_miss, n_drop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
