// tb_reason_top: end-to-end test of the full-size plug-in (no parameter
// override: 12 PE cores, B=64 banks of R=32 registers, depth-3 trees).
//
// The testbench plays the GPU side. It loads two programs into every core
// through the configuration port, a CNF instance into every core's
// watched-literal store (half of the clauses in the local clause SRAM, half
// only in the shared memory at the clause base, so they are fetched on a
// miss), and then runs two batches through the execute / flag protocol:
//   batch 1, mode 0 (probabilistic circuit): each of 30 objects has 8 input
//     values; the program LOADs them into banks 0..7, EXECs one tree pass
//     (random Benes routing, random per-node ADD/MUL/MAX/PASS operations),
//     writes node 0 (root) and node 1 back to banks 0 and 1, STOREs both.
//   batch 2, mode 1 (symbolic): each of 30 objects has two decision
//     literals; the program clears the assignment, decides the first literal,
//     stores the BCP result word, decides the second, stores again.
// For each batch the host writes the inputs, issues execute before raising
// neural_ready (so the controller must poll), checks that no core starts
// before the flag, waits for done, checks the symbolic_ready word and reads
// back every result through the host port, comparing with models computed
// here (Benes routing + fixed-point tree; unit propagation).
// Mechanisms counted (each must happen at least once): tree instruction
// issue, interlock of a memory instruction behind the tree, DMA load into a
// bank, implication bypass, queued implication, multi-implication cycle,
// conflict, watch-list miss fetched by DMA, controller polling of an unset
// flag, host port waiting for the interconnect, every core used.
module tb_reason_top;
  import reason_pkg::*;

  localparam int NPE = NUM_PE;
  localparam int NOBJ = 30;
  localparam int NV = 14;            // variables 1..NV-1
  localparam int NC = 64;            // binary clauses
  localparam logic [SHM_AW-1:0] CBASE = 16'h8000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic host_req_valid = 0;
  mem_req_t host_req = '0;
  logic host_gnt, host_rsp_valid;
  logic [SHM_W-1:0] host_rsp_data;
  logic cfg_we = 0;
  logic [3:0] cfg_core = '0;
  logic cfg_all = 0;
  cfg_target_e cfg_target = CFG_IMEM;
  logic [SHM_AW-1:0] cfg_addr = '0;
  logic [INSTR_W-1:0] cfg_wdata = '0;
  logic ctl_cfg_we = 0;
  logic [2:0] ctl_cfg_addr = '0;
  logic [15:0] ctl_cfg_wdata = '0;
  logic exec_valid = 0, exec_ready;
  logic [15:0] exec_batch_id = '0, exec_batch_size = '0;
  logic [SHM_AW-1:0] exec_neural_buf = '0, exec_symbolic_buf = '0;
  logic [1:0] exec_mode = '0;
  logic status_busy, done;
  logic [15:0] status_batch_id;
  logic [NPE-1:0] core_busy, core_done;
  pe_events_t [NPE-1:0] pe_ev;

  reason_top dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", msg);
    end
  endtask

  // ---------------- event counting ----------------
  int n_exec = 0, n_inter = 0, n_load = 0, n_bypass = 0, n_queue = 0, n_multi = 0;
  int n_conf = 0, n_miss = 0, n_hostwait = 0, n_done = 0;
  logic [NPE-1:0] used = '0;
  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < NPE; i++) begin
      n_exec   += int'(pe_ev[i].exec);
      n_inter  += int'(pe_ev[i].interlock);
      n_load   += int'(pe_ev[i].load_word);
      n_bypass += int'(pe_ev[i].bypass);
      n_queue  += int'(pe_ev[i].queued);
      n_multi  += int'(pe_ev[i].multi);
      n_conf   += int'(pe_ev[i].conflict);
      n_miss   += int'(pe_ev[i].miss);
      if (core_busy[i]) used[i] = 1'b1;
    end
    n_hostwait += int'(host_req_valid && !host_gnt);
    n_done     += int'(done);
  end

  // ---------------- host port ----------------
  task automatic host_write(input int addr, input logic [SHM_W-1:0] d);
    @(negedge clk);
    host_req_valid = 1;
    host_req.we = 1; host_req.addr = SHM_AW'(addr); host_req.wdata = d;
    #1;
    while (!host_gnt) begin @(negedge clk); #1; end
    @(negedge clk);
    host_req_valid = 0;
  endtask

  task automatic host_read(input int addr, output logic [SHM_W-1:0] d);
    int w;
    @(negedge clk);
    host_req_valid = 1;
    host_req.we = 0; host_req.addr = SHM_AW'(addr); host_req.wdata = '0;
    #1;
    while (!host_gnt) begin @(negedge clk); #1; end
    @(negedge clk);
    host_req_valid = 0;
    w = 0;
    while (!host_rsp_valid && w < 4) begin @(negedge clk); w++; end
    d = host_rsp_data;
  endtask

  task automatic core_cfg(input cfg_target_e t, input int addr, input logic [INSTR_W-1:0] d);
    @(negedge clk);
    cfg_we = 1; cfg_all = 1; cfg_target = t; cfg_addr = SHM_AW'(addr); cfg_wdata = d;
    @(negedge clk);
    cfg_we = 0; cfg_all = 0;
  endtask

  task automatic ctl_cfg(input int addr, input int d);
    @(negedge clk);
    ctl_cfg_we = 1; ctl_cfg_addr = 3'(addr); ctl_cfg_wdata = 16'(d);
    @(negedge clk);
    ctl_cfg_we = 0;
  endtask

  // ---------------- models ----------------
  logic [BENES_CTRL_W-1:0] bctrl;
  logic [TREE_NODES-1:0][2:0] nops;

  function automatic logic [DATA_W-1:0] node_f(input logic [2:0] op, input logic [DATA_W-1:0] a, input logic [DATA_W-1:0] b);
    case (op)
      NODE_ADD:   return fx_add(a, b);
      NODE_MUL:   return fx_mul(a, b);
      NODE_MAX:   return (a > b) ? a : b;
      NODE_PASSA: return a;
      NODE_PASSB: return b;
      default:    return '0;
    endcase
  endfunction

  // Benes routing: in place, stage s exchanges pairs differing in bit b(s)
  function automatic void benes_model(ref logic [DATA_W-1:0] v [NUM_BANKS]);
    int ln, b, i0, i1;
    logic [DATA_W-1:0] t;
    ln = BANK_AW;
    for (int s = 0; s < BENES_STAGES; s++) begin
      b = (s < ln) ? ln - 1 - s : s - ln + 1;
      for (int j = 0; j < NUM_BANKS / 2; j++) begin
        i0 = ((j >> b) << (b + 1)) | (j & ((1 << b) - 1));
        i1 = i0 | (1 << b);
        if (bctrl[s * (NUM_BANKS / 2) + j]) begin
          t = v[i0]; v[i0] = v[i1]; v[i1] = t;
        end
      end
    end
  endfunction

  // returns node 0 and node 1 results for 8 inputs in banks 0..7
  function automatic void tree_model(input logic [DATA_W-1:0] x [8], output logic [DATA_W-1:0] r0, output logic [DATA_W-1:0] r1);
    logic [DATA_W-1:0] v [NUM_BANKS];
    logic [DATA_W-1:0] n [TREE_NODES];
    for (int b = 0; b < NUM_BANKS; b++) v[b] = (b < 8) ? x[b] : '0;
    benes_model(v);
    for (int k = TREE_NODES - 1; k >= 0; k--) begin
      if (k >= TREE_IN / 2 - 1) n[k] = node_f(nops[k], v[2 * (k - (TREE_IN / 2 - 1))], v[2 * (k - (TREE_IN / 2 - 1)) + 1]);
      else                       n[k] = node_f(nops[k], n[2 * k + 1], n[2 * k + 2]);
    end
    r0 = n[0];
    r1 = n[1];
  endfunction

  int cl_a [NC], cl_b [NC];
  int ref_val [NUM_VARS];

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
        int la, lb, sa, sb;
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

  // ---------------- programs ----------------
  localparam int PC_PROB = 0;
  localparam int PC_SYM  = 16;
  localparam int QVAR    = 3;        // variable whose value SYM_STORE reports

  task automatic load_programs();
    instr_t ins;
    // mode 0
    ins = '0; ins.op = OP_LOAD; ins.addr = 0; ins.bank = 0; ins.count = 7;
    core_cfg(CFG_IMEM, PC_PROB + 0, INSTR_W'(ins));
    ins = '0; ins.op = OP_EXEC; ins.benes_ctrl = bctrl; ins.node_op = nops; ins.wb_en = 7'b0000011;
    for (int b = 0; b < 8; b++) begin ins.rd_en[b] = 1; ins.rd_addr[b] = '0; ins.rd_release[b] = 1; end
    core_cfg(CFG_IMEM, PC_PROB + 1, INSTR_W'(ins));
    ins = '0; ins.op = OP_STORE; ins.addr = 0; ins.bank = 0; ins.rreg = 0; ins.rd_release[0] = 1;
    core_cfg(CFG_IMEM, PC_PROB + 2, INSTR_W'(ins));
    ins = '0; ins.op = OP_STORE; ins.addr = 1; ins.bank = 1; ins.rreg = 0; ins.rd_release[1] = 1;
    core_cfg(CFG_IMEM, PC_PROB + 3, INSTR_W'(ins));
    ins = '0; ins.op = OP_HALT;
    core_cfg(CFG_IMEM, PC_PROB + 4, INSTR_W'(ins));
    // mode 1
    ins = '0; ins.op = OP_SYM_CLEAR;
    core_cfg(CFG_IMEM, PC_SYM + 0, INSTR_W'(ins));
    ins = '0; ins.op = OP_SYM_RUN; ins.lit_from_mem = 1; ins.addr = 0;
    core_cfg(CFG_IMEM, PC_SYM + 1, INSTR_W'(ins));
    ins = '0; ins.op = OP_SYM_STORE; ins.addr = 0; ins.lit = lit_t'(2 * QVAR);
    core_cfg(CFG_IMEM, PC_SYM + 2, INSTR_W'(ins));
    ins = '0; ins.op = OP_SYM_RUN; ins.lit_from_mem = 1; ins.addr = 1;
    core_cfg(CFG_IMEM, PC_SYM + 3, INSTR_W'(ins));
    ins = '0; ins.op = OP_SYM_STORE; ins.addr = 1; ins.lit = lit_t'(2 * QVAR);
    core_cfg(CFG_IMEM, PC_SYM + 4, INSTR_W'(ins));
    ins = '0; ins.op = OP_HALT;
    core_cfg(CFG_IMEM, PC_SYM + 5, INSTR_W'(ins));
    ctl_cfg(0, PC_PROB);
    ctl_cfg(1, PC_SYM);
    ctl_cfg(4, 8);
    ctl_cfg(5, 2);
  endtask

  // clause i lives at pointer i (even i, local SRAM) or 1024+i (odd i, shared memory only)
  task automatic load_cnf();
    int head [NUM_LITS];
    clause_t c;
    int p [NC];
    for (int l = 0; l < NUM_LITS; l++) head[l] = int'(CPTR_NULL);
    core_cfg(CFG_REG, 0, INSTR_W'(CBASE));
    for (int i = 0; i < NC; i++) begin
      int va, vb;
      va = 1 + $urandom_range(NV - 2);
      do vb = 1 + $urandom_range(NV - 2); while (vb == va);
      cl_a[i] = 2 * va + int'($urandom_range(1));
      cl_b[i] = 2 * vb + int'($urandom_range(1));
      p[i] = (i % 2 == 0) ? i : LOCAL_CLAUSES + i;
      c = '0;
      c.lits[0] = lit_t'(cl_a[i]);
      c.lits[1] = lit_t'(cl_b[i]);
      c.next0 = CPTR_W'(head[cl_a[i]]);
      c.next1 = CPTR_W'(head[cl_b[i]]);
      head[cl_a[i]] = p[i];
      head[cl_b[i]] = p[i];
      if (p[i] < LOCAL_CLAUSES) core_cfg(CFG_CLAUSE, p[i], INSTR_W'(c));
      else                      host_write(int'(CBASE) + p[i], SHM_W'(c));
    end
    for (int l = 0; l < 2 * NV + 2; l++) core_cfg(CFG_HEAD, l, INSTR_W'(head[l]));
  endtask

  // ---------------- batches ----------------
  int n_poll_wait = 0;

  task automatic run_batch(input int id, input int mode, input int nbuf, input int sbuf);
    logic [SHM_W-1:0] d;
    host_write(nbuf, '0);              // neural_ready not set yet
    @(negedge clk);
    while (!exec_ready) @(negedge clk);
    exec_valid = 1; exec_batch_id = 16'(id); exec_batch_size = 16'(NOBJ);
    exec_neural_buf = SHM_AW'(nbuf); exec_symbolic_buf = SHM_AW'(sbuf); exec_mode = 2'(mode);
    @(negedge clk);
    exec_valid = 0;
    // the neural side is not ready yet: the controller must keep polling
    repeat (60) begin
      @(negedge clk);
      check(core_busy == '0, "core started before neural_ready");
      n_poll_wait += int'(status_busy);
    end
    check(status_busy && status_batch_id == 16'(id), "status during execution");
    host_write(nbuf, 64'd1);
    // host traffic while the cores run, so requests compete in the interconnect
    for (int i = 0; i < 64 && status_busy; i++) host_read(nbuf + 1 + i, d);
    while (status_busy) @(negedge clk);
    @(negedge clk);
    check(n_done == id, "one done pulse per batch");
    host_read(nbuf, d);
    check(d == '0, "neural_ready cleared");
    host_read(sbuf, d);
    check(d == {31'd0, 1'b1, 16'd0, 16'(id)}, $sformatf("symbolic_ready word %h", d));
  endtask

  initial begin
    logic [SHM_W-1:0] d;
    logic [DATA_W-1:0] x [NOBJ][8];
    logic [DATA_W-1:0] r0, r1;
    int lits [NOBJ][2];
    repeat (3) @(negedge clk);
    rst_n = 1;

    for (int i = 0; i < BENES_CTRL_W; i++) bctrl[i] = 1'($urandom_range(1));
    for (int k = 0; k < TREE_NODES; k++) nops[k] = 3'($urandom_range(5));
    nops[0] = NODE_MAX;
    nops[1] = NODE_ADD;
    load_programs();
    load_cnf();

    // ---- batch 1: probabilistic circuit objects ----
    for (int o = 0; o < NOBJ; o++)
      for (int j = 0; j < 8; j++) begin
        x[o][j] = DATA_W'($urandom_range(16'h9000));
        host_write(16'h1001 + 8 * o + j, SHM_W'(x[o][j]));
      end
    host_write(16'h2000, '0);
    run_batch(1, 0, 16'h1000, 16'h2000);
    for (int o = 0; o < NOBJ; o++) begin
      tree_model(x[o], r0, r1);
      host_read(16'h2001 + 2 * o, d);
      check(d == SHM_W'(r0), $sformatf("obj %0d root %h expected %h", o, d, r0));
      host_read(16'h2002 + 2 * o, d);
      check(d == SHM_W'(r1), $sformatf("obj %0d node1 %h expected %h", o, d, r1));
    end

    // ---- batch 2: symbolic objects ----
    for (int o = 0; o < NOBJ; o++) begin
      lits[o][0] = 2 * (1 + $urandom_range(NV - 2)) + int'($urandom_range(1));
      do lits[o][1] = 2 * (1 + $urandom_range(NV - 2)) + int'($urandom_range(1));
      while (lits[o][1] / 2 == lits[o][0] / 2);
      host_write(16'h3001 + 8 * o, SHM_W'(lits[o][0]));
      host_write(16'h3002 + 8 * o, SHM_W'(lits[o][1]));
    end
    host_write(16'h4000, '0);
    run_batch(2, 1, 16'h3000, 16'h4000);
    for (int o = 0; o < NOBJ; o++) begin
      bit conf;
      int nasg;
      for (int v = 0; v < NUM_VARS; v++) ref_val[v] = 0;
      for (int r = 0; r < 2; r++) begin
        conf = ref_propagate(lits[o][r], nasg);
        host_read(16'h4001 + 2 * o + r, d);
        check(d[16] == conf, $sformatf("obj %0d run %0d conflict %0d expected %0d", o, r, d[16], conf));
        if (conf) break;
        check(int'(d[8:0]) == nasg, $sformatf("obj %0d run %0d n_assign %0d expected %0d", o, r, d[8:0], nasg));
        check(int'(d[33:32]) == ref_val[QVAR], $sformatf("obj %0d run %0d value %0d expected %0d", o, r, d[33:32], ref_val[QVAR]));
      end
    end

    $display("events: exec %0d interlock %0d load %0d bypass %0d queue %0d multi %0d conflict %0d miss %0d poll %0d hostwait %0d cores %b",
             n_exec, n_inter, n_load, n_bypass, n_queue, n_multi, n_conf, n_miss, n_poll_wait, n_hostwait, used);
    check(n_exec > 0 && n_inter > 0 && n_load > 0 && n_bypass > 0 && n_queue > 0 && n_multi > 0 &&
          n_conf > 0 && n_miss > 0 && n_poll_wait > 0 && n_hostwait > 0 && used == '1,
          "a mechanism was never exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
