// tb_pe_core: one PE core against a shared-memory model.
//
// The memory model grants randomly and returns read data one cycle after
// the grant. Two programs are loaded through the configuration port:
//   pc 0  LOAD 8 words into banks 0..7; EXEC A (reads banks 0..7, keeps
//         them) immediately followed by EXEC B (reads them again and frees
//         them), each with its own Benes routing and node operations, so two
//         different tree instructions are in flight together; A writes its
//         root back to bank 0, B its node 1 to bank 1; STORE both; HALT.
//   pc 16 SYM_CLEAR; SYM_RUN with the literal at in_base; SYM_STORE;
//         SYM_RUN with the literal at in_base+1; SYM_STORE; HALT.
// A CNF instance is loaded (half local, half at the clause base in the
// memory model). Objects are started one at a time with random bases; the
// results in the memory model are compared with models computed here
// (Benes routing + fixed-point tree; unit propagation), done must pulse
// once per object. Tree issue, interlock, DMA bank loads, bypass, queued
// implications, conflicts and watch-list misses must all occur.
module tb_pe_core;
  import reason_pkg::*;

  localparam int NV = 14;
  localparam int NC = 64;
  localparam logic [SHM_AW-1:0] CBASE = 16'h8000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_we = 0;
  cfg_target_e cfg_target = CFG_IMEM;
  logic [SHM_AW-1:0] cfg_addr = '0;
  logic [INSTR_W-1:0] cfg_wdata = '0;
  logic start = 0;
  logic [PC_W-1:0] start_pc = '0;
  logic [SHM_AW-1:0] in_base = '0, out_base = '0;
  logic busy, done;
  logic mem_req_valid, mem_gnt, mem_rsp_valid;
  mem_req_t mem_req;
  logic [SHM_W-1:0] mem_rsp_data;
  pe_events_t ev;

  pe_core dut (.*);

  // memory model
  logic [SHM_W-1:0] mem [int];
  logic gnt_r = 0, rsp_pend = 0;
  logic [SHM_AW-1:0] rsp_addr;
  always @(negedge clk) gnt_r <= ($urandom_range(3) != 0);
  assign mem_gnt = mem_req_valid && gnt_r;
  assign mem_rsp_valid = rsp_pend;
  assign mem_rsp_data = mem.exists(int'(rsp_addr)) ? mem[int'(rsp_addr)] : '0;
  always @(posedge clk) begin
    rsp_pend <= mem_gnt && !mem_req.we;
    rsp_addr <= mem_req.addr;
    if (mem_gnt && mem_req.we) mem[int'(mem_req.addr)] = mem_req.wdata;
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  int n_exec = 0, n_inter = 0, n_load = 0, n_bypass = 0, n_queue = 0, n_conf = 0, n_miss = 0, n_done = 0;
  always @(posedge clk) if (rst_n) begin
    n_exec += int'(ev.exec); n_inter += int'(ev.interlock); n_load += int'(ev.load_word);
    n_bypass += int'(ev.bypass); n_queue += int'(ev.queued); n_conf += int'(ev.conflict);
    n_miss += int'(ev.miss); n_done += int'(done);
  end

  task automatic core_cfg(input cfg_target_e t, input int addr, input logic [INSTR_W-1:0] d);
    @(negedge clk);
    cfg_we = 1; cfg_target = t; cfg_addr = SHM_AW'(addr); cfg_wdata = d;
    @(negedge clk);
    cfg_we = 0;
  endtask

  // ---------------- models ----------------
  logic [BENES_CTRL_W-1:0] bctrl, bctrl2;
  logic [TREE_NODES-1:0][2:0] nops, nops2;

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
  function automatic void benes_model(ref logic [DATA_W-1:0] v [NUM_BANKS], input logic [BENES_CTRL_W-1:0] bc);
    int ln, b, i0, i1;
    logic [DATA_W-1:0] t;
    ln = BANK_AW;
    for (int s = 0; s < BENES_STAGES; s++) begin
      b = (s < ln) ? ln - 1 - s : s - ln + 1;
      for (int j = 0; j < NUM_BANKS / 2; j++) begin
        i0 = ((j >> b) << (b + 1)) | (j & ((1 << b) - 1));
        i1 = i0 | (1 << b);
        if (bc[s * (NUM_BANKS / 2) + j]) begin
          t = v[i0]; v[i0] = v[i1]; v[i1] = t;
        end
      end
    end
  endfunction

  // returns node 0 and node 1 results for 8 inputs in banks 0..7
  function automatic void tree_model(input logic [DATA_W-1:0] x [8], input logic [BENES_CTRL_W-1:0] bc,
                                     input logic [TREE_NODES-1:0][2:0] no, output logic [DATA_W-1:0] r0, output logic [DATA_W-1:0] r1);
    logic [DATA_W-1:0] v [NUM_BANKS];
    logic [DATA_W-1:0] n [TREE_NODES];
    for (int b = 0; b < NUM_BANKS; b++) v[b] = (b < 8) ? x[b] : '0;
    benes_model(v, bc);
    for (int k = TREE_NODES - 1; k >= 0; k--) begin
      if (k >= TREE_IN / 2 - 1) n[k] = node_f(no[k], v[2 * (k - (TREE_IN / 2 - 1))], v[2 * (k - (TREE_IN / 2 - 1)) + 1]);
      else                       n[k] = node_f(no[k], n[2 * k + 1], n[2 * k + 2]);
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
  localparam int QVAR    = 3;

  task automatic load_programs();
    instr_t ins;
    ins = '0; ins.op = OP_LOAD; ins.addr = 0; ins.bank = 0; ins.count = 7;
    core_cfg(CFG_IMEM, PC_PROB + 0, INSTR_W'(ins));
    ins = '0; ins.op = OP_EXEC; ins.benes_ctrl = bctrl; ins.node_op = nops; ins.wb_en = 7'b0000001;
    for (int b = 0; b < 8; b++) begin ins.rd_en[b] = 1; ins.rd_addr[b] = '0; ins.rd_release[b] = 0; end
    core_cfg(CFG_IMEM, PC_PROB + 1, INSTR_W'(ins));
    ins = '0; ins.op = OP_EXEC; ins.benes_ctrl = bctrl2; ins.node_op = nops2; ins.wb_en = 7'b0000010;
    for (int b = 0; b < 8; b++) begin ins.rd_en[b] = 1; ins.rd_addr[b] = '0; ins.rd_release[b] = 1; end
    core_cfg(CFG_IMEM, PC_PROB + 2, INSTR_W'(ins));
    ins = '0; ins.op = OP_STORE; ins.addr = 0; ins.bank = 0; ins.rreg = 0; ins.rd_release[0] = 1;
    core_cfg(CFG_IMEM, PC_PROB + 3, INSTR_W'(ins));
    ins = '0; ins.op = OP_STORE; ins.addr = 1; ins.bank = 1; ins.rreg = 0; ins.rd_release[1] = 1;
    core_cfg(CFG_IMEM, PC_PROB + 4, INSTR_W'(ins));
    ins = '0; ins.op = OP_HALT;
    core_cfg(CFG_IMEM, PC_PROB + 5, INSTR_W'(ins));
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
  endtask

  task automatic load_cnf();
    int head [NUM_LITS];
    clause_t c;
    int p;
    for (int l = 0; l < NUM_LITS; l++) head[l] = int'(CPTR_NULL);
    core_cfg(CFG_REG, 0, INSTR_W'(CBASE));
    for (int i = 0; i < NC; i++) begin
      int va, vb;
      va = 1 + $urandom_range(NV - 2);
      do vb = 1 + $urandom_range(NV - 2); while (vb == va);
      cl_a[i] = 2 * va + int'($urandom_range(1));
      cl_b[i] = 2 * vb + int'($urandom_range(1));
      p = (i % 2 == 0) ? i : LOCAL_CLAUSES + i;
      c = '0;
      c.lits[0] = lit_t'(cl_a[i]);
      c.lits[1] = lit_t'(cl_b[i]);
      c.next0 = CPTR_W'(head[cl_a[i]]);
      c.next1 = CPTR_W'(head[cl_b[i]]);
      head[cl_a[i]] = p;
      head[cl_b[i]] = p;
      if (p < LOCAL_CLAUSES) core_cfg(CFG_CLAUSE, p, INSTR_W'(c));
      else                   mem[int'(CBASE) + p] = SHM_W'(c);
    end
    for (int l = 0; l < 2 * NV + 2; l++) core_cfg(CFG_HEAD, l, INSTR_W'(head[l]));
  endtask

  task automatic run_object(input int pc, input int ib, input int ob);
    int d0;
    d0 = n_done;
    @(negedge clk);
    start = 1; start_pc = PC_W'(pc); in_base = SHM_AW'(ib); out_base = SHM_AW'(ob);
    @(negedge clk);
    start = 0;
    while (busy) @(negedge clk);
    @(negedge clk);
    check(n_done == d0 + 1, "one done pulse per object");
  endtask

  initial begin
    logic [DATA_W-1:0] x [8];
    logic [DATA_W-1:0] r0, r1, s0, s1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < BENES_CTRL_W; i++) begin bctrl[i] = 1'($urandom_range(1)); bctrl2[i] = 1'($urandom_range(1)); end
    for (int k = 0; k < TREE_NODES; k++) begin nops[k] = 3'($urandom_range(5)); nops2[k] = 3'($urandom_range(5)); end
    nops[0] = NODE_ADD;
    nops2[1] = NODE_MAX;
    load_programs();
    load_cnf();
    for (int o = 0; o < 25; o++) begin
      int ib, ob;
      ib = 16'h1000 + 16 * o; ob = 16'h3000 + 4 * o;
      for (int j = 0; j < 8; j++) begin x[j] = DATA_W'($urandom_range(16'h9000)); mem[ib + j] = SHM_W'(x[j]); end
      run_object(PC_PROB, ib, ob);
      tree_model(x, bctrl, nops, r0, s0);
      tree_model(x, bctrl2, nops2, s1, r1);
      check(mem[ob] == SHM_W'(r0), $sformatf("obj %0d EXEC A root %h expected %h", o, mem[ob], r0));
      check(mem[ob + 1] == SHM_W'(r1), $sformatf("obj %0d EXEC B node1 %h expected %h", o, mem[ob + 1], r1));
    end
    for (int o = 0; o < 25; o++) begin
      int ib, ob, l0, l1;
      bit conf;
      int nasg;
      int lits [2];
      ib = 16'h2000 + 16 * o; ob = 16'h4000 + 4 * o;
      lits[0] = 2 * (1 + $urandom_range(NV - 2)) + int'($urandom_range(1));
      do lits[1] = 2 * (1 + $urandom_range(NV - 2)) + int'($urandom_range(1)); while (lits[1] / 2 == lits[0] / 2);
      mem[ib] = SHM_W'(lits[0]);
      mem[ib + 1] = SHM_W'(lits[1]);
      run_object(PC_SYM, ib, ob);
      for (int v = 0; v < NUM_VARS; v++) ref_val[v] = 0;
      for (int r = 0; r < 2; r++) begin
        logic [SHM_W-1:0] d;
        conf = ref_propagate(lits[r], nasg);
        d = mem[ob + r];
        check(d[16] == conf, $sformatf("obj %0d run %0d conflict %0d expected %0d", o, r, d[16], conf));
        if (conf) break;
        check(int'(d[8:0]) == nasg, $sformatf("obj %0d run %0d n_assign %0d expected %0d", o, r, d[8:0], nasg));
        check(int'(d[33:32]) == ref_val[QVAR], $sformatf("obj %0d run %0d value", o, r));
      end
    end
    $display("events: exec %0d interlock %0d load %0d bypass %0d queue %0d conflict %0d miss %0d",
             n_exec, n_inter, n_load, n_bypass, n_queue, n_conf, n_miss);
    check(n_exec > 0 && n_inter > 0 && n_load > 0 && n_bypass > 0 && n_queue > 0 && n_conf > 0 && n_miss > 0,
          "a mechanism was never exercised");
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
