// pe_core: one tree-based PE core of REASON.
//
// Contents, following the paper's PE-core block diagram: a scalar
// controller that fetches and decodes VLIW instructions from a local
// instruction memory; B banks of R registers (reg_bank_file) behind an N:N
// Benes network that routes any bank to any tree operand; the reconfigurable
// tree engine (rte_tree) of depth D; forwarding of tree node results back to
// the banks; the symbolic engine (bcp_engine: broadcast/reduction, leaf
// clause evaluation, BCP FIFO, watched-literals unit); and the DMA engine
// that connects all of this to the shared local memory.
//
// Instructions (instr_t in reason_pkg), one per decode:
//   EXEC       Cycle 0 (decode): the banks with rd_en read rd_addr (and free
//              it if rd_release). Cycle 1: the bank outputs pass the Benes
//              network (benes_ctrl) and outputs 0..2**D-1 enter the tree with
//              the per-node operations node_op. Cycle 1+D: tree node k writes
//              its result to bank k if wb_en[k] (one bank per node, the
//              paper's one-bank-one-PE output wiring), at the bank's lowest
//              free register. EXEC and NOP issue one per cycle; there is no
//              hazard check, the compiler spaces dependent instructions by
//              the pipeline length or inserts NOPs, as the paper describes.
//   LOAD       count+1 words from in_base+addr into banks bank.. (auto address)
//   STORE      bank/rreg -> out_base+addr
//   SYM_CLEAR  unassign every variable
//   SYM_RUN    decide literal lit (or the literal in word in_base+addr if
//              lit_from_mem) and run propagation to completion
//   SYM_STORE  write {value of var(lit) [33:32], conflict [16], assignments
//              made [8:0]} to out_base+addr
//   HALT       end of program: done pulses, busy falls
// LOAD, STORE and the symbolic instructions wait until the tree pipeline has
// drained (a simple interlock of this design) and then take several cycles.
//
// A run starts with start (pc, in_base, out_base), which the workload
// scheduler gives per object. The configuration port writes the instruction
// memory (CFG_IMEM, address = pc), the watch-list head table (CFG_HEAD,
// address = literal code), the local clause SRAM (CFG_CLAUSE) and the clause
// base address in the shared memory (CFG_REG).
//
// The paper's SIMD unit, MMU, intermediate output buffer and the CDCL
// conflict analysis on the scalar PE are not part of this core.
//
// Lint notes (deliberately unused signals): only the low CPTR_W bits of
// cfg_addr address the watch-list memories; only Benes outputs 0..2**D-1
// feed the tree (the other outputs exist because the network is N:N);
// the root result reaches the banks through node_out[0], so the separate
// root output and the register file's write-address / bank-full outputs
// are not needed here; sym_result only keeps its low 32 bits.
module pe_core
  import reason_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  // configuration
  input  logic                 cfg_we,
  input  cfg_target_e          cfg_target,
  input  logic [SHM_AW-1:0]    cfg_addr,
  input  logic [INSTR_W-1:0]   cfg_wdata,
  // run control
  input  logic                 start,
  input  logic [PC_W-1:0]      start_pc,
  input  logic [SHM_AW-1:0]    in_base,
  input  logic [SHM_AW-1:0]    out_base,
  output logic                 busy,
  output logic                 done,
  // shared-memory port
  output logic                 mem_req_valid,
  output mem_req_t             mem_req,
  input  logic                 mem_gnt,
  input  logic                 mem_rsp_valid,
  input  logic [SHM_W-1:0]     mem_rsp_data,
  // events
  output pe_events_t           ev
);

  localparam int NB = NUM_BANKS;
  localparam int TI = TREE_IN;
  localparam int TN = TREE_NODES;

  typedef enum logic [3:0] {
    S_IDLE, S_FETCH, S_DECODE, S_DMA, S_STORE_RD, S_STORE_GO,
    S_SYM_RD, S_SYM_GO, S_SYM_WAIT, S_CLR_WAIT
  } state_e;

  state_e state;
  logic [PC_W-1:0]    pc;
  logic [SHM_AW-1:0]  in_base_q, out_base_q, clause_base;
  logic [INSTR_W-1:0] imem [IMEM_DEPTH];
  logic [INSTR_W-1:0] imem_rd;
  logic [PC_W-1:0]    imem_addr;
  instr_t             ins;
  logic [SHM_W-1:0]   sym_result;

  assign ins = instr_t'(imem_rd);

  // ---------------- configuration --------------------------------------------
  always_ff @(posedge clk) begin
    if (cfg_we && cfg_target == CFG_IMEM) imem[cfg_addr[PC_W-1:0]] <= cfg_wdata;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) clause_base <= '0;
    else if (cfg_we && cfg_target == CFG_REG) clause_base <= cfg_wdata[SHM_AW-1:0];
  end

  // ---------------- tree pipeline tracking --------------------------------------
  logic               issue_exec;
  logic [TREE_D:0]    tree_inflight;       // bank read stage + D tree levels
  logic               tree_busy;
  logic [BENES_CTRL_W-1:0] benes_q;
  logic [TN-1:0][2:0] nodeop_q;
  logic [TN-1:0]      wb_q;
  logic [TREE_D-1:0][TN-1:0] wb_d;
  logic               exec_q;

  assign tree_busy = |tree_inflight;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tree_inflight <= '0;
      exec_q   <= 1'b0;
      benes_q  <= '0;
      nodeop_q <= '0;
      wb_q     <= '0;
      wb_d     <= '0;
    end else begin
      tree_inflight <= {tree_inflight[TREE_D-1:0], issue_exec};
      exec_q <= issue_exec;
      if (issue_exec) begin
        benes_q  <= ins.benes_ctrl;
        nodeop_q <= ins.node_op;
        wb_q     <= ins.wb_en;
      end
      wb_d[0] <= wb_q;
      for (int i = 1; i < TREE_D; i++) wb_d[i] <= wb_d[i-1];
    end
  end

  // ---------------- register banks, Benes, tree -------------------------------------
  logic [NB-1:0]              rf_rd_en, rf_rel, rf_wr_en, rf_ovf, rf_full;
  logic [NB-1:0][REG_AW-1:0]  rf_rd_addr, rf_wr_addr;
  logic [NB-1:0][DATA_W-1:0]  rf_rd_data, rf_wr_data, bn_out;
  logic                       tr_valid;
  logic [DATA_W-1:0]          tr_root;
  logic [TN-1:0][DATA_W-1:0]  tr_nodes;

  reg_bank_file #(.B(NB), .R(BANK_REGS), .W(DATA_W)) u_rf (
    .clk, .rst_n, .clear(1'b0),
    .rd_en(rf_rd_en), .rd_addr(rf_rd_addr), .rd_release(rf_rel), .rd_data(rf_rd_data),
    .wr_en(rf_wr_en), .wr_data(rf_wr_data), .wr_addr(rf_wr_addr),
    .wr_overflow(rf_ovf), .bank_full(rf_full)
  );

  benes_network #(.N(NB), .W(DATA_W)) u_benes (
    .in(rf_rd_data), .ctrl(benes_q), .out(bn_out)
  );

  rte_tree #(.D(TREE_D), .W(DATA_W)) u_tree (
    .clk, .rst_n, .in_valid(exec_q), .operand(bn_out[TI-1:0]), .node_op(nodeop_q),
    .out_valid(tr_valid), .root(tr_root), .node_out(tr_nodes)
  );

  // ---------------- DMA -------------------------------------------------------------
  logic               dma_cmd_valid, dma_cmd_ready, dma_done;
  logic [1:0]         dma_kind;
  logic [SHM_AW-1:0]  dma_addr;
  logic [SHM_W-1:0]   dma_wdata, dma_rd_data;
  logic               dma_bank_we;
  logic [BANK_AW-1:0] dma_bank_sel;
  logic [DATA_W-1:0]  dma_bank_wdata;
  logic               cf_req_valid, cf_req_ready, cf_rsp_valid, cf_abort;
  logic [SHM_AW-1:0]  cf_req_addr;
  logic [SHM_W-1:0]   cf_rsp_data;

  dma_engine u_dma (
    .clk, .rst_n,
    .cmd_valid(dma_cmd_valid), .cmd_kind(dma_kind), .cmd_addr(dma_addr), .cmd_bank(ins.bank),
    .cmd_count(ins.count), .cmd_wdata(dma_wdata), .cmd_ready(dma_cmd_ready), .done(dma_done),
    .rd_data(dma_rd_data),
    .bank_we(dma_bank_we), .bank_sel(dma_bank_sel), .bank_wdata(dma_bank_wdata),
    .cf_req_valid, .cf_req_addr, .cf_req_ready, .cf_rsp_valid, .cf_rsp_data, .cf_abort,
    .mem_req_valid, .mem_req, .mem_gnt, .mem_rsp_valid, .mem_rsp_data
  );

  // ---------------- symbolic engine --------------------------------------------------
  logic      bcp_cmd_valid, bcp_cmd_ready, bcp_done, bcp_conflict;
  bcp_cmd_e  bcp_cmd;
  lit_t      bcp_lit;
  logic [VAR_W:0] bcp_nassign;
  val_e      bcp_qval;
  logic      ev_bypass, ev_queue, ev_multi, ev_stall, ev_conflict, ev_miss, ev_drop;

  bcp_engine u_bcp (
    .clk, .rst_n,
    .cfg_we(cfg_we && (cfg_target == CFG_HEAD || cfg_target == CFG_CLAUSE)),
    .cfg_sel_clause(cfg_target == CFG_CLAUSE), .cfg_addr(cfg_addr[CPTR_W-1:0]),
    .cfg_wdata(cfg_wdata[SHM_W-1:0]), .clause_base,
    .cmd_valid(bcp_cmd_valid), .cmd(bcp_cmd), .cmd_lit(bcp_lit), .cmd_ready(bcp_cmd_ready),
    .done(bcp_done), .conflict(bcp_conflict), .n_assign(bcp_nassign),
    .q_var(ins.lit[LIT_W-1:1]), .q_val(bcp_qval),
    .dma_req_valid(cf_req_valid), .dma_req_addr(cf_req_addr), .dma_req_ready(cf_req_ready),
    .dma_rsp_valid(cf_rsp_valid), .dma_rsp_data(cf_rsp_data), .dma_abort(cf_abort),
    .ev_bypass, .ev_queue, .ev_multi, .ev_stall, .ev_conflict, .ev_miss, .ev_drop
  );

  // ---------------- sequencer ---------------------------------------------------------
  logic single, mem_op;
  always_comb begin
    single     = (ins.op == OP_NOP) || (ins.op == OP_EXEC);
    mem_op     = !single && (ins.op != OP_HALT);
    issue_exec = (state == S_DECODE) && (ins.op == OP_EXEC);
    imem_addr  = ((state == S_DECODE) && single) ? pc + 1'b1 : pc;

    // register file read port: EXEC in decode, STORE in S_STORE_RD
    rf_rd_en   = '0;
    rf_rd_addr = ins.rd_addr;
    rf_rel     = ins.rd_release;
    if (issue_exec) rf_rd_en = ins.rd_en;
    if (state == S_STORE_RD) begin
      rf_rd_en[ins.bank]   = 1'b1;
      rf_rd_addr[ins.bank] = ins.rreg;
    end

    // register file writes: tree forwarding or DMA loads
    for (int b = 0; b < NB; b++) begin
      rf_wr_en[b]   = 1'b0;
      rf_wr_data[b] = dma_bank_wdata;
    end
    for (int k = 0; k < TN; k++) begin
      rf_wr_en[k]   = tr_valid && wb_d[TREE_D-1][k];
      rf_wr_data[k] = tr_nodes[k];
    end
    if (dma_bank_we) begin
      rf_wr_en[dma_bank_sel]   = 1'b1;
      rf_wr_data[dma_bank_sel] = dma_bank_wdata;
    end

    // DMA command
    dma_cmd_valid = 1'b0;
    dma_kind      = 2'd0;
    dma_addr      = in_base_q + ins.addr;
    dma_wdata     = '0;
    if (state == S_DECODE && !tree_busy && ins.op == OP_LOAD) begin
      dma_cmd_valid = 1'b1;
    end
    if (state == S_STORE_GO) begin
      dma_cmd_valid = 1'b1;
      dma_kind      = 2'd1;
      dma_addr      = out_base_q + ins.addr;
      dma_wdata     = {{(SHM_W-DATA_W){1'b0}}, rf_rd_data[ins.bank]};
    end
    if (state == S_DECODE && !tree_busy && ins.op == OP_SYM_STORE) begin
      dma_cmd_valid = 1'b1;
      dma_kind      = 2'd1;
      dma_addr      = out_base_q + ins.addr;
      dma_wdata     = {{(SHM_W-34){1'b0}}, bcp_qval, sym_result[31:0]};
    end
    if (state == S_DECODE && !tree_busy && ins.op == OP_SYM_RUN && ins.lit_from_mem) begin
      dma_cmd_valid = 1'b1;
      dma_kind      = 2'd2;
    end

    // symbolic commands
    bcp_cmd_valid = 1'b0;
    bcp_cmd       = BCP_DECIDE;
    bcp_lit       = ins.lit;
    if (state == S_DECODE && !tree_busy && ins.op == OP_SYM_CLEAR) begin
      bcp_cmd_valid = 1'b1;
      bcp_cmd       = BCP_CLEAR;
    end
    if (state == S_DECODE && !tree_busy && ins.op == OP_SYM_RUN && !ins.lit_from_mem) begin
      bcp_cmd_valid = 1'b1;
    end
    if (state == S_SYM_GO) begin
      bcp_cmd_valid = 1'b1;
      bcp_lit       = dma_rd_data[LIT_W-1:0];
    end
  end

  always_ff @(posedge clk) imem_rd <= imem[imem_addr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      pc         <= '0;
      in_base_q  <= '0;
      out_base_q <= '0;
      done       <= 1'b0;
      sym_result <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          pc         <= start_pc;
          in_base_q  <= in_base;
          out_base_q <= out_base;
          state      <= S_FETCH;
        end
        S_FETCH: state <= S_DECODE;
        S_DECODE: begin
          if (single) pc <= pc + 1'b1;
          else if (ins.op == OP_HALT) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else if (!tree_busy) begin
            unique case (ins.op)
              OP_LOAD, OP_SYM_STORE: state <= S_DMA;
              OP_STORE:              state <= S_STORE_RD;
              OP_SYM_CLEAR:          state <= S_CLR_WAIT;
              OP_SYM_RUN:            state <= ins.lit_from_mem ? S_SYM_RD : S_SYM_WAIT;
              default:               state <= S_FETCH;
            endcase
          end
        end
        S_DMA: if (dma_done) begin
          pc    <= pc + 1'b1;
          state <= S_FETCH;
        end
        S_STORE_RD: state <= S_STORE_GO;
        S_STORE_GO: state <= S_DMA;
        S_SYM_RD:   if (dma_done) state <= S_SYM_GO;
        S_SYM_GO:   state <= S_SYM_WAIT;
        S_SYM_WAIT, S_CLR_WAIT: if (bcp_done) begin
          sym_result <= {{(SHM_W-17){1'b0}}, bcp_conflict, {(16-VAR_W-1){1'b0}}, bcp_nassign};
          pc         <= pc + 1'b1;
          state      <= S_FETCH;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  always_comb begin
    ev             = '0;
    ev.exec        = issue_exec;
    ev.interlock   = (state == S_DECODE) && mem_op && tree_busy;
    ev.load_word   = dma_bank_we;
    ev.rf_overflow = |rf_ovf;
    ev.bypass      = ev_bypass;
    ev.queued      = ev_queue;
    ev.multi       = ev_multi;
    ev.stall       = ev_stall;
    ev.conflict    = ev_conflict;
    ev.miss        = ev_miss;
    ev.drop        = ev_drop;
  end

endmodule
