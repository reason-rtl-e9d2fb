// bcp_engine: symbolic-mode (SAT/FOL) execution of one PE core.
//
// Boolean constraint propagation as the paper's cycle-level example runs it:
//   1. An assignment (a decision from the scalar controller, or an implication)
//      is written to the master assignment table and broadcast down the tree:
//      it passes D pipeline registers, one per tree level, and updates the
//      assignment copy in every leaf.
//   2. At the same time the watched-literals unit walks the watch list of the
//      literal that just became FALSE. Its clauses are staged, one per leaf;
//      when all M stage slots are full, or the walk has ended, the staged
//      clauses are launched into their leaves (clause_eval) together, once
//      the broadcast has reached the leaves and the leaves are idle, so the
//      leaves evaluate in parallel and report in the same cycle.
//   3. Leaf results climb D reduction registers to the M:1 output
//      interconnect at the root, which sees all M=2**D leaves at once.
//   4. A conflict there has priority: the engine stops the watch-list walk
//      (and any clause fetch), flushes the BCP FIFO, ignores results still in
//      flight and reports the conflict. Otherwise each unit implication is
//      checked, lane by lane, against the master table: a new one is written
//      to the master table at once, one that agrees with it is dropped, one
//      that disagrees is a conflict. Accepted implications are serialised: if
//      the engine is ready for its next broadcast and the FIFO is empty, the
//      first goes straight to broadcast (bypass) and the rest are queued;
//      otherwise all are queued.
//   5. The next broadcast (FIFO head) is taken when the previous watch-list
//      walk is finished and its clauses are evaluated, so walks happen one
//      after another in causal order, while the reduction of older results
//      overlaps new broadcasts.
// Because an implication is queued only when its variable was unassigned, a
// variable enters the FIFO at most once per propagation, so a FIFO of
// NUM_VARS entries cannot overflow and the walk never has to wait for it.
// A clause from the walk waits (ev_stall) while the stage is full.
//
// Commands (cmd_valid while cmd_ready): BCP_DECIDE lit runs propagation to
// completion; BCP_CLEAR unassigns everything; BCP_UNASSIGN clears one
// variable (for backtracking by the scalar controller). done pulses when a
// command finishes; conflict and n_assign (assignments made by the last
// DECIDE, decision included) then hold until the next command. q_var/q_val
// read the master table. ev_* pulse once per event for observability.
//
// Paper: broadcast/reduction through the tree, WLs lookup with DMA on a miss,
// BCP FIFO, priority conflict handling. This design's choices: leaf
// assignment copies, the staging of clauses, the ready rule of step 5, the checks at the root, the
// FIFO depth and the command set. Conflict analysis (CDCL learning) is left to software.
//
// Lint notes (deliberately unused signals): the engine uses only the
// literals of a clause record from the watched-literals unit, not its next
// pointers or its pointer; the FIFO's count and free_slots are not needed
// because a variable is queued at most once and the FIFO holds NUM_VARS.
module bcp_engine
  import reason_pkg::*;
#(
  parameter int D     = TREE_D,
  parameter int DEPTH = BCP_FIFO_DEPTH,
  parameter int LOCAL = LOCAL_CLAUSES
) (
  input  logic              clk,
  input  logic              rst_n,
  // watched-literal store configuration
  input  logic              cfg_we,
  input  logic              cfg_sel_clause,
  input  logic [CPTR_W-1:0] cfg_addr,
  input  logic [SHM_W-1:0]  cfg_wdata,
  input  logic [SHM_AW-1:0] clause_base,
  // commands
  input  logic              cmd_valid,
  input  bcp_cmd_e          cmd,
  input  lit_t              cmd_lit,
  output logic              cmd_ready,
  output logic              done,
  output logic              conflict,
  output logic [VAR_W:0]    n_assign,
  // master table read
  input  logic [VAR_W-1:0]  q_var,
  output val_e              q_val,
  // clause fetch port
  output logic              dma_req_valid,
  output logic [SHM_AW-1:0] dma_req_addr,
  input  logic              dma_req_ready,
  input  logic              dma_rsp_valid,
  input  logic [SHM_W-1:0]  dma_rsp_data,
  output logic              dma_abort,
  // events
  output logic              ev_bypass,
  output logic              ev_queue,
  output logic              ev_multi,
  output logic              ev_stall,
  output logic              ev_conflict,
  output logic              ev_miss,
  output logic              ev_drop
);

  localparam int M  = 1 << D;
  localparam int CW = $clog2(DEPTH) + 1;

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;

  typedef struct packed {
    logic          valid;
    logic          clear;
    logic [VAR_W-1:0] var_id;
    val_e          val;
  } bcast_t;

  state_e state;
  logic [NUM_VARS-1:0][1:0] master;

  // ---- broadcast pipeline (root -> leaves) -------------------------------
  bcast_t [D-1:0] bc;
  bcast_t         bc_in;
  logic           bc_busy;

  always_comb begin
    bc_busy = 1'b0;
    for (int i = 0; i < D; i++) bc_busy |= bc[i].valid;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) bc <= '0;
    else begin
      bc[0] <= bc_in;
      for (int i = 1; i < D; i++) bc[i] <= bc[i-1];
    end
  end

  // ---- watched-literals unit ---------------------------------------------
  logic    wl_start, wl_abort, wl_busy, wl_miss, wl_out_valid, wl_out_ready;
  lit_t    wl_lit;
  clause_t wl_clause;
  logic [CPTR_W-1:0] wl_ptr;

  watched_literals_unit #(.LOCAL(LOCAL)) u_wl (
    .clk, .rst_n,
    .cfg_we, .cfg_sel_clause, .cfg_addr, .cfg_wdata, .clause_base,
    .start(wl_start), .lit(wl_lit), .abort(wl_abort), .busy(wl_busy), .miss(wl_miss),
    .out_valid(wl_out_valid), .out_ready(wl_out_ready), .out_clause(wl_clause), .out_ptr(wl_ptr),
    .dma_req_valid, .dma_req_addr, .dma_req_ready, .dma_rsp_valid, .dma_rsp_data
  );

  // ---- leaves ------------------------------------------------------------
  // clause staging registers, one per leaf
  logic [M-1:0] stage_v, stage_v_nxt;
  lit_t [M-1:0][CLAUSE_K-1:0] stage;
  logic stage_full, launch;
  logic [M-1:0]  leaf_start, leaf_busy, leaf_rv;
  res_kind_e [M-1:0] leaf_rk;
  lit_t [M-1:0]  leaf_rl;

  for (genvar i = 0; i < M; i++) begin : g_leaf
    clause_eval u_leaf (
      .clk, .rst_n,
      .upd_valid(bc[D-1].valid & ~bc[D-1].clear), .upd_clear(bc[D-1].valid & bc[D-1].clear),
      .upd_var(bc[D-1].var_id), .upd_val(bc[D-1].val),
      .start(leaf_start[i]), .lits(stage[i]), .busy(leaf_busy[i]),
      .res_valid(leaf_rv[i]), .res_kind(leaf_rk[i]), .res_lit(leaf_rl[i])
    );
  end

  // ---- reduction pipeline (leaves -> root) --------------------------------
  logic [D-1:0][M-1:0]       rd_v;
  res_kind_e [D-1:0][M-1:0]  rd_k;
  lit_t [D-1:0][M-1:0]       rd_l;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_v <= '0; rd_k <= '0; rd_l <= '0;
    end else begin
      rd_v[0] <= leaf_rv; rd_k[0] <= leaf_rk; rd_l[0] <= leaf_rl;
      for (int i = 1; i < D; i++) begin
        rd_v[i] <= rd_v[i-1]; rd_k[i] <= rd_k[i-1]; rd_l[i] <= rd_l[i-1];
      end
    end
  end

  // ---- BCP FIFO ------------------------------------------------------------
  logic           f_flush, f_pop, f_empty;
  logic [M-1:0]   f_push;
  lit_t           f_head;
  logic [CW-1:0]  f_count, f_free;

  bcp_fifo #(.W(LIT_W), .M(M), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n, .flush(f_flush), .push_mask(f_push), .push_data(rd_l[D-1]),
    .pop(f_pop), .head(f_head), .empty(f_empty), .count(f_count), .free_slots(f_free)
  );

  // ---- control --------------------------------------------------------------
  logic [7:0] pending;          // clauses dispatched, result not yet at the root
  logic [M-1:0] top_unit, top_conf, acc, acc_push;
  logic any_conf, ready_next;
  logic do_assign, raise_conf, finish, any_acc;
  lit_t asg_lit;
  logic dispatch;
  logic [$clog2(M)-1:0] free_slot;
  logic [NUM_VARS-1:0][1:0] master_n;     // master table after this cycle's acceptances
  logic wl_start_q;

  // clause staging registers (one per leaf)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stage_v <= '0;
      stage   <= '0;
    end else if (raise_conf || state != S_RUN) begin
      stage_v <= '0;
    end else begin
      if (dispatch) stage[free_slot] <= wl_clause.lits;
      stage_v <= stage_v_nxt;
    end
  end

  always_comb begin
    stage_v_nxt = launch ? '0 : stage_v;
    if (dispatch) stage_v_nxt[free_slot] = 1'b1;
  end

  // implied literals arriving at the root, split into variable and sign
  logic [M-1:0][VAR_W-1:0] u_var;
  logic [M-1:0]            u_neg;
  for (genvar i = 0; i < M; i++) begin : g_ulit
    assign u_var[i] = rd_l[D-1][i][LIT_W-1:1];
    assign u_neg[i] = rd_l[D-1][i][0];
  end

  always_comb begin
    for (int i = 0; i < M; i++) begin
      top_unit[i] = rd_v[D-1][i] && (rd_k[D-1][i] == RES_UNIT);
      top_conf[i] = rd_v[D-1][i] && (rd_k[D-1][i] == RES_CONFLICT);
    end
    any_conf = |top_conf && (state == S_RUN);

    free_slot = '0;
    for (int i = M - 1; i >= 0; i--) if (!stage_v[i]) free_slot = ($clog2(M))'(i);

    ready_next = !wl_busy && !bc_busy && (leaf_busy == '0) && !wl_start_q && (stage_v == '0);

    // clauses from the walk are staged, one per leaf; a full stage, or the
    // rest of a finished walk, is launched into all leaves at once after the
    // broadcast has landed, so the leaves evaluate in parallel
    stage_full   = &stage_v;
    dispatch     = (state == S_RUN) && wl_out_valid && !stage_full;
    wl_out_ready = dispatch;
    launch       = (state == S_RUN) && (stage_v != '0) && (leaf_busy == '0) && !bc_busy
                   && (stage_full || !wl_busy);
    leaf_start   = launch ? stage_v : '0;

    // M:1 output interconnect: accept implications lane by lane against the
    // master table (including lanes accepted earlier in this cycle)
    master_n   = master;
    acc        = '0;
    ev_drop    = 1'b0;
    raise_conf = any_conf;
    if (state == S_RUN) begin
      for (int i = 0; i < M; i++) begin
        if (top_unit[i]) begin
          if (val_e'(master_n[u_var[i]]) == VAL_UNASSIGNED) begin
            acc[i] = 1'b1;
            master_n[u_var[i]] = u_neg[i] ? VAL_FALSE : VAL_TRUE;
          end else if ((val_e'(master_n[u_var[i]]) == VAL_TRUE) == !u_neg[i]) begin
            ev_drop = 1'b1;
          end else begin
            raise_conf = 1'b1;
          end
        end
      end
    end
    any_acc = |acc;

    // next assignment to broadcast and walk: FIFO head, or bypass
    do_assign = 1'b0;
    asg_lit   = '0;
    f_pop     = 1'b0;
    acc_push  = acc;
    ev_bypass = 1'b0;
    if (state == S_RUN && !raise_conf && ready_next) begin
      if (!f_empty) begin
        do_assign = 1'b1;
        asg_lit   = f_head;
        f_pop     = 1'b1;
      end else if (any_acc) begin
        do_assign = 1'b1;
        ev_bypass = 1'b1;
        for (int i = M - 1; i >= 0; i--) if (acc[i]) asg_lit = rd_l[D-1][i];
        acc_push  = acc & ~(acc & (~acc + 1'b1));
      end
    end
    f_push = raise_conf ? '0 : acc_push;

    finish = (state == S_RUN) && !raise_conf && !any_acc && ready_next && f_empty
             && (pending == '0) && !wl_out_valid && (stage_v == '0);

    f_flush   = raise_conf;
    wl_abort  = raise_conf;
    dma_abort = raise_conf;
    cmd_ready = (state == S_IDLE);

    ev_queue    = (f_push != '0);
    ev_multi    = ($countones(acc) > 1) && !raise_conf;
    ev_stall    = (state == S_RUN) && wl_out_valid && !dispatch && !raise_conf;
    ev_conflict = raise_conf;
    ev_miss     = wl_miss;
  end

  // command-side assignment (decisions) and broadcast input
  logic idle_decide, idle_decide_ok;
  assign idle_decide    = (state == S_IDLE) && cmd_valid && (cmd == BCP_DECIDE);
  assign idle_decide_ok = idle_decide && (val_e'(master[cmd_lit[LIT_W-1:1]]) == VAL_UNASSIGNED);

  lit_t sel_lit;
  assign sel_lit = idle_decide_ok ? cmd_lit : asg_lit;

  always_comb begin
    bc_in    = '0;
    wl_start = 1'b0;
    wl_lit   = '0;
    if (idle_decide_ok || do_assign) begin
      bc_in.valid  = 1'b1;
      bc_in.var_id = sel_lit[LIT_W-1:1];
      bc_in.val    = sel_lit[0] ? VAL_FALSE : VAL_TRUE;
      wl_start     = 1'b1;
      wl_lit       = {sel_lit[LIT_W-1:1], ~sel_lit[0]};   // the literal that became FALSE
    end else if ((state == S_IDLE) && cmd_valid && (cmd != BCP_DECIDE)) begin
      bc_in.valid  = 1'b1;
      bc_in.clear  = (cmd == BCP_CLEAR);
      bc_in.var_id = cmd_lit[LIT_W-1:1];
      bc_in.val    = VAL_UNASSIGNED;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) wl_start_q <= 1'b0;
    else        wl_start_q <= wl_start;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      master   <= '0;
      done     <= 1'b0;
      conflict <= 1'b0;
      n_assign <= '0;
      pending  <= '0;
    end else begin
      done    <= 1'b0;
      pending <= pending + 8'(n_units_all(leaf_start)) - 8'(n_units_all(rd_v[D-1]));
      if (state == S_RUN) master <= master_n;
      if (bc_in.valid && state == S_IDLE) begin
        if (bc_in.clear) master <= '0;
        else             master[bc_in.var_id] <= bc_in.val;
      end
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          if (cmd == BCP_DECIDE) begin
            conflict <= 1'b0;
            if (idle_decide_ok) begin
              n_assign <= (VAR_W+1)'(1);
              state    <= S_RUN;
            end else begin
              n_assign <= '0;
              conflict <= ((val_e'(master[cmd_lit[LIT_W-1:1]]) == VAL_TRUE) == cmd_lit[0]);
              done     <= 1'b1;
            end
          end else begin
            done <= 1'b1;
          end
        end
        S_RUN: begin
          if (!raise_conf) n_assign <= n_assign + (VAR_W+1)'($countones(acc));
          if (raise_conf) begin
            conflict <= 1'b1;
            state    <= S_DRAIN;
          end else if (finish) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        S_DRAIN: if ((pending == '0) && (leaf_busy == '0) && !bc_busy && !wl_busy) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  function automatic logic [7:0] n_units_all(input logic [M-1:0] v);
    logic [7:0] n;
    n = '0;
    for (int i = 0; i < M; i++) n += 8'(v[i]);
    return n;
  endfunction

  assign q_val = val_e'(master[q_var]);

endmodule
