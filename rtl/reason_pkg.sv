// reason_pkg: types and constants shared by the REASON plug-in.
//
// Datapath values are 16-bit unsigned fixed point with 15 fraction bits
// (1.0 = 16'h8000). The number format is this design's choice: the paper
// gives no word width. Literals are {variable, negation}; variable 0 is
// reserved, so literal codes 0 and 1 mean "no literal". A clause record holds
// up to CLAUSE_K literals plus the two next-watch pointers of the linked
// watch lists, and fits one 64-bit shared-memory word.
//
// The configuration constants follow the paper where it gives a number
// (tree depth D=3, B=64 register banks, R=32 registers per bank, 12 PEs);
// the rest are assumptions listed in the design documentation.
package reason_pkg;

  // ---------------- datapath -------------------------------------------
  localparam int DATA_W    = 16;
  localparam int FRAC_W    = 15;
  localparam int TREE_D    = 3;           // tree depth D (paper: D=3)
  localparam int TREE_IN   = 1 << TREE_D; // operand inputs of one tree
  localparam int TREE_NODES= TREE_IN - 1; // two-input nodes of one tree
  localparam int NUM_BANKS = 64;          // B (paper: B=64)
  localparam int BANK_REGS = 32;          // R (paper: R=32)
  localparam int BANK_AW   = $clog2(NUM_BANKS);
  localparam int REG_AW    = $clog2(BANK_REGS);
  localparam int NUM_PE    = 12;          // tree-based PE cores (paper: 12)

  // Benes network control bits for NUM_BANKS ports: (2*log2(N)-1) stages of N/2 switches
  localparam int BENES_STAGES = 2 * BANK_AW - 1;
  localparam int BENES_CTRL_W = BENES_STAGES * (NUM_BANKS / 2);

  typedef enum logic [2:0] {
    NODE_NOP   = 3'd0,  // output 0
    NODE_ADD   = 3'd1,  // a + b (saturating)
    NODE_MUL   = 3'd2,  // a * b (fixed point, saturating)
    NODE_MAX   = 3'd3,  // comparator: larger of a, b
    NODE_PASSA = 3'd4,  // forward a
    NODE_PASSB = 3'd5   // forward b
  } node_op_e;

  // ---------------- symbolic --------------------------------------------
  localparam int VAR_W      = 8;
  localparam int NUM_VARS   = 1 << VAR_W;
  localparam int LIT_W      = VAR_W + 1;
  localparam int NUM_LITS   = 1 << LIT_W;
  localparam int CLAUSE_K   = 4;          // literals per clause record
  localparam int CPTR_W     = 12;         // clause pointer width
  localparam logic [CPTR_W-1:0] CPTR_NULL = '1;
  localparam int LOCAL_CLAUSES = 1024;    // clauses held in the local SRAM
  localparam int BCP_FIFO_DEPTH = NUM_VARS; // one entry per variable: cannot overflow

  typedef logic [LIT_W-1:0] lit_t;        // {var, neg}

  typedef enum logic [1:0] {
    VAL_UNASSIGNED = 2'd0,
    VAL_FALSE      = 2'd1,
    VAL_TRUE       = 2'd2
  } val_e;

  typedef struct packed {
    logic [CPTR_W-1:0] next1;             // next clause watching lits[1]
    logic [CPTR_W-1:0] next0;             // next clause watching lits[0]
    lit_t [CLAUSE_K-1:0] lits;            // lits[0], lits[1] are the watched ones
  } clause_t;

  typedef enum logic [1:0] {
    RES_NONE     = 2'd0,                  // clause neither unit nor conflicting
    RES_SAT      = 2'd1,                  // clause satisfied
    RES_UNIT     = 2'd2,                  // one literal left: implication
    RES_CONFLICT = 2'd3                   // all literals false
  } res_kind_e;

  typedef struct packed {
    res_kind_e kind;
    lit_t      lit;                       // implied literal for RES_UNIT
  } leaf_res_t;

  typedef enum logic [1:0] {
    BCP_CLEAR    = 2'd0,                  // unassign every variable
    BCP_DECIDE   = 2'd1,                  // assign a literal and propagate
    BCP_UNASSIGN = 2'd2                   // unassign one variable (backtrack)
  } bcp_cmd_e;

  // ---------------- shared memory -----------------------------------------
  localparam int SHM_W     = 64;
  localparam int SHM_AW    = 16;          // 64 Ki words = 512 KiB
  localparam int SHM_BANKS = 4;

  typedef struct packed {
    logic              we;
    logic [SHM_AW-1:0] addr;
    logic [SHM_W-1:0]  wdata;
  } mem_req_t;

  // ---------------- VLIW instruction ---------------------------------------
  typedef enum logic [3:0] {
    OP_NOP       = 4'd0,
    OP_EXEC      = 4'd1,   // read banks, route through Benes, run tree, write back
    OP_LOAD      = 4'd2,   // count+1 words in_base+addr.. -> banks bank.. (auto address)
    OP_STORE     = 4'd3,   // bank/reg -> out_base+addr
    OP_SYM_CLEAR = 4'd4,   // clear the symbolic assignment
    OP_SYM_RUN   = 4'd5,   // decide a literal (imm or in_base+addr) and run BCP
    OP_SYM_STORE = 4'd6,   // write BCP result word to out_base+addr
    OP_HALT      = 4'd7
  } opcode_e;

  typedef struct packed {
    opcode_e                              op;
    logic [SHM_AW-1:0]                    addr;
    logic [BANK_AW-1:0]                   bank;
    logic [REG_AW-1:0]                    rreg;
    logic [BANK_AW-1:0]                   count;
    logic                                 lit_from_mem;
    lit_t                                 lit;
    logic [NUM_BANKS-1:0]                 rd_en;
    logic [NUM_BANKS-1:0][REG_AW-1:0]     rd_addr;
    logic [NUM_BANKS-1:0]                 rd_release;
    logic [BENES_CTRL_W-1:0]              benes_ctrl;
    logic [TREE_NODES-1:0][2:0]           node_op;
    logic [TREE_NODES-1:0]                wb_en;
  } instr_t;

  localparam int INSTR_W   = $bits(instr_t);
  localparam int IMEM_DEPTH = 256;
  localparam int PC_W      = $clog2(IMEM_DEPTH);

  // configuration targets of a PE core
  typedef enum logic [1:0] {
    CFG_IMEM   = 2'd0,
    CFG_HEAD   = 2'd1,
    CFG_CLAUSE = 2'd2,
    CFG_REG    = 2'd3      // core registers: clause base address
  } cfg_target_e;

  // per-core event pulses (one cycle each), for observation and testing
  typedef struct packed {
    logic exec;        // tree instruction issued
    logic interlock;   // memory/symbolic instruction waited for the tree to drain
    logic load_word;   // word written into a bank by the DMA
    logic rf_overflow; // write to a full register bank
    logic bypass;      // implication broadcast without queueing
    logic queued;      // implication(s) pushed to the BCP FIFO
    logic multi;       // several implications reached the root in one cycle
    logic stall;       // clause from the walk waited: all leaf slots staged
    logic conflict;    // conflict handled (FIFO flushed, walk aborted)
    logic miss;        // watch-list clause not in local SRAM: DMA fetch
    logic drop;        // implication already satisfied, dropped
  } pe_events_t;

  // fixed-point helpers
  function automatic logic [DATA_W-1:0] fx_add(input logic [DATA_W-1:0] a, input logic [DATA_W-1:0] b);
    logic [DATA_W:0] s;
    s = {1'b0, a} + {1'b0, b};
    return s[DATA_W] ? '1 : s[DATA_W-1:0];
  endfunction

  function automatic logic [DATA_W-1:0] fx_mul(input logic [DATA_W-1:0] a, input logic [DATA_W-1:0] b);
    logic [2*DATA_W-1:0] p;
    logic [2*DATA_W-1:0] q;
    p = a * b;
    q = p >> FRAC_W;
    return (q > {{DATA_W{1'b0}}, {DATA_W{1'b1}}}) ? '1 : q[DATA_W-1:0];
  endfunction

endpackage
