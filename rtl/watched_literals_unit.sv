// watched_literals_unit: hardware two-watched-literal index (WLs unit).
//
// Memory layout, as in the paper: an index SRAM holds one head pointer per
// literal code, and the clause SRAM holds clause records, each with a
// next-watch pointer for each of its two watched literals, so every literal's
// watch list is a linked list threaded through the clause store. CPTR_NULL
// ends a list. Here the two watched literals are slots 0 and 1 of a record
// (this design's convention).
//
// Operation: start with a literal that has just become FALSE. The unit reads
// its head pointer, then follows next-watch pointers, presenting each clause
// on out_* (valid/ready) so the controller can dispatch it to a leaf node.
// Pointers below LOCAL are served by the local clause SRAM; while the list
// stays local the next record is read in the cycle the current one is
// accepted, so a local list streams one clause per cycle. Larger pointers are a miss: the record is fetched from the
// shared scratchpad at clause_base + pointer through the DMA port (the
// adder computes clause base + index) and miss pulses for one cycle. abort
// stops a walk at once and drops an outstanding fetch (the paper's "halt the
// ongoing DMA fetch" on a conflict); a response arriving later is ignored.
// busy is high from start until the list ends or abort.
//
// The unit only walks lists; it does not move watches to other literals when
// a watched literal becomes FALSE. The paper does not describe watch
// migration, so watch lists are kept as loaded. Which clauses the lists hold
// is left to the software that builds them. A clause record is narrower than
// a shared-memory word, so the top bits of dma_rsp_data and cfg_wdata are
// unused, and a local read address only needs log2(LOCAL) pointer bits.
module watched_literals_unit
  import reason_pkg::*;
#(
  parameter int LOCAL = LOCAL_CLAUSES,
  parameter int AW    = SHM_AW
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration writes
  input  logic              cfg_we,
  input  logic              cfg_sel_clause,     // 0: head table, 1: clause SRAM
  input  logic [CPTR_W-1:0] cfg_addr,
  input  logic [SHM_W-1:0]  cfg_wdata,
  input  logic [AW-1:0]     clause_base,
  // walk control
  input  logic              start,
  input  lit_t              lit,
  input  logic              abort,
  output logic              busy,
  output logic              miss,
  // clause output
  output logic              out_valid,
  input  logic              out_ready,
  output clause_t           out_clause,
  output logic [CPTR_W-1:0] out_ptr,
  // clause fetch from the shared scratchpad
  output logic              dma_req_valid,
  output logic [AW-1:0]     dma_req_addr,
  input  logic              dma_req_ready,
  input  logic              dma_rsp_valid,
  input  logic [SHM_W-1:0]  dma_rsp_data
);

  typedef enum logic [2:0] {S_IDLE, S_HEAD, S_PTR, S_OUT, S_DMA_REQ, S_DMA_WAIT} state_e;

  localparam int CW = $bits(clause_t);

  logic [CPTR_W-1:0] head_mem [NUM_LITS];
  logic [CW-1:0]     clause_mem [LOCAL];

  state_e            state;
  lit_t              lit_q;
  logic [CPTR_W-1:0] ptr, head_rd;
  logic [CW-1:0]     cl_rd;
  clause_t           cl_q, cur;
  logic              from_mem;
  logic [CPTR_W-1:0] nxt, rd_ptr;

  // current clause: straight from the SRAM read port, or the fetched record
  assign cur    = from_mem ? clause_t'(cl_rd) : cl_q;
  assign nxt    = (cur.lits[0] == lit_q) ? cur.next0 : cur.next1;
  assign rd_ptr = (state == S_OUT && out_ready) ? nxt : ptr;

  // configuration writes
  always_ff @(posedge clk) begin
    if (cfg_we && !cfg_sel_clause) head_mem[cfg_addr[LIT_W-1:0]] <= cfg_wdata[CPTR_W-1:0];
    if (cfg_we && cfg_sel_clause && (32'(cfg_addr) < LOCAL)) clause_mem[cfg_addr[$clog2(LOCAL)-1:0]] <= cfg_wdata[CW-1:0];
  end

  // synchronous reads
  always_ff @(posedge clk) begin
    head_rd <= head_mem[lit];
    cl_rd   <= clause_mem[rd_ptr[$clog2(LOCAL)-1:0]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      lit_q <= '0;
      ptr   <= CPTR_NULL;
      cl_q  <= '0;
      from_mem <= 1'b0;
    end else if (abort) begin
      state <= S_IDLE;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          lit_q <= lit;
          state <= S_HEAD;
        end
        S_HEAD: begin
          ptr   <= head_rd;
          state <= S_PTR;
        end
        S_PTR: begin
          if (ptr == CPTR_NULL)         state <= S_IDLE;
          else if (32'(ptr) < LOCAL) begin
            from_mem <= 1'b1;
            state    <= S_OUT;
          end
          else                          state <= S_DMA_REQ;
        end
        S_DMA_REQ: if (dma_req_ready) state <= S_DMA_WAIT;
        S_DMA_WAIT: if (dma_rsp_valid) begin
          cl_q     <= clause_t'(dma_rsp_data[CW-1:0]);
          from_mem <= 1'b0;
          state    <= S_OUT;
        end
        S_OUT: if (out_ready) begin
          ptr <= nxt;
          if (nxt != CPTR_NULL && 32'(nxt) < LOCAL) begin
            from_mem <= 1'b1;           // record read this cycle from nxt
            state    <= S_OUT;
          end else begin
            state    <= S_PTR;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy          = (state != S_IDLE);
  assign miss          = (state == S_PTR) && (ptr != CPTR_NULL) && !(32'(ptr) < LOCAL) && !abort;
  assign out_valid     = (state == S_OUT);
  assign out_clause    = cur;
  assign out_ptr       = ptr;
  assign dma_req_valid = (state == S_DMA_REQ);
  assign dma_req_addr  = clause_base + AW'(ptr);

endmodule
