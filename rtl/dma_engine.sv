// dma_engine: memory front-end of a PE core.
//
// Moves data between the shared local memory and the core. It serves two
// clients over one shared-memory port, the clause fetch of the watched-
// literals unit first, then the core's commands:
//   DMA_LOAD   words addr .. addr+count into banks bank .. bank+count, one
//              word per bank (low DATA_W bits), at the bank's automatic
//              register address; reads are issued back to back.
//   DMA_STORE  one word (wdata) to addr.
//   DMA_READ   one word from addr, returned on rd_data with done.
// The shared-memory port is a request/grant port whose read data returns
// exactly one cycle after the grant (the global interconnect guarantees
// this). clause_abort drops an outstanding clause fetch: its response is
// discarded and no rsp is given, which is how a conflict stops the DMA.
//
// The paper names a prefetcher and a high-throughput DMA engine that move
// data from the shared scratchpad but describes neither; this is the simplest
// engine that does the moves the rest of the core needs. No prefetching is
// done.
module dma_engine
  import reason_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  // core commands
  input  logic                cmd_valid,
  input  logic [1:0]          cmd_kind,      // 0 load, 1 store, 2 read
  input  logic [SHM_AW-1:0]   cmd_addr,
  input  logic [BANK_AW-1:0]  cmd_bank,
  input  logic [BANK_AW-1:0]  cmd_count,     // words - 1 (load)
  input  logic [SHM_W-1:0]    cmd_wdata,
  output logic                cmd_ready,
  output logic                done,
  output logic [SHM_W-1:0]    rd_data,
  // bank writes (loads)
  output logic                bank_we,
  output logic [BANK_AW-1:0]  bank_sel,
  output logic [DATA_W-1:0]   bank_wdata,
  // clause fetch client
  input  logic                cf_req_valid,
  input  logic [SHM_AW-1:0]   cf_req_addr,
  output logic                cf_req_ready,
  output logic                cf_rsp_valid,
  output logic [SHM_W-1:0]    cf_rsp_data,
  input  logic                cf_abort,
  // shared-memory port
  output logic                mem_req_valid,
  output mem_req_t            mem_req,
  input  logic                mem_gnt,
  input  logic                mem_rsp_valid,
  input  logic [SHM_W-1:0]    mem_rsp_data
);

  localparam logic [1:0] K_LOAD = 2'd0, K_STORE = 2'd1, K_READ = 2'd2;

  typedef enum logic [1:0] {T_NONE, T_CLAUSE, T_LOAD, T_READ} tag_e;

  logic              active;
  logic [1:0]        kind_q;
  logic [SHM_AW-1:0] addr_q;
  logic [BANK_AW-1:0] bank_q, wbank_q;
  logic [BANK_AW:0]  issue_left, ret_left;
  logic [SHM_W-1:0]  wdata_q;
  tag_e              tag_q;     // what the read granted last cycle was for
  logic              cf_dropped;

  // request selection: clause fetch has priority
  logic core_req;
  always_comb begin
    core_req = active && (issue_left != '0);
    mem_req_valid = cf_req_valid || core_req;
    mem_req = '0;
    if (cf_req_valid) begin
      mem_req.addr = cf_req_addr;
    end else begin
      mem_req.we    = (kind_q == K_STORE);
      mem_req.addr  = addr_q;
      mem_req.wdata = wdata_q;
    end
  end

  assign cf_req_ready = cf_req_valid && mem_gnt;
  assign cmd_ready    = !active;

  logic core_gnt;
  assign core_gnt = !cf_req_valid && core_req && mem_gnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active     <= 1'b0;
      kind_q     <= '0;
      addr_q     <= '0;
      bank_q     <= '0;
      wbank_q    <= '0;
      issue_left <= '0;
      ret_left   <= '0;
      wdata_q    <= '0;
      tag_q      <= T_NONE;
      cf_dropped <= 1'b0;
      done       <= 1'b0;
      rd_data    <= '0;
    end else begin
      done <= 1'b0;
      // tag of the response arriving next cycle
      if (cf_req_valid && mem_gnt)                tag_q <= T_CLAUSE;
      else if (core_gnt && kind_q == K_LOAD)      tag_q <= T_LOAD;
      else if (core_gnt && kind_q == K_READ)      tag_q <= T_READ;
      else                                        tag_q <= T_NONE;
      cf_dropped <= cf_abort;

      if (!active && cmd_valid) begin
        active     <= 1'b1;
        kind_q     <= cmd_kind;
        addr_q     <= cmd_addr;
        bank_q     <= cmd_bank;
        wbank_q    <= cmd_bank;
        wdata_q    <= cmd_wdata;
        issue_left <= (cmd_kind == K_LOAD) ? {1'b0, cmd_count} + 1'b1 : (BANK_AW+1)'(1);
        ret_left   <= (cmd_kind == K_LOAD) ? {1'b0, cmd_count} + 1'b1 : (BANK_AW+1)'(1);
      end else if (active) begin
        if (core_gnt) begin
          issue_left <= issue_left - 1'b1;
          addr_q     <= addr_q + 1'b1;
          if (kind_q == K_STORE) begin
            active <= 1'b0;
            done   <= 1'b1;
          end
        end
        if (mem_rsp_valid && (tag_q == T_LOAD)) begin
          wbank_q  <= wbank_q + 1'b1;
          ret_left <= ret_left - 1'b1;
          if (ret_left == (BANK_AW+1)'(1)) begin
            active <= 1'b0;
            done   <= 1'b1;
          end
        end
        if (mem_rsp_valid && (tag_q == T_READ)) begin
          rd_data <= mem_rsp_data;
          active  <= 1'b0;
          done    <= 1'b1;
        end
      end
    end
  end

  assign bank_we      = mem_rsp_valid && (tag_q == T_LOAD);
  assign bank_sel     = wbank_q;
  assign bank_wdata   = mem_rsp_data[DATA_W-1:0];
  assign cf_rsp_valid = mem_rsp_valid && (tag_q == T_CLAUSE) && !cf_dropped && !cf_abort;
  assign cf_rsp_data  = mem_rsp_data;

endmodule
