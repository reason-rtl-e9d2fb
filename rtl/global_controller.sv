// global_controller: the plug-in's command interface to the GPU side.
//
// It implements the paper's programming model and flag synchronisation.
// An execute command (the hardware side of REASON_execute) carries a batch
// id, the number of objects, the shared-memory addresses of the neural
// buffer and of the symbolic buffer, and a reasoning mode. Flags live in
// the first word of each buffer (this layout is this design's choice):
//   1. poll word neural_buf until it is non-zero (the GPU's neural_ready),
//      then clear it;
//   2. start the workload scheduler on objects at neural_buf+1 (inputs) and
//      symbolic_buf+1 (results), using the entry program counter configured
//      for the mode and the configured object strides;
//   3. when every object is finished, write {1, batch_id} to word
//      symbolic_buf (symbolic_ready) and return to IDLE.
// status_busy is the paper's IDLE/EXECUTION status (REASON_check_status);
// a blocking check is the host waiting for it to fall. done pulses at the
// end of a batch. Configuration registers (cfg_addr): 0..3 entry pc of
// modes 0..3, 4 input stride, 5 output stride.
module global_controller
  import reason_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  // configuration
  input  logic               cfg_we,
  input  logic [2:0]         cfg_addr,
  input  logic [15:0]        cfg_wdata,
  // execute command and status
  input  logic               exec_valid,
  output logic               exec_ready,
  input  logic [15:0]        exec_batch_id,
  input  logic [15:0]        exec_batch_size,
  input  logic [SHM_AW-1:0]  exec_neural_buf,
  input  logic [SHM_AW-1:0]  exec_symbolic_buf,
  input  logic [1:0]         exec_mode,
  output logic               status_busy,
  output logic [15:0]        status_batch_id,
  output logic               done,
  // shared-memory port
  output logic               mem_req_valid,
  output mem_req_t           mem_req,
  input  logic               mem_gnt,
  input  logic               mem_rsp_valid,
  input  logic [SHM_W-1:0]   mem_rsp_data,
  // workload scheduler
  output logic               sch_start,
  output logic [15:0]        sch_batch_size,
  output logic [PC_W-1:0]    sch_pc,
  output logic [SHM_AW-1:0]  sch_in_base,
  output logic [SHM_AW-1:0]  sch_out_base,
  output logic [SHM_AW-1:0]  sch_in_stride,
  output logic [SHM_AW-1:0]  sch_out_stride,
  input  logic               sch_done
);

  typedef enum logic [2:0] {S_IDLE, S_POLL, S_POLL_WAIT, S_CLEAR, S_START, S_RUN, S_FLAG} state_e;

  state_e state;
  logic [3:0][PC_W-1:0] mode_pc;
  logic [SHM_AW-1:0] in_stride, out_stride, nbuf, sbuf;
  logic [15:0] bsize;
  logic [1:0]  mode_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode_pc    <= '0;
      in_stride  <= SHM_AW'(1);
      out_stride <= SHM_AW'(1);
    end else if (cfg_we) begin
      if (cfg_addr < 3'd4) mode_pc[cfg_addr[1:0]] <= cfg_wdata[PC_W-1:0];
      else if (cfg_addr == 3'd4) in_stride  <= cfg_wdata[SHM_AW-1:0];
      else if (cfg_addr == 3'd5) out_stride <= cfg_wdata[SHM_AW-1:0];
    end
  end

  always_comb begin
    mem_req_valid = 1'b0;
    mem_req       = '0;
    unique case (state)
      S_POLL:  begin mem_req_valid = 1'b1; mem_req.addr = nbuf; end
      S_CLEAR: begin mem_req_valid = 1'b1; mem_req.addr = nbuf; mem_req.we = 1'b1; end
      S_FLAG:  begin
        mem_req_valid = 1'b1;
        mem_req.addr  = sbuf;
        mem_req.we    = 1'b1;
        mem_req.wdata = {{(SHM_W-33){1'b0}}, 1'b1, 16'h0, status_batch_id};
      end
      default: ;
    endcase
  end

  assign exec_ready     = (state == S_IDLE);
  assign status_busy    = (state != S_IDLE);
  assign sch_start      = (state == S_START);
  assign sch_batch_size = bsize;
  assign sch_pc         = mode_pc[mode_q];
  assign sch_in_base    = nbuf + 1'b1;
  assign sch_out_base   = sbuf + 1'b1;
  assign sch_in_stride  = in_stride;
  assign sch_out_stride = out_stride;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state           <= S_IDLE;
      nbuf            <= '0;
      sbuf            <= '0;
      bsize           <= '0;
      mode_q          <= '0;
      status_batch_id <= '0;
      done            <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (exec_valid) begin
          nbuf            <= exec_neural_buf;
          sbuf            <= exec_symbolic_buf;
          bsize           <= exec_batch_size;
          mode_q          <= exec_mode;
          status_batch_id <= exec_batch_id;
          state           <= S_POLL;
        end
        S_POLL:      if (mem_gnt) state <= S_POLL_WAIT;
        S_POLL_WAIT: if (mem_rsp_valid) state <= (mem_rsp_data != '0) ? S_CLEAR : S_POLL;
        S_CLEAR:     if (mem_gnt) state <= S_START;
        S_START:     state <= S_RUN;
        S_RUN:       if (sch_done) state <= S_FLAG;
        S_FLAG:      if (mem_gnt) begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
