// reason_top: the REASON plug-in, a reconfigurable tree-based co-processor
// for symbolic and probabilistic reasoning that sits beside a GPU.
//
// Structure (the paper's plug-in diagram): NPE tree-based PE cores (pe_core),
// a shared local memory used as scratchpad by all of them, a global
// interconnect between cores and memory, a global controller that speaks
// the execute/status/flag protocol with the GPU side, and a workload
// scheduler that spreads the objects of a batch over the cores.
//
// Ports:
//   host_*      the GPU side's port into the shared local memory (what the
//               paper reaches through the shared L2); neural results and
//               flags are written here and symbolic results read back.
//   cfg_*       program loading: cfg_core selects a core, or every core if
//               cfg_all; cfg_target/cfg_addr/cfg_wdata as in pe_core.
//   ctl_cfg_*   global controller registers (mode entry pcs, strides).
//   exec_*      one execute command per batch; status_busy is the
//               IDLE/EXECUTION status, done pulses at the end of a batch.
//   core_busy, core_done, pe_ev  per-core activity, end-of-object pulses
//               and event pulses, for observation.
// Interconnect requesters: cores 0..NPE-1, then the controller, then the
// host port.
module reason_top
  import reason_pkg::*;
#(
  parameter int NPE = NUM_PE
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // host access to the shared local memory
  input  logic                  host_req_valid,
  input  mem_req_t              host_req,
  output logic                  host_gnt,
  output logic                  host_rsp_valid,
  output logic [SHM_W-1:0]      host_rsp_data,
  // core configuration
  input  logic                  cfg_we,
  input  logic [3:0]            cfg_core,
  input  logic                  cfg_all,
  input  cfg_target_e           cfg_target,
  input  logic [SHM_AW-1:0]     cfg_addr,
  input  logic [INSTR_W-1:0]    cfg_wdata,
  // controller configuration
  input  logic                  ctl_cfg_we,
  input  logic [2:0]            ctl_cfg_addr,
  input  logic [15:0]           ctl_cfg_wdata,
  // execute / status
  input  logic                  exec_valid,
  output logic                  exec_ready,
  input  logic [15:0]           exec_batch_id,
  input  logic [15:0]           exec_batch_size,
  input  logic [SHM_AW-1:0]     exec_neural_buf,
  input  logic [SHM_AW-1:0]     exec_symbolic_buf,
  input  logic [1:0]            exec_mode,
  output logic                  status_busy,
  output logic [15:0]           status_batch_id,
  output logic                  done,
  // observation
  output logic [NPE-1:0]        core_busy,
  output logic [NPE-1:0]        core_done,
  output pe_events_t [NPE-1:0]  pe_ev
);

  localparam int NREQ = NPE + 2;
  localparam int RW   = $clog2((1 << SHM_AW) / SHM_BANKS);

  logic [NREQ-1:0]             rq_valid, rq_gnt, rs_valid;
  mem_req_t [NREQ-1:0]         rq;
  logic [NREQ-1:0][SHM_W-1:0]  rs_data;

  logic [SHM_BANKS-1:0]            m_en, m_we;
  logic [SHM_BANKS-1:0][RW-1:0]    m_row;
  logic [SHM_BANKS-1:0][SHM_W-1:0] m_wdata, m_rdata;

  // scheduler <-> cores
  logic [NPE-1:0]     core_start;
  logic [PC_W-1:0]    core_pc;
  logic [SHM_AW-1:0]  core_in_base, core_out_base;

  for (genvar i = 0; i < NPE; i++) begin : g_pe
    pe_core u_pe (
      .clk, .rst_n,
      .cfg_we(cfg_we && (cfg_all || (cfg_core == 4'(i)))), .cfg_target, .cfg_addr, .cfg_wdata,
      .start(core_start[i]), .start_pc(core_pc), .in_base(core_in_base), .out_base(core_out_base),
      .busy(core_busy[i]), .done(core_done[i]),
      .mem_req_valid(rq_valid[i]), .mem_req(rq[i]), .mem_gnt(rq_gnt[i]),
      .mem_rsp_valid(rs_valid[i]), .mem_rsp_data(rs_data[i]),
      .ev(pe_ev[i])
    );
  end

  // global controller and scheduler
  logic               sch_start, sch_done;
  logic [15:0]        sch_bsize;
  logic [PC_W-1:0]    sch_pc;
  logic [SHM_AW-1:0]  sch_in, sch_out, sch_ins, sch_outs;

  global_controller u_ctl (
    .clk, .rst_n,
    .cfg_we(ctl_cfg_we), .cfg_addr(ctl_cfg_addr), .cfg_wdata(ctl_cfg_wdata),
    .exec_valid, .exec_ready, .exec_batch_id, .exec_batch_size, .exec_neural_buf,
    .exec_symbolic_buf, .exec_mode, .status_busy, .status_batch_id, .done,
    .mem_req_valid(rq_valid[NPE]), .mem_req(rq[NPE]), .mem_gnt(rq_gnt[NPE]),
    .mem_rsp_valid(rs_valid[NPE]), .mem_rsp_data(rs_data[NPE]),
    .sch_start, .sch_batch_size(sch_bsize), .sch_pc, .sch_in_base(sch_in), .sch_out_base(sch_out),
    .sch_in_stride(sch_ins), .sch_out_stride(sch_outs), .sch_done
  );

  workload_scheduler #(.NPE(NPE)) u_sch (
    .clk, .rst_n, .start(sch_start), .batch_size(sch_bsize), .pc(sch_pc),
    .in_base(sch_in), .out_base(sch_out), .in_stride(sch_ins), .out_stride(sch_outs),
    .core_busy, .core_start, .core_pc, .core_in_base, .core_out_base,
    .busy(), .done(sch_done)   // scheduler busy is implied by status_busy
  );

  // host port
  assign rq_valid[NPE+1] = host_req_valid;
  assign rq[NPE+1]       = host_req;
  assign host_gnt        = rq_gnt[NPE+1];
  assign host_rsp_valid  = rs_valid[NPE+1];
  assign host_rsp_data   = rs_data[NPE+1];

  global_interconnect #(.NREQ(NREQ), .NBANK(SHM_BANKS), .WORDS(1 << SHM_AW)) u_xbar (
    .clk, .rst_n, .req_valid(rq_valid), .req(rq), .gnt(rq_gnt),
    .rsp_valid(rs_valid), .rsp_data(rs_data),
    .m_en, .m_we, .m_row, .m_wdata, .m_rdata
  );

  shared_local_memory #(.NBANK(SHM_BANKS), .WORDS(1 << SHM_AW)) u_shm (
    .clk, .en(m_en), .we(m_we), .row(m_row), .wdata(m_wdata), .rdata(m_rdata)
  );

endmodule
