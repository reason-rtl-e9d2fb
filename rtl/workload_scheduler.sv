// workload_scheduler: spreads the objects of a batch over the PE cores.
//
// On start it holds a batch of batch_size objects. Object i has its input at
// in_base + i*in_stride and its output at out_base + i*out_stride in the
// shared memory. Every cycle in which objects remain and some core is idle,
// the next object goes to the lowest-numbered idle core: core_start pulses
// for that core with the program counter and the two base addresses on the
// shared core_* lines (each core latches them on its start). done pulses once
// every object has been started and every core is idle again. The paper says
// only that a workload scheduler manages the mapping of work onto the PE
// cores; first-idle-core dispatch is this design's choice.
module workload_scheduler
  import reason_pkg::*;
#(
  parameter int NPE = NUM_PE
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [15:0]        batch_size,
  input  logic [PC_W-1:0]    pc,
  input  logic [SHM_AW-1:0]  in_base,
  input  logic [SHM_AW-1:0]  out_base,
  input  logic [SHM_AW-1:0]  in_stride,
  input  logic [SHM_AW-1:0]  out_stride,
  input  logic [NPE-1:0]     core_busy,
  output logic [NPE-1:0]     core_start,
  output logic [PC_W-1:0]    core_pc,
  output logic [SHM_AW-1:0]  core_in_base,
  output logic [SHM_AW-1:0]  core_out_base,
  output logic               busy,
  output logic               done
);

  logic              running;
  logic [15:0]       left;
  logic [PC_W-1:0]   pc_q;
  logic [SHM_AW-1:0] in_q, out_q, ins_q, outs_q;
  logic [NPE-1:0]    started_q;
  logic              found;
  logic [$clog2(NPE)-1:0] sel;

  always_comb begin
    found = 1'b0;
    sel   = '0;
    for (int i = NPE - 1; i >= 0; i--) begin
      if (!core_busy[i] && !started_q[i]) begin
        found = 1'b1;
        sel   = ($clog2(NPE))'(i);
      end
    end
    core_start = '0;
    if (running && (left != '0) && found) core_start[sel] = 1'b1;
  end

  assign core_pc       = pc_q;
  assign core_in_base  = in_q;
  assign core_out_base = out_q;
  assign busy          = running;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running   <= 1'b0;
      left      <= '0;
      pc_q      <= '0;
      in_q      <= '0;
      out_q     <= '0;
      ins_q     <= '0;
      outs_q    <= '0;
      started_q <= '0;
      done      <= 1'b0;
    end else begin
      done      <= 1'b0;
      started_q <= core_start;
      if (!running) begin
        if (start) begin
          running <= 1'b1;
          left    <= batch_size;
          pc_q    <= pc;
          in_q    <= in_base;
          out_q   <= out_base;
          ins_q   <= in_stride;
          outs_q  <= out_stride;
        end
      end else begin
        if (core_start != '0) begin
          left  <= left - 1'b1;
          in_q  <= in_q + ins_q;
          out_q <= out_q + outs_q;
        end else if (left == '0 && core_busy == '0 && started_q == '0) begin
          running <= 1'b0;
          done    <= 1'b1;
        end
      end
    end
  end

endmodule
