// tb_workload_scheduler: batches of objects over 12 modelled cores.
//
// Each modelled core turns busy the cycle after its start pulse (as a PE
// core does) and stays busy a random 1..40 cycles. For random batches
// (including size 0 and sizes above the core count) the test checks that
// at most one core starts per cycle, only idle cores are started, the
// started core is the lowest-numbered idle one, object i gets in_base +
// i*in_stride and out_base + i*out_stride and the batch pc, every object
// starts exactly once, and done pulses once, only after the last core went
// idle. A batch where all cores were busy while objects waited must occur.
module tb_workload_scheduler;
  import reason_pkg::*;
  localparam int NPE = NUM_PE;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0;
  logic [15:0] batch_size = '0;
  logic [PC_W-1:0] pc = '0;
  logic [SHM_AW-1:0] in_base = '0, out_base = '0, in_stride = '0, out_stride = '0;
  logic [NPE-1:0] core_busy = '0, core_start;
  logic [PC_W-1:0] core_pc;
  logic [SHM_AW-1:0] core_in_base, core_out_base;
  logic busy, done;

  workload_scheduler dut (.*);

  int remain [NPE];
  int checks = 0, failures = 0, n_full = 0;

  // core models
  always @(posedge clk) for (int i = 0; i < NPE; i++) begin
    if (core_start[i]) begin core_busy[i] <= 1; remain[i] = 1 + $urandom_range(39); end
    else if (core_busy[i]) begin
      remain[i]--;
      if (remain[i] == 0) core_busy[i] <= 0;
    end
  end

  initial begin
    for (int i = 0; i < NPE; i++) remain[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int bt = 0; bt < 40; bt++) begin
      int n, started, ndone, cyc;
      n = (bt == 0) ? 0 : $urandom_range(40);
      @(negedge clk);
      start = 1; batch_size = 16'(n); pc = PC_W'($urandom);
      in_base = SHM_AW'($urandom); out_base = SHM_AW'($urandom);
      in_stride = SHM_AW'($urandom_range(16)); out_stride = SHM_AW'($urandom_range(16));
      @(negedge clk);
      start = 0;
      started = 0; ndone = 0; cyc = 0;
      while (ndone == 0 && cyc < 5000) begin
        int low, ns;
        #1;
        low = -1;
        for (int i = NPE - 1; i >= 0; i--) if (!core_busy[i]) low = i;
        ns = $countones(core_start);
        checks++;
        if (ns > 1) begin failures++; $display("FAIL two starts in a cycle"); end
        if (ns == 1) begin
          checks++;
          if (low < 0 || !core_start[low]) begin failures++; $display("FAIL start %b not lowest idle %0d", core_start, low); end
          checks++;
          if (core_pc != pc || core_in_base != SHM_AW'(int'(in_base) + started * int'(in_stride))
              || core_out_base != SHM_AW'(int'(out_base) + started * int'(out_stride))) begin
            failures++; $display("FAIL object %0d addresses %h %h", started, core_in_base, core_out_base);
          end
          started++;
        end
        if (ns == 0 && started < n && low < 0) n_full++;
        if (done) begin
          ndone++;
          checks++;
          if (started != n || core_busy != '0) begin failures++; $display("FAIL done early: started %0d of %0d busy %b", started, n, core_busy); end
        end
        @(negedge clk);
        cyc++;
      end
      checks++;
      if (ndone != 1) begin failures++; $display("FAIL batch %0d: no done", bt); end
      repeat ($urandom_range(3)) @(negedge clk);
    end
    checks++;
    if (n_full == 0) begin failures++; $display("FAIL never waited for a core"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
