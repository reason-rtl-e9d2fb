// tb_global_controller: the execute / status / flag protocol.
//
// A memory model (random grant delays, read data one cycle after the grant)
// and a scheduler model (done a random time after start) surround the
// controller. For random batches the test checks: the controller keeps
// polling the neural buffer word while it is zero and the scheduler does not
// start; after the testbench sets the flag it clears the word, starts the
// scheduler once with the configured mode pc, batch size, buffers+1 and
// strides; after the scheduler's done it writes {1, batch_id} to the
// symbolic buffer word, pulses done once and returns to IDLE (status_busy
// low, exec_ready high). Polling of an unset flag must occur.
module tb_global_controller;
  import reason_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_we = 0;
  logic [2:0] cfg_addr = '0;
  logic [15:0] cfg_wdata = '0;
  logic exec_valid = 0, exec_ready;
  logic [15:0] exec_batch_id = '0, exec_batch_size = '0;
  logic [SHM_AW-1:0] exec_neural_buf = '0, exec_symbolic_buf = '0;
  logic [1:0] exec_mode = '0;
  logic status_busy, done;
  logic [15:0] status_batch_id;
  logic mem_req_valid, mem_gnt, mem_rsp_valid;
  mem_req_t mem_req;
  logic [SHM_W-1:0] mem_rsp_data;
  logic sch_start, sch_done;
  logic [15:0] sch_batch_size;
  logic [PC_W-1:0] sch_pc;
  logic [SHM_AW-1:0] sch_in_base, sch_out_base, sch_in_stride, sch_out_stride;

  global_controller dut (.*);

  // memory model
  logic [SHM_W-1:0] mem [int];
  logic gnt_r = 0, rsp_pend = 0;
  logic [SHM_AW-1:0] rsp_addr;
  always @(negedge clk) gnt_r <= ($urandom_range(2) != 0);
  assign mem_gnt = mem_req_valid && gnt_r;
  assign mem_rsp_valid = rsp_pend;
  assign mem_rsp_data = mem.exists(int'(rsp_addr)) ? mem[int'(rsp_addr)] : '0;
  int n_poll = 0;
  always @(posedge clk) begin
    rsp_pend <= mem_gnt && !mem_req.we;
    rsp_addr <= mem_req.addr;
    if (mem_gnt && mem_req.we) mem[int'(mem_req.addr)] = mem_req.wdata;
    if (mem_gnt && !mem_req.we) n_poll++;
  end

  // scheduler model
  int sch_cnt = -1, n_sch_start = 0;
  assign sch_done = (sch_cnt == 0);
  always @(posedge clk) begin
    if (sch_start) begin sch_cnt <= 1 + $urandom_range(30); n_sch_start++; end
    else if (sch_cnt >= 0) sch_cnt <= sch_cnt - 1;
  end

  int checks = 0, failures = 0, n_done = 0;
  always @(posedge clk) n_done += int'(done);

  task automatic chk(input bit ok, input string m);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", m); end
  endtask

  initial begin
    int pcs [4], ins, outs;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int m = 0; m < 4; m++) begin
      pcs[m] = $urandom_range(255);
      @(negedge clk); cfg_we = 1; cfg_addr = 3'(m); cfg_wdata = 16'(pcs[m]);
    end
    ins = $urandom_range(9); outs = $urandom_range(9);
    @(negedge clk); cfg_addr = 4; cfg_wdata = 16'(ins);
    @(negedge clk); cfg_addr = 5; cfg_wdata = 16'(outs);
    @(negedge clk); cfg_we = 0;
    for (int bt = 0; bt < 30; bt++) begin
      int nb, sb, md, id, sz, st0, pollw;
      nb = 16 * bt + 1000; sb = 16 * bt + 3000; md = $urandom_range(3); id = $urandom_range(65535);
      sz = $urandom_range(100);
      mem[nb] = '0;
      mem[sb] = '0;
      st0 = n_sch_start;
      chk(exec_ready && !status_busy, "idle before execute");
      @(negedge clk);
      exec_valid = 1; exec_batch_id = 16'(id); exec_batch_size = 16'(sz);
      exec_neural_buf = SHM_AW'(nb); exec_symbolic_buf = SHM_AW'(sb); exec_mode = 2'(md);
      @(negedge clk);
      exec_valid = 0;
      pollw = n_poll;
      repeat ($urandom_range(40)) begin
        @(negedge clk);
        chk(status_busy && status_batch_id == 16'(id) && n_sch_start == st0, "waiting for neural_ready");
      end
      mem[nb] = 64'd1;
      while (n_sch_start == st0) @(negedge clk);
      chk(mem[nb] == '0, "neural_ready cleared");
      chk(sch_batch_size == 16'(sz) && int'(sch_pc) == pcs[md] && int'(sch_in_base) == nb + 1
          && int'(sch_out_base) == sb + 1 && int'(sch_in_stride) == ins && int'(sch_out_stride) == outs,
          "scheduler start values");
      while (status_busy) @(negedge clk);
      @(negedge clk);
      chk(n_done == bt + 1 && n_sch_start == st0 + 1, "one done and one scheduler start per batch");
      chk(mem[sb] == {31'd0, 1'b1, 16'd0, 16'(id)}, $sformatf("symbolic_ready word %h", mem[sb]));
    end
    chk(n_poll > 60, "polling of an unset flag");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
