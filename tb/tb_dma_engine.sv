// tb_dma_engine: the core's DMA against a shared-memory model.
//
// The memory model grants randomly and returns read data one cycle after
// the grant, as the global interconnect does. The command side runs random
// LOADs (1..8 words into consecutive banks), STOREs and READs; at the same
// time a clause-fetch process requests random words, and sometimes aborts
// a fetch in the cycle its data returns. Checks: LOAD writes exactly the
// right words to banks bank..bank+count in order, STORE changes memory,
// READ returns the word with done, clause data is correct, an aborted
// fetch gives no response, and clause fetches win the port when both
// request (a command waiting behind a fetch must occur).
module tb_dma_engine;
  import reason_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid = 0;
  logic [1:0] cmd_kind = '0;
  logic [SHM_AW-1:0] cmd_addr = '0;
  logic [BANK_AW-1:0] cmd_bank = '0, cmd_count = '0;
  logic [SHM_W-1:0] cmd_wdata = '0;
  logic cmd_ready, done;
  logic [SHM_W-1:0] rd_data;
  logic bank_we;
  logic [BANK_AW-1:0] bank_sel;
  logic [DATA_W-1:0] bank_wdata;
  logic cf_req_valid = 0, cf_abort = 0;
  logic [SHM_AW-1:0] cf_req_addr = '0;
  logic cf_req_ready, cf_rsp_valid;
  logic [SHM_W-1:0] cf_rsp_data;
  logic mem_req_valid, mem_gnt, mem_rsp_valid;
  mem_req_t mem_req;
  logic [SHM_W-1:0] mem_rsp_data;

  dma_engine dut (.*);

  logic [SHM_W-1:0] mem [1024];
  logic gnt_r = 0, rsp_pend = 0;
  logic [9:0] rsp_addr;
  always @(negedge clk) gnt_r <= ($urandom_range(3) != 0);
  assign mem_gnt = mem_req_valid && gnt_r;
  assign mem_rsp_valid = rsp_pend;
  assign mem_rsp_data = mem[rsp_addr];
  int n_prio = 0;
  always @(posedge clk) begin
    rsp_pend <= mem_gnt && !mem_req.we;
    rsp_addr <= mem_req.addr[9:0];
    if (mem_gnt && mem_req.we) mem[mem_req.addr[9:0]] <= mem_req.wdata;
    if (cf_req_valid && dut.core_req) n_prio++;
  end

  int checks = 0, failures = 0, n_abort = 0, n_cf = 0;
  task automatic chk(input bit ok, input string m);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", m); end
  endtask

  // bank write log
  int bw_bank [$], bw_data [$];
  always @(posedge clk) if (bank_we) begin bw_bank.push_back(int'(bank_sel)); bw_data.push_back(int'(bank_wdata)); end

  // clause fetch process
  bit cmd_phase_done = 0;
  initial begin
    repeat (3) @(negedge clk);
    while (!cmd_phase_done) begin
      int a;
      bit ab;
      logic [SHM_W-1:0] e;
      a = $urandom_range(511);
      @(negedge clk);
      cf_req_valid = 1; cf_req_addr = SHM_AW'(a);
      #1;
      while (!cf_req_ready) begin @(negedge clk); #1; end
      e = mem[a];
      @(negedge clk);
      cf_req_valid = 0;
      ab = ($urandom_range(4) == 0);
      cf_abort = ab;
      #1;
      if (ab) begin chk(!cf_rsp_valid, "aborted fetch responded"); n_abort++; end
      else chk(cf_rsp_valid && cf_rsp_data == e, $sformatf("clause fetch %0d", a));
      n_cf++;
      @(negedge clk);
      cf_abort = 0;
      chk(!cf_rsp_valid, "late clause response");
      repeat ($urandom_range(4)) @(negedge clk);
    end
  end

  initial begin
    for (int i = 0; i < 1024; i++) mem[i] = {$urandom, $urandom};
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 600; t++) begin
      int k, a, b, c;
      logic [SHM_W-1:0] wd;
      logic [SHM_W-1:0] snap [8];
      k = $urandom_range(2); a = 512 + $urandom_range(500); b = $urandom_range(63); c = $urandom_range(7);
      wd = {$urandom, $urandom};
      for (int i = 0; i < 8; i++) snap[i] = mem[a + i];
      bw_bank.delete(); bw_data.delete();
      @(negedge clk);
      while (!cmd_ready) @(negedge clk);
      cmd_valid = 1; cmd_kind = 2'(k); cmd_addr = SHM_AW'(a); cmd_bank = BANK_AW'(b); cmd_count = BANK_AW'(c);
      cmd_wdata = wd;
      @(negedge clk);
      cmd_valid = 0;
      while (!done) @(negedge clk);
      @(negedge clk);
      if (k == 0) begin
        chk(bw_bank.size() == c + 1, $sformatf("load wrote %0d words, expected %0d", bw_bank.size(), c + 1));
        for (int i = 0; i < bw_bank.size() && i <= c; i++)
          chk(bw_bank[i] == (b + i) % 64 && bw_data[i] == int'(snap[i][DATA_W-1:0]), $sformatf("load word %0d", i));
      end else if (k == 1) begin
        chk(mem[a] == wd, "store");
      end else begin
        chk(rd_data == snap[0], "read");
      end
    end
    cmd_phase_done = 1;
    repeat (20) @(negedge clk);
    chk(n_abort > 0 && n_cf > 0 && n_prio > 0, "abort / clause priority not exercised");
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
