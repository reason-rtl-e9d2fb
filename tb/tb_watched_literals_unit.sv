// tb_watched_literals_unit: watch-list walks against a software list model.
//
// Random clause records are linked into per-literal watch lists (clause i
// at pointer i if i < LOCAL, else at pointer LOCAL+i, held only in a
// modelled scratchpad reached through the DMA port with random ready and
// 1..3-cycle response delay). For random literals the walk's output
// sequence (pointer and record, consumed with random ready) must equal the
// list built here, miss must pulse once per remote record, and busy must
// fall after the last one. Some walks are aborted midway; the next walk
// must still be correct. Back-to-back local records (one per cycle),
// misses and aborts must all occur.
module tb_watched_literals_unit;
  import reason_pkg::*;
  localparam int LOCAL = 64, NC = 120, NV = 10;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_we = 0, cfg_sel_clause = 0;
  logic [CPTR_W-1:0] cfg_addr = '0;
  logic [SHM_W-1:0] cfg_wdata = '0;
  logic [SHM_AW-1:0] clause_base = 16'h2000;
  logic start = 0, abort = 0;
  lit_t lit = '0;
  logic busy, miss, out_valid, out_ready = 0;
  clause_t out_clause;
  logic [CPTR_W-1:0] out_ptr;
  logic dma_req_valid, dma_req_ready, dma_rsp_valid;
  logic [SHM_AW-1:0] dma_req_addr;
  logic [SHM_W-1:0] dma_rsp_data;

  watched_literals_unit #(.LOCAL(LOCAL)) dut (.*);

  // scratchpad model
  logic [SHM_W-1:0] remote [int];
  logic rdy_r = 0;
  int dly = -1;
  logic [SHM_AW-1:0] pend_addr;
  always @(negedge clk) rdy_r <= ($urandom_range(2) != 0);
  assign dma_req_ready = dma_req_valid && rdy_r && (dly < 0);
  assign dma_rsp_valid = (dly == 0);
  assign dma_rsp_data = remote.exists(int'(pend_addr)) ? remote[int'(pend_addr)] : '0;
  always @(posedge clk) begin
    if (abort) dly <= -1;             // the DMA engine drops an aborted fetch
    else if (dma_req_ready) begin dly <= $urandom_range(2); pend_addr <= dma_req_addr; end
    else if (dly >= 0) dly <= dly - 1;
  end

  int checks = 0, failures = 0, n_miss = 0, n_b2b = 0, n_abort = 0;
  logic ov_last = 0;
  always @(posedge clk) begin
    n_miss += int'(miss);
    if (out_valid && out_ready && ov_last) n_b2b++;
    ov_last <= out_valid && out_ready;
  end

  task automatic chk(input bit ok, input string m);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", m); end
  endtask

  int head [NUM_LITS];
  clause_t recs [int];

  task automatic cfg(input logic sel, input int a, input logic [SHM_W-1:0] d);
    @(negedge clk);
    cfg_we = 1; cfg_sel_clause = sel; cfg_addr = CPTR_W'(a); cfg_wdata = d;
    @(negedge clk);
    cfg_we = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int l = 0; l < NUM_LITS; l++) head[l] = int'(CPTR_NULL);
    for (int i = 0; i < NC; i++) begin
      clause_t c;
      int p, la, lb;
      la = 2 * (1 + $urandom_range(NV - 2)) + int'($urandom_range(1));
      do lb = 2 * (1 + $urandom_range(NV - 2)) + int'($urandom_range(1)); while (lb / 2 == la / 2);
      p = (i < LOCAL) ? i : LOCAL + i;
      c = '0;
      c.lits[0] = lit_t'(la); c.lits[1] = lit_t'(lb);
      c.lits[2] = lit_t'($urandom_range(NUM_LITS - 1));
      c.next0 = CPTR_W'(head[la]); c.next1 = CPTR_W'(head[lb]);
      head[la] = p; head[lb] = p;
      recs[p] = c;
      if (p < LOCAL) cfg(1, p, SHM_W'(c));
      else remote[int'(clause_base) + p] = SHM_W'(c);
    end
    for (int l = 0; l < 2 * NV + 2; l++) cfg(0, l, SHM_W'(head[l]));

    for (int t = 0; t < 300; t++) begin
      int L, p, k, m0, nrem, abort_at;
      int exp_p [$];
      exp_p.delete();
      L = 2 * (1 + $urandom_range(NV - 2)) + int'($urandom_range(1));
      p = head[L];
      nrem = 0;
      while (p != int'(CPTR_NULL)) begin
        exp_p.push_back(p);
        if (p >= LOCAL) nrem++;
        p = (int'(recs[p].lits[0]) == L) ? int'(recs[p].next0) : int'(recs[p].next1);
      end
      abort_at = ($urandom_range(5) == 0 && exp_p.size() > 1) ? $urandom_range(exp_p.size() - 1) : -1;
      m0 = n_miss;
      @(negedge clk);
      start = 1; lit = lit_t'(L);
      @(negedge clk);
      start = 0;
      k = 0;
      while (busy && k < exp_p.size()) begin
        if (k == abort_at) begin
          abort = 1;
          @(negedge clk);
          abort = 0;
          n_abort++;
          break;
        end
        out_ready = ($urandom_range(3) != 0) || (t % 2 == 1);
        #1;
        if (out_valid && out_ready) begin
          chk(int'(out_ptr) == exp_p[k] && out_clause == recs[exp_p[k]], $sformatf("walk %0d lit %0d item %0d ptr %0d expected %0d", t, L, k, out_ptr, exp_p[k]));
          k++;
        end
        @(negedge clk);
      end
      out_ready = 0;
      repeat (3) @(negedge clk);
      chk(!busy, "busy after the list end");
      if (abort_at < 0) begin
        chk(k == exp_p.size(), $sformatf("walk %0d: %0d records, expected %0d", t, k, exp_p.size()));
        chk(n_miss - m0 == nrem, $sformatf("walk %0d: %0d misses, expected %0d", t, n_miss - m0, nrem));
      end
    end
    chk(n_miss > 0 && n_b2b > 0 && n_abort > 0, $sformatf("not exercised: miss %0d back-to-back %0d abort %0d", n_miss, n_b2b, n_abort));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
