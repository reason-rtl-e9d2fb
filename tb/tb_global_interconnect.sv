// tb_global_interconnect: random multi-requester test of the interconnect.
//
// NUM_PE+2 requesters issue random reads and writes (addresses from a small
// window so banks collide) and hold each request until granted. The
// testbench models the banked memory behind the interconnect (registered
// read data) and a flat reference memory updated in grant order. Checks:
// at most one grant per bank per cycle, a granted request's bank really was
// requested, read data arrives exactly one cycle after the grant and equals
// the reference, and no requester waits longer than NREQ cycles (round
// robin). Bank conflicts (a requester waiting) must occur.
module tb_global_interconnect;
  import reason_pkg::*;
  localparam int NREQ = NUM_PE + 2, NBANK = SHM_BANKS, WORDS = 1 << SHM_AW;
  localparam int RW = $clog2(WORDS / NBANK), BW = $clog2(NBANK);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NREQ-1:0] req_valid = '0, gnt, rsp_valid;
  mem_req_t [NREQ-1:0] req = '0;
  logic [NREQ-1:0][SHM_W-1:0] rsp_data;
  logic [NBANK-1:0] m_en, m_we;
  logic [NBANK-1:0][RW-1:0] m_row;
  logic [NBANK-1:0][SHM_W-1:0] m_wdata, m_rdata;

  global_interconnect dut (.*);

  // banked memory model
  logic [SHM_W-1:0] bankm [NBANK][int];
  always @(posedge clk) for (int b = 0; b < NBANK; b++) if (m_en[b]) begin
    if (m_we[b]) bankm[b][int'(m_row[b])] = m_wdata[b];
    else m_rdata[b] <= bankm[b].exists(int'(m_row[b])) ? bankm[b][int'(m_row[b])] : '0;
  end

  logic [SHM_W-1:0] ref_mem [int];
  int checks = 0, failures = 0, n_wait = 0, n_rd = 0;

  initial begin
    int waitc [NREQ];
    bit exp_v [NREQ];
    logic [SHM_W-1:0] exp_d [NREQ];
    for (int i = 0; i < NREQ; i++) waitc[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 20000; t++) begin
      int gb [NBANK];
      // new requests
      for (int i = 0; i < NREQ; i++) if (!req_valid[i] && $urandom_range(2) == 0) begin
        int a;
        a = $urandom_range(31);
        req_valid[i] = 1;
        req[i].we = 1'($urandom_range(1));
        req[i].addr = SHM_AW'(a);
        req[i].wdata = {$urandom, $urandom};
        waitc[i] = 0;
      end
      #1;
      for (int b = 0; b < NBANK; b++) gb[b] = 0;
      for (int i = 0; i < NREQ; i++) begin
        exp_v[i] = 0;
        if (gnt[i]) begin
          int a;
          checks++;
          if (!req_valid[i]) begin failures++; $display("FAIL grant without request %0d", i); end
          a = int'(req[i].addr);
          gb[a % NBANK]++;
          if (req[i].we) ref_mem[a] = req[i].wdata;
          else begin
            exp_v[i] = 1;
            exp_d[i] = ref_mem.exists(a) ? ref_mem[a] : '0;
          end
        end else if (req_valid[i]) begin
          n_wait++;
          waitc[i]++;
          checks++;
          if (waitc[i] > NREQ) begin failures++; $display("FAIL requester %0d starved", i); end
        end
      end
      for (int b = 0; b < NBANK; b++) begin
        checks++;
        if (gb[b] > 1) begin failures++; $display("FAIL bank %0d granted %0d times", b, gb[b]); end
      end
      @(negedge clk);
      for (int i = 0; i < NREQ; i++) begin
        if (gnt_q(i)) req_valid[i] = 0;
        checks++;
        if (rsp_valid[i] != exp_v[i] || (exp_v[i] && rsp_data[i] != exp_d[i])) begin
          failures++;
          $display("FAIL t %0d requester %0d: rsp %0d %h expected %0d %h", t, i, rsp_valid[i], rsp_data[i], exp_v[i], exp_d[i]);
        end
        n_rd += int'(exp_v[i]);
      end
    end
    checks++;
    if (n_wait == 0 || n_rd == 0) begin failures++; $display("FAIL no contention or no reads"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // grant seen in the cycle just finished
  logic [NREQ-1:0] gnt_last;
  always @(posedge clk) gnt_last <= gnt;
  function automatic bit gnt_q(input int i);
    return gnt_last[i];
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
