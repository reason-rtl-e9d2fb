// tb_bcp_fifo: random test of the multi-push BCP FIFO (W=9, M=8, DEPTH=16).
//
// Every cycle a random subset of the 8 lanes pushes (never more than the
// free room, counting a same-cycle pop), pop is random and flush is rare.
// A queue model predicts head, empty, count and free_slots; pushes enter
// lowest lane first. Multi-lane pushes, push+pop in one cycle, a full FIFO
// and flushes are counted and must all happen.
module tb_bcp_fifo;
  localparam int W = 9, M = 8, DEPTH = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic flush = 0, pop = 0;
  logic [M-1:0] push_mask = '0;
  logic [M-1:0][W-1:0] push_data = '0;
  logic [W-1:0] head;
  logic empty;
  logic [$clog2(DEPTH):0] count, free_slots;

  bcp_fifo #(.W(W), .M(M), .DEPTH(DEPTH)) dut (.*);

  int q [$];
  int checks = 0, failures = 0, n_multi = 0, n_pp = 0, n_full = 0, n_flush = 0;

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 20000; t++) begin
      int room, np;
      @(negedge clk);
      // check state
      checks++;
      if (int'(count) != q.size() || empty != (q.size() == 0) || int'(free_slots) != DEPTH - q.size()
          || (q.size() > 0 && int'(head) != q[0])) begin
        failures++;
        $display("FAIL t %0d: count %0d empty %0d free %0d head %h; model size %0d head %h", t, count, empty, free_slots, head, q.size(), (q.size() > 0) ? q[0] : 0);
      end
      if (q.size() == DEPTH) n_full++;
      flush = ($urandom_range(300) == 0);
      pop = ($urandom_range(2) == 0);
      room = DEPTH - q.size() + ((pop && q.size() > 0) ? 1 : 0);
      push_mask = '0;
      np = 0;
      for (int i = 0; i < M; i++) begin
        push_data[i] = W'($urandom);
        if ($urandom_range(3) == 0 && np < room) begin push_mask[i] = 1; np++; end
      end
      if (np > 1) n_multi++;
      if (np > 0 && pop && q.size() > 0) n_pp++;
      // model update
      if (flush) begin
        q.delete();
        n_flush++;
      end else begin
        if (pop && q.size() > 0) void'(q.pop_front());
        for (int i = 0; i < M; i++) if (push_mask[i]) q.push_back(int'(push_data[i]));
      end
    end
    checks++;
    if (n_multi == 0 || n_pp == 0 || n_full == 0 || n_flush == 0) begin
      failures++;
      $display("FAIL not exercised: multi %0d push+pop %0d full %0d flush %0d", n_multi, n_pp, n_full, n_flush);
    end
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
