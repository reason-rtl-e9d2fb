// tb_shared_local_memory: random test of the banked shared local memory.
//
// Default size (4 banks, 64 Ki words of 64 bits). Every cycle each bank is
// randomly idle, read or written at a random row, rows drawn from a small
// window so reads hit written data; read data must appear one cycle later
// and equal a model. Reads of rows never written are not checked.
module tb_shared_local_memory;
  import reason_pkg::*;
  localparam int NBANK = SHM_BANKS, WORDS = 1 << SHM_AW, RW = $clog2(WORDS / NBANK);

  logic clk = 0;
  always #5 clk = ~clk;

  logic [NBANK-1:0] en = '0, we = '0;
  logic [NBANK-1:0][RW-1:0] row = '0;
  logic [NBANK-1:0][SHM_W-1:0] wdata = '0, rdata;

  shared_local_memory dut (.*);

  logic [SHM_W-1:0] model [NBANK][int];
  int checks = 0, failures = 0, n_rd = 0, n_wr = 0;

  initial begin
    logic [SHM_W-1:0] exp_d [NBANK];
    bit exp_v [NBANK];
    for (int t = 0; t < 20000; t++) begin
      @(negedge clk);
      for (int b = 0; b < NBANK; b++) begin
        int r;
        en[b] = ($urandom_range(3) != 0);
        we[b] = 1'($urandom_range(1));
        r = (t % 2 == 0) ? $urandom_range(63) : $urandom_range((1 << RW) - 1);
        row[b] = RW'(r);
        wdata[b] = {$urandom, $urandom};
        exp_v[b] = en[b] && !we[b] && model[b].exists(r);
        if (exp_v[b]) exp_d[b] = model[b][r];
        if (en[b] && we[b]) begin model[b][r] = wdata[b]; n_wr++; end
      end
      @(negedge clk);
      for (int b = 0; b < NBANK; b++) if (exp_v[b]) begin
        checks++; n_rd++;
        if (rdata[b] != exp_d[b]) begin failures++; $display("FAIL bank %0d read %h expected %h", b, rdata[b], exp_d[b]); end
      end
      en = '0;
    end
    checks++;
    if (n_rd == 0 || n_wr == 0) begin failures++; $display("FAIL no traffic"); end
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
