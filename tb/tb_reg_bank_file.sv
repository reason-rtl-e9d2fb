// tb_reg_bank_file: random test of the B=64 x R=32 register banks.
//
// Every cycle random banks are written, read (with or without releasing the
// register) and, rarely, the whole file is cleared. A model of each bank
// (contents and used bits) predicts the write address (lowest free
// register), write overflow, bank_full and the read data one cycle later.
// Reads only target registers the model knows are in use. Writes are biased
// towards a few banks so that full banks and overflows occur; overflow,
// release and clear are counted and must all happen.
module tb_reg_bank_file;
  localparam int B = 64, R = 32, W = 16, AW = $clog2(R);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear = 0;
  logic [B-1:0] rd_en = '0, rd_release = '0, wr_en = '0;
  logic [B-1:0][AW-1:0] rd_addr = '0;
  logic [B-1:0][W-1:0] rd_data, wr_data = '0;
  logic [B-1:0][AW-1:0] wr_addr;
  logic [B-1:0] wr_overflow, bank_full;

  reg_bank_file #(.B(B), .R(R), .W(W)) dut (.*);

  int checks = 0, failures = 0, n_ovf = 0, n_rel = 0, n_clr = 0;
  int mem [B][R];
  bit used [B][R];

  initial begin
    int exp_rd [B];
    bit exp_rv [B];
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int b = 0; b < B; b++) for (int r = 0; r < R; r++) used[b][r] = 0;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      clear = ($urandom_range(500) == 0);
      for (int b = 0; b < B; b++) begin
        int hot, nu;
        hot = (b < 4) ? 3 : 12;
        wr_en[b] = ($urandom_range(hot) == 0) || (b < 4 && $urandom_range(1) == 0);
        wr_data[b] = W'($urandom);
        nu = 0;
        for (int r = 0; r < R; r++) nu += int'(used[b][r]);
        rd_en[b] = (nu > 0) && ($urandom_range(3) == 0);
        rd_release[b] = 1'($urandom_range(1));
        rd_addr[b] = '0;
        if (rd_en[b]) begin
          int k;
          k = $urandom_range(nu - 1);
          for (int r = 0; r < R; r++) if (used[b][r]) begin
            if (k == 0) rd_addr[b] = AW'(r);
            k--;
          end
        end
      end
      #1;
      for (int b = 0; b < B; b++) begin
        int lf;
        lf = -1;
        for (int r = R - 1; r >= 0; r--) if (!used[b][r]) lf = r;
        checks++;
        if (bank_full[b] != (lf < 0) || wr_overflow[b] != (wr_en[b] && lf < 0) || (lf >= 0 && int'(wr_addr[b]) != lf)) begin
          failures++;
          $display("FAIL t %0d bank %0d: full %0d ovf %0d addr %0d expected free %0d", t, b, bank_full[b], wr_overflow[b], wr_addr[b], lf);
        end
        n_ovf += int'(wr_en[b] && lf < 0);
        exp_rv[b] = rd_en[b];
        if (rd_en[b]) exp_rd[b] = mem[b][rd_addr[b]];
        if (!clear) begin
          if (rd_en[b] && rd_release[b]) begin used[b][rd_addr[b]] = 0; n_rel++; end
          if (wr_en[b] && lf >= 0) begin used[b][lf] = 1; mem[b][lf] = int'(wr_data[b]); end
        end else begin
          for (int r = 0; r < R; r++) used[b][r] = 0;
          if (wr_en[b] && lf >= 0) mem[b][lf] = int'(wr_data[b]);
        end
      end
      n_clr += int'(clear);
      @(negedge clk);
      for (int b = 0; b < B; b++) if (exp_rv[b]) begin
        checks++;
        if (int'(rd_data[b]) != exp_rd[b]) begin
          failures++;
          $display("FAIL t %0d bank %0d read %h expected %h", t, b, rd_data[b], exp_rd[b]);
        end
      end
      clear = 0; rd_en = '0; wr_en = '0;
    end
    checks++;
    if (n_ovf == 0 || n_rel == 0 || n_clr == 0) begin failures++; $display("FAIL not exercised: ovf %0d rel %0d clr %0d", n_ovf, n_rel, n_clr); end
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
