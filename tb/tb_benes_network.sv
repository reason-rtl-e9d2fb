// tb_benes_network: checks the 64-port Benes network's routing.
//
// The network is combinational. With all switches straight it must be the
// identity. For random switch settings the outputs must equal a model of
// the in-place Benes structure (stage s exchanges the port pairs whose
// indices differ in bit b(s) = LN-1-s for the first LN stages, s-LN+1 after)
// and must be a permutation of the inputs (each distinct input appears
// exactly once). A clock only paces the test.
module tb_benes_network;
  localparam int N = 64;
  localparam int W = 16;
  localparam int LN = $clog2(N);
  localparam int NS = 2 * LN - 1;

  logic clk = 0;
  always #5 clk = ~clk;

  logic [N-1:0][W-1:0] in, out;
  logic [NS*(N/2)-1:0] ctrl;

  benes_network #(.N(N), .W(W)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    int v [N];
    int seen [N];
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      for (int i = 0; i < N; i++) in[i] = W'(i * 997 + t);   // distinct values
      for (int i = 0; i < NS * (N / 2); i++) ctrl[i] = (t == 0) ? 1'b0 : 1'($urandom_range(1));
      for (int i = 0; i < N; i++) v[i] = int'(in[i]);
      for (int s = 0; s < NS; s++) begin
        int b;
        b = (s < LN) ? LN - 1 - s : s - LN + 1;
        for (int j = 0; j < N / 2; j++) begin
          int i0, i1, x;
          i0 = ((j >> b) << (b + 1)) | (j & ((1 << b) - 1));
          i1 = i0 | (1 << b);
          if (ctrl[s * (N / 2) + j]) begin x = v[i0]; v[i0] = v[i1]; v[i1] = x; end
        end
      end
      #1;
      for (int i = 0; i < N; i++) seen[i] = 0;
      for (int i = 0; i < N; i++) begin
        checks++;
        if (int'(out[i]) != v[i]) begin
          failures++;
          $display("FAIL t %0d out %0d = %h expected %h", t, i, out[i], v[i]);
        end
        for (int k = 0; k < N; k++) if (out[i] == in[k]) seen[k]++;
      end
      for (int k = 0; k < N; k++) begin
        checks++;
        if (seen[k] != 1) begin failures++; $display("FAIL t %0d input %0d seen %0d times", t, k, seen[k]); end
      end
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
