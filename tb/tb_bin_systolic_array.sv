// tb_bin_systolic_array: drives an 8 x 8 x 16 AND-PopCount array with
// sequences of random slices (lengths 1..6, back to back after each done)
// and checks every accumulator against popcount(a & b) summed over the
// sequence, and the latency from the first slice to done (n + BM + BN - 2
// cycles for n slices).
module tb_bin_systolic_array;
  import fft_pkg::*;
  localparam int BM = 8, BN = 8, BK = 16;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic in_valid, in_first, in_last, done;
  logic [BM-1:0][BK-1:0] a; logic [BN-1:0][BK-1:0] b;
  logic [BM-1:0][BN-1:0][CW-1:0] acc;
  int checks = 0, failures = 0;
  bin_systolic_array #(.BM(BM), .BN(BN), .BK(BK), .AW(CW)) dut (.*);
  initial begin : main
    in_valid = 0; in_first = 0; in_last = 0; a = '0; b = '0;
    repeat (2) @(posedge clk); rst_n = 1; #1;
    for (int s = 0; s < 40; s++) begin
      automatic int n, cyc;
      automatic int e [BM][BN];
      n = $urandom_range(6, 1);
      for (int i = 0; i < BM; i++) for (int j = 0; j < BN; j++) e[i][j] = 0;
      for (int k = 0; k < n; k++) begin
        for (int i = 0; i < BM; i++) a[i] = 16'($urandom);
        for (int j = 0; j < BN; j++) b[j] = 16'($urandom);
        for (int i = 0; i < BM; i++) for (int j = 0; j < BN; j++) e[i][j] += $countones(a[i] & b[j]);
        in_valid = 1; in_first = (k == 0); in_last = (k == n - 1);
        @(posedge clk); #1;
      end
      in_valid = 0; in_first = 0; in_last = 0;
      cyc = n;
      while (!done) begin @(posedge clk); #1; cyc++; end
      checks++;
      if (cyc != n + BM + BN - 2) begin failures++; $display("latency %0d for %0d slices", cyc, n); end
      for (int i = 0; i < BM; i++) for (int j = 0; j < BN; j++) begin
        checks++;
        if (int'(acc[i][j]) != e[i][j]) begin failures++; $display("acc %0d %0d: %0d exp %0d", i, j, acc[i][j], e[i][j]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
