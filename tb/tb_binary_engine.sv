// tb_binary_engine: writes random K, Q and V of one head (20 tokens, 24
// channels, so partial tiles and slices occur) as channel-serial beats,
// lets the engine compute the attention and checks every result beat
// against A = (Q.K >= thr_s), O = (A.V >= thr_o) for each time step.  It
// also checks the compute time from the last V beat to the first result
// against the tile schedule: per time step and tile, ceil(R/BK) slice
// cycles + BM + BN cycles (R = D for Q.K, R = L for A.V).
module tb_binary_engine;
  import fft_pkg::*;
  localparam int NT = P_TS, NX = P_FX, L = 20, D = 24, TS = 4, TO = 3;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  attn_role_e role; logic [8:0] seq_len; logic [6:0] dim; logic [CW-1:0] thr_s, thr_o;
  logic in_valid, in_ready, out_valid, out_ready, busy; spk_beat_t in_beat, out_beat;
  int checks = 0, failures = 0;
  binary_engine dut (.*);
  bit m [3][NT][L][D];
  bit o [NT][L][D];
  int nout = 0;
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      for (int t = 0; t < NT; t++) for (int x = 0; x < NX; x++) begin
        automatic int l;
        l = int'(out_beat.pix) + x;
        checks++;
        if (out_beat.spk[t][x] != ((l < L) ? o[t][l][out_beat.ch] : 1'b0)) begin
          failures++; $display("O mismatch t %0d l %0d d %0d", t, l, out_beat.ch);
        end
      end
      nout++;
    end
    out_ready <= ($urandom_range(3) != 0);
  end
  initial begin : main
    automatic int t0, t1, exp_c, kk;
    in_valid = 0; in_beat = '0; role = ROLE_NONE; seq_len = L; dim = D; thr_s = TS; thr_o = TO; out_ready = 0;
    repeat (2) @(posedge clk); rst_n = 1; #1;
    for (int r = 0; r < 3; r++) for (int t = 0; t < NT; t++) for (int l = 0; l < L; l++) for (int d = 0; d < D; d++)
      m[r][t][l][d] = ($urandom_range(2) == 0);
    for (int t = 0; t < NT; t++) begin
      bit a [L][L];
      for (int l = 0; l < L; l++) for (int j = 0; j < L; j++) begin
        automatic int s; s = 0;
        for (int d = 0; d < D; d++) s += int'(m[1][t][l][d] & m[0][t][j][d]);
        a[l][j] = (s >= TS);
      end
      for (int l = 0; l < L; l++) for (int d = 0; d < D; d++) begin
        automatic int s; s = 0;
        for (int j = 0; j < L; j++) s += int'(a[l][j] & m[2][t][j][d]);
        o[t][l][d] = (s >= TO);
      end
    end
    for (int r = 0; r < 3; r++) begin
      role = attn_role_e'(r + 1);
      for (int p = 0; p < L; p += NX) for (int d = 0; d < D; d++) begin
        in_beat = '0; in_beat.ch = 7'(d); in_beat.pix = 16'(p);
        in_beat.last = (p + NX >= L) && (d == D - 1);
        for (int t = 0; t < NT; t++) for (int x = 0; x < NX; x++) in_beat.spk[t][x] = m[r][t][p+x][d];
        in_valid = 1;
        @(negedge clk); while (!in_ready) @(negedge clk);
        @(posedge clk); #1; in_valid = 0;
      end
    end
    t0 = $time;
    while (!out_valid) @(posedge clk);
    t1 = $time;
    kk = P_BM + P_BN;
    exp_c = NT * (((L + P_BM - 1) / P_BM) * ((L + P_BN - 1) / P_BN) * ((D + P_BK - 1) / P_BK + kk) +
                  ((L + P_BM - 1) / P_BM) * ((D + P_BN - 1) / P_BN) * ((L + P_BK - 1) / P_BK + kk));
    checks++;
    if ((t1 - t0) / 10 > exp_c + 2 || (t1 - t0) / 10 < exp_c - 2) begin
      failures++; $display("attention took %0d cycles, schedule %0d", (t1 - t0) / 10, exp_c);
    end
    $display("attention %0d cycles (schedule %0d)", (t1 - t0) / 10, exp_c);
    while (busy) @(posedge clk);
    checks++;
    if (nout != ((L + NX - 1) / NX) * D) begin failures++; $display("%0d result beats", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #2000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
