// tb_orchestrator: fills the input buffer with a random 6 x 4 map of two
// channel slices, runs a 3 x 3 window with padding 1 (and a 1 x 1 window
// without padding), and checks every beat - the NX pixels of each lane
// including zero padding, the weight address k, the first-pixel index,
// tlast and last - against a software loop nest.  With out_ready held high
// the run must take exactly one cycle per beat plus three cycles (start
// register, bank read, last handshake).
module tb_orchestrator;
  import fft_pkg::*;
  localparam int NT = P_TS, NX = P_FX, CI = P_CI;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic [7:0] fh, fw, ci_blk, wr_y, wr_x, wr_cb; logic [1:0] kh, kw, pad;
  logic wr_en, start, busy, out_valid, out_ready, out_tlast, out_last;
  logic [NT-1:0][CI-1:0] wr_data; logic [NT-1:0][NX-1:0][CI-1:0] out_spk;
  logic [8:0] out_k; logic [15:0] out_pix;
  int checks = 0, failures = 0;
  orchestrator dut (.*);
  logic [NT-1:0][CI-1:0] img [6][4][2];
  typedef struct { logic [NT-1:0][NX-1:0][CI-1:0] s; int k; int pix; bit tl, l; } e_t;
  e_t q [$];
  bit rnd_ready;
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      automatic e_t e;
      e = q.pop_front();
      checks++;
      if (out_spk != e.s || int'(out_k) != e.k || int'(out_pix) != e.pix || out_tlast != e.tl || out_last != e.l) begin
        failures++; $display("beat mismatch k %0d pix %0d", e.k, e.pix);
      end
    end
    out_ready <= rnd_ready ? ($urandom_range(2) != 0) : 1'b1;
  end
  task automatic go(input int k, input int p, output int cyc);
    automatic int oh, ow;
    kh = 2'(k); kw = 2'(k); pad = 2'(p);
    oh = 6 + 2*p - k + 1; ow = 4 + 2*p - k + 1;
    for (int oy = 0; oy < oh; oy++) for (int ox = 0; ox < ow; ox += NX)
      for (int ky = 0; ky < k; ky++) for (int kx = 0; kx < k; kx++) for (int cb = 0; cb < 2; cb++) begin
        automatic e_t e;
        for (int j = 0; j < NX; j++) begin
          automatic int iy, ix;
          iy = oy + ky - p; ix = ox + j + kx - p;
          for (int t = 0; t < NT; t++)
            e.s[t][j] = (iy >= 0 && iy < 6 && ix >= 0 && ix < 4) ? img[iy][ix][cb][t] : '0;
        end
        e.k = (ky*k + kx)*2 + cb; e.pix = oy*ow + ox;
        e.tl = (ky == k-1) && (kx == k-1) && (cb == 1);
        e.l = e.tl && (oy == oh-1) && (ox + NX >= ow);
        q.push_back(e);
      end
    cyc = q.size();
    start = 1; @(posedge clk); #1; start = 0;
    while (q.size() != 0) @(posedge clk);
    #1;
    checks++;
    if (busy) begin failures++; $display("busy after last beat"); end
  endtask
  initial begin : main
    automatic int nb, c0, c1;
    fh = 6; fw = 4; ci_blk = 2; kh = 3; kw = 3; pad = 1; wr_en = 0; wr_y = 0; wr_x = 0; wr_cb = 0; wr_data = '0;
    start = 0; out_ready = 0; rnd_ready = 1;
    repeat (2) @(posedge clk); rst_n = 1; #1;
    for (int y = 0; y < 6; y++) for (int x = 0; x < 4; x++) for (int cb = 0; cb < 2; cb++) begin
      for (int t = 0; t < NT; t++) img[y][x][cb][t] = 16'($urandom);
      wr_en = 1; wr_y = 8'(y); wr_x = 8'(x); wr_cb = 8'(cb); wr_data = img[y][x][cb];
      @(posedge clk); #1;
    end
    wr_en = 0;
    go(3, 1, nb);
    go(1, 0, nb);
    // rate: one beat per cycle with a ready sink
    rnd_ready = 0; @(posedge clk); @(posedge clk); #1;
    c0 = $time;
    go(3, 1, nb);
    c1 = $time;
    checks++;
    if ((c1 - c0) / 10 != nb + 3) begin failures++; $display("run of %0d beats took %0d cycles", nb, (c1 - c0) / 10); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
