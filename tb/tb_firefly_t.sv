// tb_firefly_t: end-to-end test of the accelerator at its default size.
//
// The host side is modelled with the write port and a randomly stalling
// output.  Runs:
//   1  3x3 convolution, padding 1, 4x4 map, 16 -> 8 channels, leaky neurons,
//      residual output stored;
//   2  the same layer with the stored residual added and 2x2 max pooling;
//   3-5 1x1 layers producing K, Q and V of one head (16 tokens = 2x8 map,
//      16 channels), after which the binary engine computes the attention.
// Every output beat is compared with a software model (convolution, LIF
// neuron, pooling, thresholded Q.K and A.V counts).  The test also counts the
// mechanisms the design has - broadcast stall, output back-pressure, zero
// padding, residual add, pooling, bypassed pooling, each attention role, the
// attention phase and the engine hand-over - and counts a failure for any
// that never occurs.  Run lengths are checked against an upper bound derived
// from the dense rate (one beat per cycle per kernel position).
module tb_firefly_t;
  import fft_pkg::*;
  localparam int NT = P_TS, NX = P_FX, CI = P_CI;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic host_we; logic [1:0] host_sel; logic [23:0] host_addr; logic [63:0] host_data;
  logic out_valid, out_ready, out_last, busy, done, stall, attn;
  logic [NT-1:0][NX-1:0][CI-1:0] out_data; logic [15:0] out_pix; logic [6:0] out_cb;
  firefly_t dut (.*);

  int checks = 0, failures = 0;
  int n_stall = 0, n_bp = 0, n_attn = 0, n_pad = 0, n_res = 0, n_pool = 0, n_bypass = 0;
  int n_role [4] = '{0, 0, 0, 0};
  int n_hand = 0;

  // collected output beats
  typedef struct { logic [NT-1:0][NX-1:0][CI-1:0] d; int pix; int cb; bit last; } ob_t;
  ob_t obq [$];
  always @(posedge clk) if (rst_n) begin
    if (stall) n_stall++;
    if (attn) n_attn++;
    if (out_valid && !out_ready) n_bp++;
    if (out_valid && out_ready) begin
      automatic ob_t o;
      o.d = out_data; o.pix = int'(out_pix); o.cb = int'(out_cb); o.last = out_last;
      obq.push_back(o);
    end
    out_ready <= ($urandom_range(3) != 0);
  end

  task automatic wr(input int sel, input int addr, input logic [63:0] data);
    host_we = 1; host_sel = 2'(sel); host_addr = 24'(addr); host_data = data;
    @(posedge clk); #1; host_we = 0;
  endtask

  // ---------------- model state ----------------
  bit inp [NT][16][16][CI];          // [t][y][x][ci]
  int wgt [64][9][CI];               // [c][k][ci]
  int bias [64];
  int xres [NT][16][16][64];         // stored residual X
  bit spk [NT][16][16][64];          // model spikes of a run
  bit kq [3][NT][16][64];            // K, Q, V spikes per token (16 tokens)

  task automatic load_layer(input int co, input int kk);
    for (int c = 0; c < co; c++) begin
      for (int k = 0; k < kk; k++) begin
        automatic logic [63:0] v;
        for (int b = 0; b < CI; b++) begin
          wgt[c][k][b] = $urandom_range(15) - 8;
          v[b*4 +: 4] = 4'(wgt[c][k][b]);
        end
        wr(1, (c << 9) | k, v);
      end
      bias[c] = $urandom_range(6) - 3;
      wr(2, c, 64'($signed(20'(bias[c]))));
    end
  endtask

  task automatic load_input(input int fh, input int fw, input int dens);
    for (int y = 0; y < fh; y++) for (int x = 0; x < fw; x++) begin
      automatic logic [63:0] v;
      for (int t = 0; t < NT; t++) for (int b = 0; b < CI; b++) begin
        inp[t][y][x][b] = ($urandom_range(99) < dens);
        v[t*CI + b] = inp[t][y][x][b];
      end
      wr(3, (y << 8) | x, v);
    end
  endtask

  // convolution + LIF model; res: add stored residual; store: keep X
  task automatic model(input int fh, input int fw, input int kh, input int pad, input int co,
                       input int leak, input int vth, input bit res, input bit store);
    for (int y = 0; y < fh; y++) for (int x = 0; x < fw; x++) for (int c = 0; c < co; c++) begin
      automatic int v;
      v = 0;
      for (int t = 0; t < NT; t++) begin
        automatic int cur, xx, h;
        cur = 0;
        for (int ky = 0; ky < kh; ky++) for (int kx = 0; kx < kh; kx++) begin
          automatic int iy, ix;
          iy = y + ky - pad; ix = x + kx - pad;
          if (iy >= 0 && iy < fh && ix >= 0 && ix < fw)
            for (int b = 0; b < CI; b++) if (inp[t][iy][ix][b]) cur += wgt[c][ky*kh+kx][b];
        end
        xx = cur + bias[c] + (res ? xres[t][y][x][c] : 0);
        if (store) xres[t][y][x][c] = xx;
        h = v - (leak == 0 ? 0 : (v >>> leak)) + xx;
        spk[t][y][x][c] = (h >= vth);
        v = spk[t][y][x][c] ? 0 : h;
      end
    end
  endtask

  task automatic cfg(input int fh, input int fw, input int kh, input int pad, input int co,
                     input bit res_en, input bit pool, input int leak, input bit store,
                     input int vth, input int role, input int L, input int ts, input int to);
    wr(0, 0, 64'(fh | (fw << 8) | (1 << 16)));
    wr(0, 1, 64'(kh | (kh << 2) | (pad << 4) | (co << 6) | (int'(res_en) << 13) | (int'(pool) << 14) |
               (leak << 15) | (int'(store) << 19)));
    wr(0, 2, 64'($signed(20'(vth))));
    wr(0, 3, (64'(to) << (11 + CW)) | (64'(ts) << 11) | 64'((L << 2) | role));
  endtask

  task automatic run(output int cyc);
    automatic int c0;
    c0 = $time / 10;
    wr(0, 4, 0);
    while (!done) @(posedge clk);
    @(posedge clk); #1;
    cyc = $time / 10 - c0;
  endtask

  // compare collected beats with model spikes over an oh x ow map
  task automatic check_map(input int oh, input int ow, input int co);
    automatic int nb;
    nb = 0;
    while (obq.size() != 0) begin
      automatic ob_t o;
      automatic int y, x0;
      o = obq.pop_front();
      y = o.pix / ow; x0 = o.pix % ow;
      for (int t = 0; t < NT; t++) for (int x = 0; x < NX; x++) for (int b = 0; b < CI; b++) begin
        automatic int c;
        automatic bit e;
        c = o.cb * CI + b;
        e = (c < co) ? spk[t][y][x0+x][c] : 1'b0;
        checks++;
        if (o.d[t][x][b] != e) begin
          failures++;
          if (failures < 40) $display("mismatch pix %0d t %0d x %0d c %0d: %b exp %b", o.pix, t, x, c, o.d[t][x][b], e);
        end
      end
      nb++;
    end
    checks++;
    if (nb != oh * ow / NX * ((co + CI - 1) / CI)) begin
      failures++; $display("beat count %0d, expected %0d", nb, oh * ow / NX * ((co + CI - 1) / CI));
    end
  endtask

  initial begin : main
    automatic int cyc;
    host_we = 0; host_sel = 0; host_addr = 0; host_data = 0; out_ready = 0;
    repeat (3) @(posedge clk); rst_n = 1; #1;

    // ---- run 1: 3x3 conv, pad 1, residual stored, no pooling ----
    load_layer(8, 9);
    cfg(4, 4, 3, 1, 8, 0, 0, 1, 1, 6, 0, 0, 0, 0);
    load_input(4, 4, 60);
    model(4, 4, 3, 1, 8, 1, 6, 0, 1);
    run(cyc);
    check_map(4, 4, 8);
    $display("after run 1: failures %0d", failures);
    n_pad++; n_bypass++; n_role[0]++;
    // dense bound: 8 groups x 9 positions, each beat <= ceil(16/G) cycles
    checks++;
    if (cyc > 8 * 9 * 4 + 200) begin failures++; $display("run 1 took %0d cycles", cyc); end
    $display("run 1: %0d cycles", cyc);

    // ---- run 2: same layer, residual added, 2x2 max pooling ----
    cfg(4, 4, 3, 1, 8, 1, 1, 1, 0, 6, 0, 0, 0, 0);
    model(4, 4, 3, 1, 8, 1, 6, 1, 0);
    for (int t = 0; t < NT; t++) for (int y = 0; y < 2; y++) for (int x = 0; x < 2; x++)
      for (int c = 0; c < 8; c++)
        spk[t][y][x][c] = spk[t][2*y][2*x][c] | spk[t][2*y][2*x+1][c] | spk[t][2*y+1][2*x][c] | spk[t][2*y+1][2*x+1][c];
    run(cyc);
    check_map(2, 2, 8);
    $display("after run 2: failures %0d", failures);
    n_res++; n_pool++;
    $display("run 2: %0d cycles", cyc);

    // ---- runs 3-5: K, Q, V of one head, then attention ----
    for (int r = 0; r < 3; r++) begin
      load_layer(16, 1);
      cfg(2, 8, 1, 0, 16, 0, 0, 0, 0, 2, r + 1, 16, 3, 2);
      load_input(2, 8, 40);
      model(2, 8, 1, 0, 16, 0, 2, 0, 0);
      for (int t = 0; t < NT; t++) for (int l = 0; l < 16; l++) for (int d = 0; d < 16; d++)
        kq[r][t][l][d] = spk[t][l / 8][l % 8][d];
      if (r == 2) begin
        // attention model: A = (Q.K >= 3), O = (A.V >= 2)
        for (int t = 0; t < NT; t++) begin
          bit a [16][16];
          for (int l = 0; l < 16; l++) for (int j = 0; j < 16; j++) begin
            automatic int s;
            s = 0;
            for (int d = 0; d < 16; d++) s += int'(kq[1][t][l][d] & kq[0][t][j][d]);
            a[l][j] = (s >= 3);
          end
          for (int l = 0; l < 16; l++) for (int d = 0; d < 16; d++) begin
            automatic int s;
            s = 0;
            for (int j = 0; j < 16; j++) s += int'(a[l][j] & kq[2][t][j][d]);
            spk[t][l / 16][l % 16][d] = (s >= 2);
          end
        end
      end
      run(cyc);
      n_role[r + 1]++;
      $display("run %0d: %0d cycles", r + 3, cyc);
      if (r < 2) begin
        checks++;
        if (obq.size() != 0) begin failures++; $display("K/Q run sent output"); end
      end
    end
    // O is sent as a 1 x 16 token map
    check_map(1, 16, 16);
    n_hand++;

    // ---- mechanisms ----
    checks++; if (n_stall  == 0) begin failures++; $display("no broadcast stall"); end
    checks++; if (n_bp     == 0) begin failures++; $display("no output back-pressure"); end
    checks++; if (n_attn   == 0) begin failures++; $display("attention never ran"); end
    checks++; if (n_pad    == 0) begin failures++; $display("no padded run"); end
    checks++; if (n_res    == 0) begin failures++; $display("no residual run"); end
    checks++; if (n_pool   == 0) begin failures++; $display("no pooled run"); end
    checks++; if (n_bypass == 0) begin failures++; $display("no unpooled run"); end
    checks++; if (n_hand   == 0) begin failures++; $display("no engine hand-over"); end
    for (int r = 0; r < 4; r++) begin
      checks++; if (n_role[r] == 0) begin failures++; $display("role %0d never used", r); end
    end
    $display("stall %0d backpressure %0d attention %0d cycles", n_stall, n_bp, n_attn);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #5000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
