// tb_sparse_engine: loads random weights and biases into a reduced sparse
// engine (2 time steps x 2 pixels, 16 input channels, 4 output channels),
// streams tiles of random spikes (k = 0..KL-1 per tile) and checks every
// output spike and residual value against a software model: dot product of
// spikes and weights per grid point and channel, plus bias and residual, then
// the LIF neuron along the time steps.  Dense tiles make the broadcast wait,
// which the test requires to happen.
module tb_sparse_engine;
  import fft_pkg::*;
  localparam int NT = 2, NX = 2, CI = 16, CO = 4, WD = 64, KL = 9, NTILE = 24;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic [6:0] co; logic res_en, pool_en; logic [3:0] leak_sh; logic signed [VW-1:0] vth; logic [7:0] ow;
  logic w_we, w_sel; logic [1:0] w_ch; logic [5:0] w_addr; logic [CI*WB-1:0] w_data;
  logic in_valid, in_ready, in_tlast, in_last; logic [NT-1:0][NX-1:0][CI-1:0] in_spk;
  logic [5:0] in_k; logic [15:0] in_pix;
  logic res_in_valid, res_in_ready, res_out_valid, res_out_ready;
  logic [NT-1:0][NX-1:0][VW-1:0] res_in, res_out;
  logic out_valid, out_ready, stall; spk_beat_t out_beat;
  int checks = 0, failures = 0, stalls = 0;
  sparse_engine #(.NT(NT), .NX(NX), .CI(CI), .CO(CO), .WO(2), .ML(2), .WD(WD), .RB_D(64)) dut (.*);

  logic [CI*WB-1:0] wm [CO][WD];
  int bias_m [CO];
  typedef struct { logic [NT-1:0][NX-1:0] s; logic [NT-1:0][NX-1:0][VW-1:0] x; int ch; int pix; } exp_t;
  exp_t q [$], qx [$];

  always @(posedge clk) if (rst_n) begin
    if (stall) stalls++;
    if (out_valid && out_ready) begin
      automatic exp_t e;
      e = q.pop_front();
      checks++;
      if (out_beat.spk != e.s || int'(out_beat.ch) != e.ch || int'(out_beat.pix) != e.pix) begin
        failures++; $display("spk mismatch ch %0d pix %0d: %b exp %b", e.ch, e.pix, out_beat.spk, e.s);
      end
    end
    if (res_out_valid && res_out_ready) begin
      automatic exp_t e;
      e = qx.pop_front();
      checks++;
      if (res_out != e.x) begin failures++; $display("residual out mismatch ch %0d", e.ch); end
    end
    out_ready <= ($urandom_range(4) != 0);
  end

  initial begin : main
    co = 7'(CO); res_en = 0; pool_en = 0; leak_sh = 0; vth = 20'sd30; ow = 8'd4;
    w_we = 0; w_sel = 0; w_ch = 0; w_addr = 0; w_data = 0;
    in_valid = 0; in_spk = '0; in_k = 0; in_pix = 0; in_tlast = 0; in_last = 0;
    res_in_valid = 0; res_in = '0; res_out_ready = 1; out_ready = 0;
    repeat (2) @(posedge clk); rst_n = 1; #1;
    for (int c = 0; c < CO; c++) begin
      for (int k = 0; k < KL; k++) begin
        wm[c][k] = {$urandom, $urandom};
        w_we = 1; w_sel = 0; w_ch = 2'(c); w_addr = 6'(k); w_data = wm[c][k]; @(posedge clk); #1;
      end
      bias_m[c] = $urandom_range(0, 10) - 5;
      w_we = 1; w_sel = 1; w_ch = 2'(c); w_data = 64'($signed(VW'(bias_m[c]))); @(posedge clk); #1;
    end
    w_we = 0;
    for (int tile = 0; tile < NTILE; tile++) begin
      automatic int cur [NT][NX][CO];
      automatic int dens;
      dens = (tile % 4 == 3) ? 95 : 25;
      for (int t = 0; t < NT; t++) for (int x = 0; x < NX; x++) for (int c = 0; c < CO; c++) cur[t][x][c] = 0;
      for (int k = 0; k < KL; k++) begin
        for (int t = 0; t < NT; t++) for (int x = 0; x < NX; x++) begin
          for (int b = 0; b < CI; b++) begin
            in_spk[t][x][b] = ($urandom_range(99) < dens);
            if (in_spk[t][x][b]) for (int c = 0; c < CO; c++) cur[t][x][c] += int'($signed(wm[c][k][b*WB +: WB]));
          end
        end
        if (k == KL - 1) begin
          for (int c = 0; c < CO; c++) begin
            automatic exp_t e;
            for (int x = 0; x < NX; x++) begin
              automatic int v;
              v = 0;
              for (int t = 0; t < NT; t++) begin : stp
                automatic int xx, h;
                xx = cur[t][x][c] + bias_m[c];
                h = v + xx;
                e.x[t][x] = VW'(xx);
                e.s[t][x] = (h >= int'(vth));
                v = e.s[t][x] ? 0 : h;
              end : stp
            end
            e.ch = c; e.pix = tile * NX;
            q.push_back(e); qx.push_back(e);
          end
        end
        in_valid = 1; in_k = 6'(k); in_pix = 16'(tile * NX); in_tlast = (k == KL - 1); in_last = (tile == NTILE - 1) && (k == KL - 1);
        @(negedge clk);
        while (!in_ready) @(negedge clk);
        @(posedge clk); #1;
        in_valid = 0;
      end
    end
    while (q.size() != 0) @(posedge clk);
    checks++;
    if (stalls == 0) begin failures++; $display("broadcast never stalled"); end
    $display("stall cycles %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #2000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
