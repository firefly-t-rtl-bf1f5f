// tb_neuron_dynamics: loads random biases, sends random currents and
// residuals, and compares spikes and residual outputs with a software LIF
// model, with and without leak and residual, under random output stalls.
module tb_neuron_dynamics;
  localparam int NT = 4, NX = 2, NC = 8, AW = 18, W = 20;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic res_en; logic [3:0] leak_sh; logic signed [W-1:0] vth;
  logic bwe; logic [2:0] bch; logic signed [W-1:0] bdata;
  logic in_valid, in_ready, in_last, res_in_valid, res_in_ready, out_valid, out_ready, out_last;
  logic [NT-1:0][NX-1:0][AW-1:0] in_cur;
  logic [6:0] in_ch, out_ch; logic [15:0] in_pix, out_pix;
  logic [NT-1:0][NX-1:0][W-1:0] res_in, out_res;
  logic [NT-1:0][NX-1:0] out_spk;
  int checks = 0, failures = 0;
  neuron_dynamics #(.NT(NT), .NX(NX), .NC(NC), .AW(AW), .W(W)) dut (.*);

  int bias_m [NC];
  typedef struct { logic [NT-1:0][NX-1:0] s; logic [NT-1:0][NX-1:0][W-1:0] x; int ch; } exp_t;
  exp_t q [$];
  int nspk = 0;

  task automatic send(int ch);
    exp_t e;
    for (int x = 0; x < NX; x++) begin
      int v = 0;
      for (int t = 0; t < NT; t++) begin
        int cur = $urandom_range(0, 160) - 60;
        int r   = $urandom_range(0, 40) - 20;
        int xx, h;
        in_cur[t][x] = AW'(cur);
        res_in[t][x] = W'(r);
        xx = cur + bias_m[ch] + (res_en ? r : 0);
        h  = v - ((leak_sh == 0) ? 0 : (v >>> leak_sh)) + xx;
        e.x[t][x] = W'(xx);
        e.s[t][x] = (h >= int'(vth));
        v = e.s[t][x] ? 0 : h;
      end
    end
    e.ch = ch;
    q.push_back(e);
    in_valid = 1; res_in_valid = res_en; in_ch = 7'(ch); in_pix = 16'(ch * 3); in_last = 0;
    @(negedge clk);
    while (!in_ready) @(negedge clk);
    @(posedge clk); #1;
    in_valid = 0; res_in_valid = 0;
  endtask

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      automatic exp_t e;
      e = q.pop_front();
      checks++;
      if (out_spk != e.s || out_res != e.x || int'(out_ch) != e.ch || out_pix != 16'(e.ch * 3)) begin
        failures++; $display("mismatch ch %0d spk %b exp %b", e.ch, out_spk, e.s);
      end
      for (int i = 0; i < NT*NX; i++) nspk += int'(out_spk[i/NX][i%NX]);
    end
    out_ready <= ($urandom_range(3) != 0);
  end

  initial begin
    in_valid = 0; res_in_valid = 0; bwe = 0; res_en = 0; leak_sh = 0; vth = 20'sd50;
    in_cur = '0; res_in = '0; in_ch = 0; in_pix = 0; in_last = 0; bch = 0; bdata = 0; out_ready = 0;
    repeat (2) @(posedge clk); rst_n = 1; #1;
    for (int c = 0; c < NC; c++) begin
      bias_m[c] = $urandom_range(0, 30) - 15;
      bwe = 1; bch = 3'(c); bdata = W'(bias_m[c]); @(posedge clk); #1;
    end
    bwe = 0;
    for (int mode = 0; mode < 4; mode++) begin
      res_en = mode[0]; leak_sh = mode[1] ? 4'd1 : 4'd0; vth = mode[1] ? 20'sd40 : 20'sd70;
      for (int i = 0; i < 100; i++) send($urandom_range(0, NC - 1));
      while (q.size() != 0) @(posedge clk);
      #1;
    end
    checks++;
    if (nspk == 0 || nspk == 400 * NT * NX) begin failures++; $display("degenerate spike count %0d", nspk); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
