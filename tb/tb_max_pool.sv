// tb_max_pool: streams a random spike map (NT=4 steps, 8 rows x 8 columns,
// 3 channels) through the pooling block and compares the result with a
// software 2x2 OR pooling, then checks the bypass mode.  The output is
// stalled at random.
module tb_max_pool;
  import fft_pkg::*;
  localparam int NT = P_TS, NX = P_FX, H = 8, WD = 8, CO = 3;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic pool_en; logic [7:0] ow; logic [6:0] co;
  logic in_valid, in_ready, out_valid, out_ready;
  spk_beat_t in_beat, out_beat;
  int checks = 0, failures = 0;
  max_pool #(.NT(NT), .NX(NX), .NC(P_CO), .RB_D(64)) dut (.*);

  logic map [NT][H][WD][CO];
  spk_beat_t exp_q [$];

  task automatic drive(spk_beat_t b);
    in_valid = 1; in_beat = b;
    @(negedge clk);
    while (!in_ready) @(negedge clk);
    @(posedge clk); #1;
    in_valid = 0;
  endtask

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      automatic spk_beat_t e;
      e = exp_q.pop_front();
      checks++;
      if (out_beat != e) begin
        failures++; $display("got spk %b pix %0d ch %0d / exp %b pix %0d ch %0d", out_beat.spk, out_beat.pix, out_beat.ch, e.spk, e.pix, e.ch);
      end
    end
    out_ready <= ($urandom_range(2) != 0);
  end

  initial begin
    in_valid = 0; in_beat = '0; out_ready = 0; ow = 8'(WD); co = 7'(CO);
    for (int t = 0; t < NT; t++) for (int r = 0; r < H; r++) for (int x = 0; x < WD; x++)
      for (int c = 0; c < CO; c++) map[t][r][x][c] = ($urandom_range(3) == 0);
    repeat (2) @(posedge clk); rst_n = 1; #1;
    for (int pass = 0; pass < 2; pass++) begin
      pool_en = (pass == 0);
      // expected output
      if (pool_en) begin
        for (int r = 0; r < H / 2; r++) for (int g = 0; g < WD / 2 / NX; g++) for (int c = 0; c < CO; c++) begin
          automatic spk_beat_t e;
          e = '0;
          for (int t = 0; t < NT; t++) for (int x = 0; x < NX; x++) begin
            automatic int px;
            px = g * NX + x;
            e.spk[t][x] = map[t][2*r][2*px][c] | map[t][2*r][2*px+1][c] | map[t][2*r+1][2*px][c] | map[t][2*r+1][2*px+1][c];
          end
          e.ch = 7'(c); e.pix = 16'(r * (WD / 2) + g * NX);
          e.last = (r == H/2 - 1) && (g == WD/2/NX - 1) && (c == CO - 1);
          exp_q.push_back(e);
        end
      end
      for (int r = 0; r < H; r++) for (int g = 0; g < WD / NX; g++) for (int c = 0; c < CO; c++) begin
        automatic spk_beat_t b;
        b = '0;
        for (int t = 0; t < NT; t++) for (int x = 0; x < NX; x++) b.spk[t][x] = map[t][r][g*NX + x][c];
        b.ch = 7'(c); b.pix = 16'(r * WD + g * NX);
        b.last = (r == H - 1) && (g == WD / NX - 1) && (c == CO - 1);
        if (!pool_en) exp_q.push_back(b);
        drive(b);
      end
      while (exp_q.size() != 0) @(posedge clk);
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
