// tb_output_packer: sends channel-serial beats of runs with 20 and 32
// channels (full and partial 16-channel slices) over several pixel groups,
// with random input gaps and output stalls, and checks every packed beat,
// its pixel index, slice index and last flag.
module tb_output_packer;
  import fft_pkg::*;
  localparam int NT = P_TS, NX = P_FX, CI = P_CI;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic [6:0] co; logic in_valid, in_ready, out_valid, out_ready, out_last;
  spk_beat_t in_beat; logic [NT-1:0][NX-1:0][CI-1:0] out_data; logic [15:0] out_pix; logic [6:0] out_cb;
  int checks = 0, failures = 0;
  output_packer dut (.*);
  typedef struct { logic [NT-1:0][NX-1:0][CI-1:0] d; int pix; int cb; bit last; } e_t;
  e_t q [$];
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      automatic e_t e;
      e = q.pop_front();
      checks++;
      if (out_data != e.d || int'(out_pix) != e.pix || int'(out_cb) != e.cb || out_last != e.last) begin
        failures++; $display("beat mismatch pix %0d cb %0d", e.pix, e.cb);
      end
    end
    out_ready <= ($urandom_range(2) != 0);
  end
  initial begin : main
    in_valid = 0; in_beat = '0; co = 20; out_ready = 0;
    repeat (2) @(posedge clk); rst_n = 1; #1;
    for (int run = 0; run < 2; run++) begin
      automatic int nc;
      nc = run ? 32 : 20;
      co = 7'(nc);
      for (int p = 0; p < 4; p++) begin
        automatic e_t e;
        e.d = '0;
        for (int c = 0; c < nc; c++) begin
          in_beat.ch = 7'(c); in_beat.pix = 16'(p * NX); in_beat.last = (p == 3) && (c == nc - 1);
          in_beat.spk = NT*NX'($urandom);
          for (int t = 0; t < NT; t++) for (int x = 0; x < NX; x++) e.d[t][x][c % CI] = in_beat.spk[t][x];
          if (c % CI == CI - 1 || c == nc - 1) begin
            e.pix = p * NX; e.cb = c / CI; e.last = in_beat.last; q.push_back(e); e.d = '0;
          end
          in_valid = 1;
          @(negedge clk); while (!in_ready) @(negedge clk);
          @(posedge clk); #1; in_valid = 0;
          if ($urandom_range(3) == 0) begin @(posedge clk); #1; end
        end
      end
    end
    while (q.size() != 0) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
