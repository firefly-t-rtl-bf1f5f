// tb_config_regs: writes random values to registers 0..3, checks every
// configuration field against the register map, and checks that a write to
// register 4 gives a single-cycle start pulse one cycle later.
module tb_config_regs;
  import fft_pkg::*;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic wr_en; logic [2:0] wr_addr; logic [63:0] wr_data; layer_cfg_t cfg; logic res_store, start;
  int checks = 0, failures = 0;
  config_regs dut (.*);
  task automatic chk(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("field %s wrong", what); end
  endtask
  initial begin : main
    wr_en = 0; wr_addr = 0; wr_data = 0;
    repeat (2) @(posedge clk); rst_n = 1; #1;
    for (int it = 0; it < 50; it++) begin
      automatic logic [63:0] r0, r1, r2, r3;
      r0 = {$urandom, $urandom}; r1 = {$urandom, $urandom}; r2 = {$urandom, $urandom}; r3 = {$urandom, $urandom};
      wr_en = 1;
      wr_addr = 0; wr_data = r0; @(posedge clk); #1;
      wr_addr = 1; wr_data = r1; @(posedge clk); #1;
      wr_addr = 2; wr_data = r2; @(posedge clk); #1;
      wr_addr = 3; wr_data = r3; @(posedge clk); #1;
      wr_en = 0;
      chk(cfg.fh == r0[7:0] && cfg.fw == r0[15:8] && cfg.ci_blk == r0[23:16], "reg0");
      chk(cfg.kh == r1[1:0] && cfg.kw == r1[3:2] && cfg.pad == r1[5:4] && cfg.co == r1[12:6], "reg1 shape");
      chk(cfg.res_en == r1[13] && cfg.pool_en == r1[14] && cfg.leak_sh == r1[18:15] && res_store == r1[19], "reg1 flags");
      chk(cfg.vth == $signed(r2[VW-1:0]), "vth");
      chk(cfg.role == attn_role_e'(r3[1:0]) && cfg.seq_len == r3[10:2] && cfg.thr_s == r3[10+CW:11] &&
          cfg.thr_o == r3[10+2*CW:11+CW], "reg3");
      chk(!start, "no start");
      wr_en = 1; wr_addr = 4; @(posedge clk); #1; wr_en = 0;
      chk(start, "start pulse");
      @(posedge clk); #1;
      chk(!start, "start one cycle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
