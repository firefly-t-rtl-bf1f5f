// tb_weight_memory: writes a distinct pattern into every channel RAM, reads
// back broadcast rows and checks all P_CO outputs, one cycle read latency
// and that the output holds while re is low.
module tb_weight_memory;
  localparam int P_CI = 16, P_CO = 8, WB = 4, D = 32;
  logic clk = 0; always #5 clk = ~clk;
  logic we = 0, re = 0;
  logic [2:0] wch; logic [4:0] waddr, raddr; logic [63:0] wdata;
  logic [P_CO-1:0][63:0] rdata;
  int checks = 0, failures = 0;
  weight_memory #(.P_CI(P_CI), .P_CO(P_CO), .WB(WB), .WDEPTH(D)) dut (.*);
  function automatic logic [63:0] pat(int c, int a);
    return {32'(c * 1000 + a), 32'(a * 77 + c) ^ 32'h5a5a_0f0f};
  endfunction
  initial begin
    @(negedge clk);
    for (int c = 0; c < P_CO; c++) for (int a = 0; a < D; a++) begin
      we = 1; wch = 3'(c); waddr = 5'(a); wdata = pat(c, a); @(negedge clk);
    end
    we = 0;
    for (int a = D - 1; a >= 0; a--) begin
      re = 1; raddr = 5'(a); @(negedge clk);
      re = 0; raddr = 5'(a ^ 1); @(negedge clk);   // must hold
      for (int c = 0; c < P_CO; c++) begin
        checks++;
        if (rdata[c] !== pat(c, a)) begin failures++; $display("ch %0d addr %0d", c, a); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #200000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
