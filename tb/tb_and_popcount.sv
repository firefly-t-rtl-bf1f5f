// tb_and_popcount: compares the LUT6-style AND-PopCount against a plain
// bit-count of a & b, for the default width and for the 18-bit case of the
// paper's example, with random, all-ones and all-zero operands.
module tb_and_popcount;
  int checks = 0, failures = 0;
  logic [15:0] a16, b16; logic [4:0] c16;
  logic [17:0] a18, b18; logic [4:0] c18;
  logic [63:0] a64, b64; logic [6:0] c64;
  and_popcount #(.N(16)) u16 (.a(a16), .b(b16), .count(c16));
  and_popcount #(.N(18)) u18 (.a(a18), .b(b18), .count(c18));
  and_popcount #(.N(64)) u64 (.a(a64), .b(b64), .count(c64));

  function automatic int pc(input logic [63:0] v);
    pc = 0; for (int i = 0; i < 64; i++) pc += int'(v[i]);
  endfunction

  initial begin
    for (int it = 0; it < 3000; it++) begin
      case (it)
        0: begin a16 = '1; b16 = '1; a18 = '1; b18 = '1; a64 = '1; b64 = '1; end
        1: begin a16 = '0; b16 = '1; a18 = '0; b18 = '1; a64 = '0; b64 = '1; end
        default: begin
          a16 = 16'($urandom); b16 = 16'($urandom);
          a18 = 18'($urandom); b18 = (it % 3 == 0) ? '1 : 18'($urandom);
          a64 = {$urandom, $urandom}; b64 = (it % 2 == 0) ? '1 : {$urandom, $urandom};
        end
      endcase
      #1;
      checks += 3;
      if (int'(c16) != pc(64'(a16 & b16))) begin failures++; $display("N=16 %h %h -> %0d", a16, b16, c16); end
      if (int'(c18) != pc(64'(a18 & b18))) begin failures++; $display("N=18 %h %h -> %0d", a18, b18, c18); end
      if (int'(c64) != pc(a64 & b64))      begin failures++; $display("N=64 -> %0d", c64); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
