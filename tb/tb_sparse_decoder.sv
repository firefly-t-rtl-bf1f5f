// tb_sparse_decoder: self-checking test of the M-lane sparse decoder.
// Feeds the worked example of the paper (0x9042 followed by 0x0640, two
// lanes) and then random vectors back to back.  A software model lists the
// set bits of every vector in ascending order; the test compares the lane
// outputs with that list, checks that lanes fill in order, and checks the
// cycle count: a vector with p set bits must occupy the decoder for
// max(1, ceil(p/M)) cycles.
module tb_sparse_decoder;
  localparam int N = 16, M = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, busy, done;
  logic [N-1:0] in_bits;
  logic [7:0] in_tag, tag;
  logic [M-1:0] lane_vld;
  logic [M-1:0][3:0] lane_idx;
  int checks = 0, failures = 0;

  sparse_decoder #(.N(N), .M(M), .GRP(4), .TW(8)) dut (.*);

  logic [N-1:0] vecs [0:199];
  int nvec = 200;
  int exp_q [$];
  int vec_cycles, vec_ptr_out;
  int cycles_total = 0, cycles_expected = 0;

  initial begin
    vecs[0] = 16'h9042; vecs[1] = 16'h0640; vecs[2] = 16'h0000; vecs[3] = 16'hFFFF;
    for (int i = 4; i < nvec; i++) begin
      vecs[i] = '0;
      for (int b = 0; b < N; b++) if ($urandom_range(3) == 0) vecs[i][b] = 1'b1;
    end
    // expected index stream and cycle budget
    for (int i = 0; i < nvec; i++) begin
      automatic int p = 0;
      for (int b = 0; b < N; b++) if (vecs[i][b]) begin exp_q.push_back(b); p++; end
      cycles_expected += (p == 0) ? 1 : (p + M - 1) / M;
    end
  end

  // driver: present vectors back to back
  int iv = 0;
  always_comb begin
    in_valid = rst_n && (iv < nvec);
    in_bits  = (iv < nvec) ? vecs[iv] : '0;
    in_tag   = 8'(iv);
  end
  always_ff @(posedge clk) if (in_valid && in_ready) iv <= iv + 1;

  // monitor
  int got = 0;
  always_ff @(posedge clk) if (rst_n) begin
    if (busy) cycles_total <= cycles_total + 1;
    for (int m = 0; m < M; m++) begin
      if (m > 0 && lane_vld[m] && !lane_vld[m-1]) begin
        failures++; $display("lane %0d valid without lane %0d", m, m-1);
      end
    end
    for (int m = 0; m < M; m++) if (lane_vld[m]) begin
      int e;
      checks++;
      e = exp_q.pop_front();
      if (lane_idx[m] != 4'(e)) begin
        failures++; $display("idx mismatch: got %0d exp %0d (tag %0d)", lane_idx[m], e, tag);
      end
      got++;
    end
  end

  // worked example from the paper, cycle by cycle
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (busy);     // vector 0x9042 loaded
    @(negedge clk);
    checks++;
    if (!(lane_vld == 2'b11 && lane_idx[0] == 1 && lane_idx[1] == 6)) begin
      failures++; $display("example clk0 mismatch");
    end
    @(negedge clk);
    checks++;
    if (!(lane_idx[0] == 12 && lane_idx[1] == 15 && done)) begin failures++; $display("example clk1 mismatch"); end
    @(negedge clk);
    checks++;
    if (!(lane_idx[0] == 6 && lane_idx[1] == 9 && !done)) begin failures++; $display("example clk2 mismatch"); end
    @(negedge clk);
    checks++;
    if (!(lane_vld == 2'b01 && lane_idx[0] == 10 && done)) begin failures++; $display("example clk3 mismatch"); end
  end

  initial begin
    wait (iv == nvec);
    repeat (20) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d indices never produced", exp_q.size()); end
    checks++;
    if (cycles_total != cycles_expected) begin
      failures++; $display("cycle count %0d, expected %0d", cycles_total, cycles_expected);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
