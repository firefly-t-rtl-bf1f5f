// tb_balance_unit: drives random tiles (random length, random spike density,
// random signed 4-bit weights) into one grid point and compares every
// channel's tile sum with a software dot product.  res_ready is toggled at
// random.  It also checks that both workers take part and that a fully dense
// stream of vectors is accepted at no less than P_WO*M/P_CI vectors per cycle.
module tb_balance_unit;
  localparam int P_CI = 16, P_CO = 4, P_WO = 2, M = 2, WB = 4, ACC_W = 18;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic in_valid, in_ready, in_last, res_valid, res_ready;
  logic [P_CI-1:0] in_spk;
  logic [P_CO-1:0][P_CI*WB-1:0] in_wgt;
  logic [P_CO-1:0][ACC_W-1:0] res_sum;
  logic [P_WO-1:0] worker_busy;
  int checks = 0, failures = 0;
  balance_unit #(.P_CI(P_CI), .P_CO(P_CO), .P_WO(P_WO), .M(M), .WB(WB), .ACC_W(ACC_W)) dut (.*);

  int exp_q [$];           // expected sums, P_CO per tile
  int ntiles = 60;
  int used [P_WO];
  int dense_vecs = 0, dense_cycles = 0;
  logic dense_phase = 0;

  task automatic send_tile(int len, int dens);
    int s [P_CO];
    for (int c = 0; c < P_CO; c++) s[c] = 0;
    for (int k = 0; k < len; k++) begin
      logic [P_CI-1:0] sp;
      logic [P_CO-1:0][P_CI*WB-1:0] wg;
      for (int b = 0; b < P_CI; b++) sp[b] = ($urandom_range(99) < dens);
      for (int c = 0; c < P_CO; c++) begin
        wg[c] = {$urandom, $urandom};
        for (int b = 0; b < P_CI; b++)
          if (sp[b]) s[c] += int'($signed(wg[c][b*WB +: WB]));
      end
      if (k == len - 1) for (int c = 0; c < P_CO; c++) exp_q.push_back(s[c]);
      in_valid = 1; in_spk = sp; in_wgt = wg; in_last = (k == len - 1);
      @(negedge clk);
      while (!in_ready) @(negedge clk);
      @(posedge clk);
      #1;
      in_valid = 0;
      if ($urandom_range(3) == 0 && !dense_phase) begin @(posedge clk); #1; end
    end
  endtask

  always_ff @(posedge clk) if (rst_n) begin
    for (int w = 0; w < P_WO; w++) if (worker_busy[w]) used[w]++;
    if (dense_phase) begin
      dense_cycles++;
      if (in_valid && in_ready) dense_vecs++;
    end
  end

  // checker
  always @(posedge clk) if (rst_n) begin
    if (res_valid && res_ready) begin
      for (int c = 0; c < P_CO; c++) begin
        int e;
        checks++;
        e = exp_q.pop_front();
        if (int'($signed(res_sum[c])) != e) begin
          failures++; $display("ch %0d got %0d exp %0d", c, int'($signed(res_sum[c])), e);
        end
      end
    end
    res_ready <= ($urandom_range(2) != 0);
  end

  initial begin
    in_valid = 0; in_last = 0; in_spk = '0; in_wgt = '0; res_ready = 0;
    repeat (3) @(posedge clk); rst_n = 1; #1;
    for (int t = 0; t < ntiles; t++) send_tile($urandom_range(1, 20), (t % 5) * 25);
    // dense stream: every vector has P_CI spikes
    dense_phase = 1;
    send_tile(64, 100);
    dense_phase = 0;
    repeat (200) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d sums missing", exp_q.size()); end
    checks++;
    if (used[0] == 0 || used[1] == 0) begin failures++; $display("a worker never used"); end
    checks++;
    // dense: P_CI/M = 8 cycles per vector per worker, P_WO workers -> 4 cycles/vector
    if (dense_vecs * (P_CI / M) < dense_cycles * P_WO * 9 / 10) begin
      failures++; $display("dense rate %0d vecs in %0d cycles", dense_vecs, dense_cycles);
    end
    $display("dense rate %0d vecs in %0d cycles", dense_vecs, dense_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #2000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
