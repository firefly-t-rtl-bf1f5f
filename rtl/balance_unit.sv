// balance_unit: one grid point (one time step x pixel) of the sparse
// engine's workload-balancing 3D array.
//
// Every cycle the engine may broadcast one kernel position: this grid point's
// P_CI-bit spike vector and the P_CI-weight vectors of all P_CO output
// channels.  The unit hands the pair to one of its P_WO workers, chosen
// round-robin among those whose FIFO has room (out-of-order dispatch: a
// worker held up by a dense vector is skipped).  Each worker has an M-lane
// sparse_decoder; the up to M indices it yields per cycle select M weights
// from the worker's current weight vector in each of the P_CO channels, and
// their sum is added to that worker's accumulator for the channel.  The
// decoder and its indices are shared by all P_CO channels.
//
// A tile ends with the vector marked last.  The unit then stops accepting,
// waits until all workers are empty, adds the P_WO partial sums of each
// channel into the result register (res_valid/res_ready) and clears the
// accumulators.  The round-robin choice, FIFO depth FD and the drain at the
// end of a tile are this design's choices; the paper gives the worker
// dimension, the shared decoder indices and out-of-order dispatch.
//
// Timing: the vector accepted at edge k reaches a decoder at edge k+1 at the
// earliest; a vector with p spikes keeps its decoder ceil(p/M) cycles (one
// cycle if p = 0).
module balance_unit #(
  parameter int P_CI  = 16,
  parameter int P_CO  = 64,
  parameter int P_WO  = 2,
  parameter int M     = 2,
  parameter int WB    = 4,
  parameter int ACC_W = 18,
  parameter int FD    = 2
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 in_valid,
  output logic                                 in_ready,
  input  logic [P_CI-1:0]                      in_spk,
  input  logic [P_CO-1:0][P_CI*WB-1:0]         in_wgt,
  input  logic                                 in_last,
  output logic                                 res_valid,
  input  logic                                 res_ready,
  output logic [P_CO-1:0][ACC_W-1:0]           res_sum,
  output logic [P_WO-1:0]                      worker_busy   // for statistics
);
  localparam int IW = $clog2(P_CI);
  localparam int PW = (P_WO > 1) ? $clog2(P_WO) : 1;
  localparam int FW = $clog2(FD + 1);

  typedef struct packed {
    logic [P_CI-1:0]              spk;
    logic [P_CO-1:0][P_CI*WB-1:0] wgt;
  } entry_t;

  // ---------------- dispatch ----------------
  logic [PW-1:0]   rr;
  logic [P_WO-1:0] fifo_full, fifo_empty, dec_busy;
  logic [P_WO-1:0] push;
  logic            draining;
  logic            found;
  logic [PW-1:0]   sel;

  always_comb begin
    found = 1'b0;
    sel   = rr;
    for (int i = 0; i < P_WO; i++) begin
      automatic int w;
      w = (int'(rr) + i) % P_WO;
      if (!found && !fifo_full[w]) begin
        found = 1'b1;
        sel   = PW'(w);
      end
    end
  end

  assign in_ready = found && !draining;
  always_comb begin
    push = '0;
    if (in_valid && in_ready) push[sel] = 1'b1;
  end

  // ---------------- workers ----------------
  logic [P_WO-1:0][P_CO-1:0][ACC_W-1:0] acc;
  logic acc_clr;

  for (genvar w = 0; w < P_WO; w++) begin : g_wk
    entry_t         q [FD];
    logic [FW-1:0]  cnt;
    logic [$clog2(FD)-1:0] rd, wr;
    logic           dv, dr;
    logic [P_CO-1:0][P_CI*WB-1:0] cur_w;
    logic [M-1:0]            lv;
    logic [M-1:0][IW-1:0]    li;
    logic           pop;

    assign fifo_full[w]  = (cnt == FW'(FD));
    assign fifo_empty[w] = (cnt == '0);
    assign dv  = !fifo_empty[w];
    assign pop = dv && dr;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        cnt <= '0; rd <= '0; wr <= '0;
      end else begin
        if (push[w]) begin
          wr <= (int'(wr) == FD - 1) ? '0 : wr + 1'b1;
        end
        if (pop) begin
          rd <= (int'(rd) == FD - 1) ? '0 : rd + 1'b1;
        end
        cnt <= cnt + FW'(push[w]) - FW'(pop);
      end
    end
    always_ff @(posedge clk) begin
      if (push[w]) q[wr] <= '{spk: in_spk, wgt: in_wgt};
      if (pop) cur_w <= q[rd].wgt;
    end

    sparse_decoder #(.N(P_CI), .M(M), .GRP(4), .TW(1)) u_dec (
      .clk, .rst_n, .in_valid(dv), .in_ready(dr), .in_bits(q[rd].spk), .in_tag(1'b0),
      .busy(dec_busy[w]), .done(), .lane_vld(lv), .lane_idx(li), .tag());

    // M-lane weight extraction and accumulation, per output channel
    for (genvar c = 0; c < P_CO; c++) begin : g_ch
      logic signed [ACC_W-1:0] add;
      always_comb begin
        add = '0;
        for (int m = 0; m < M; m++)
          if (lv[m]) add = add + ACC_W'($signed(cur_w[c][li[m]*WB +: WB]));
      end
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n)       acc[w][c] <= '0;
        else if (acc_clr) acc[w][c] <= '0;
        else              acc[w][c] <= acc[w][c] + add;
      end
    end
  end

  assign worker_busy = dec_busy;

  // ---------------- tile end: drain and reduce ----------------
  logic all_idle;
  assign all_idle = (&fifo_empty) && !(|dec_busy);
  assign acc_clr  = draining && all_idle && !res_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr        <= '0;
      draining  <= 1'b0;
      res_valid <= 1'b0;
      res_sum   <= '0;
    end else begin
      if (in_valid && in_ready) begin
        rr <= (int'(sel) == P_WO - 1) ? '0 : sel + 1'b1;
        if (in_last) draining <= 1'b1;
      end
      if (res_valid && res_ready) res_valid <= 1'b0;
      if (acc_clr) begin
        for (int c = 0; c < P_CO; c++) begin
          automatic logic [ACC_W-1:0] s;
          s = '0;
          for (int w = 0; w < P_WO; w++) s = s + acc[w][c];
          res_sum[c] <= s;
        end
        res_valid <= 1'b1;
        draining  <= 1'b0;
      end
    end
  end

  // a FIFO is never pushed when full
  always_ff @(posedge clk)
    if (rst_n) assert (!(|(push & fifo_full))) else $error("push into full FIFO");
endmodule
