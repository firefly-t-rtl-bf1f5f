// sparse_engine: convolution / linear-layer engine that skips zero spikes.
//
// Input beats come from the orchestrator, one kernel position k per beat:
// a P_CI-bit spike slice for each of the P_TS x P_FX grid points, with k
// (weight address), the pixel index of the tile, tile_last (last kernel
// position of the tile) and last (last tile of the run).
//   stage 1  the beat is registered while the P_CO weight RAMs are read at k;
//   stage 2  the spike slices and the P_CO weight vectors are broadcast to
//            the P_TS*P_FX balance units (one per grid point, each with P_WO
//            workers); the broadcast waits until every unit can take it;
//   gather   when every unit has its tile sums, the P_CO x P_TS x P_FX sums
//            go to a serialiser that hands one output channel per cycle to
//            the neuron grid (neuron_dynamics), followed by max_pool.
// Weights, biases and the residual stream enter and leave through ports.
// The structure (single broadcast weight memory per output channel, shared
// decoders, worker dimension, channel-serial neurons, max pooling) follows
// the paper; the two-stage broadcast, tile FIFO and serialiser are this
// design's choices.  stall is high in cycles where a broadcast is held back
// by a busy balance unit.
module sparse_engine
  import fft_pkg::*;
#(
  parameter int NT = P_TS,
  parameter int NX = P_FX,
  parameter int CI = P_CI,
  parameter int CO = P_CO,
  parameter int WO = P_WO,
  parameter int ML = M_LANES,
  parameter int WD = WDEPTH,
  parameter int RB_D = 4096
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // layer configuration
  input  logic [6:0]                    co,
  input  logic                          res_en,
  input  logic [3:0]                    leak_sh,
  input  logic signed [VW-1:0]          vth,
  input  logic                          pool_en,
  input  logic [7:0]                    ow,
  // weight / bias write port
  input  logic                          w_we,
  input  logic                          w_sel,     // 0: weight vector, 1: bias
  input  logic [$clog2(CO)-1:0]         w_ch,
  input  logic [$clog2(WD)-1:0]         w_addr,
  input  logic [CI*WB-1:0]              w_data,
  // spike input from the orchestrator
  input  logic                          in_valid,
  output logic                          in_ready,
  input  logic [NT-1:0][NX-1:0][CI-1:0] in_spk,
  input  logic [$clog2(WD)-1:0]         in_k,
  input  logic [15:0]                   in_pix,
  input  logic                          in_tlast,
  input  logic                          in_last,
  // residual membrane streams
  input  logic                          res_in_valid,
  output logic                          res_in_ready,
  input  logic [NT-1:0][NX-1:0][VW-1:0] res_in,
  output logic                          res_out_valid,
  input  logic                          res_out_ready,
  output logic [NT-1:0][NX-1:0][VW-1:0] res_out,
  // spike output
  output logic                          out_valid,
  input  logic                          out_ready,
  output spk_beat_t                     out_beat,
  output logic                          stall
);
  localparam int G = NT * NX;

  // ---------------- weights ----------------
  logic                      w_re;
  logic [CO-1:0][CI*WB-1:0]  w_rd;
  weight_memory #(.P_CI(CI), .P_CO(CO), .WB(WB), .WDEPTH(WD)) u_wmem (
    .clk, .we(w_we && !w_sel), .wch(w_ch), .waddr(w_addr), .wdata(w_data),
    .re(w_re), .raddr(in_k), .rdata(w_rd));

  // ---------------- broadcast stage ----------------
  logic                          s2_valid, s2_tlast, s2_last;
  logic [15:0]                   s2_pix;
  logic [NT-1:0][NX-1:0][CI-1:0] s2_spk;
  logic [G-1:0]                  u_ready, u_res_valid;
  logic                          s2_fire, tf_full;

  assign s2_fire  = s2_valid && (&u_ready) && !(s2_tlast && tf_full);
  assign in_ready = !s2_valid || s2_fire;
  assign w_re     = in_valid && in_ready;
  assign stall    = s2_valid && !s2_fire;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2_valid <= 1'b0; s2_tlast <= 1'b0; s2_last <= 1'b0; s2_pix <= '0; s2_spk <= '0;
    end else if (in_ready) begin
      s2_valid <= in_valid;
      if (in_valid) begin
        s2_spk <= in_spk; s2_tlast <= in_tlast; s2_last <= in_last; s2_pix <= in_pix;
      end
    end
  end

  // tile FIFO: pixel index and run-last flag of tiles inside the array
  localparam int TFD = 4;
  logic [16:0] tf_q [TFD];
  logic [1:0]  tf_wr, tf_rd;
  logic [2:0]  tf_cnt;
  logic        tf_pop;
  assign tf_full = (tf_cnt == 3'(TFD));

  // ---------------- balance units ----------------
  logic [G-1:0][CO-1:0][ACC_W-1:0] u_sum;
  logic                            gather;
  for (genvar g = 0; g < G; g++) begin : g_unit
    balance_unit #(.P_CI(CI), .P_CO(CO), .P_WO(WO), .M(ML), .WB(WB), .ACC_W(ACC_W)) u_bu (
      .clk, .rst_n, .in_valid(s2_fire), .in_ready(u_ready[g]),
      .in_spk(s2_spk[g / NX][g % NX]), .in_wgt(w_rd), .in_last(s2_tlast),
      .res_valid(u_res_valid[g]), .res_ready(gather), .res_sum(u_sum[g]), .worker_busy());
  end

  // ---------------- serialiser ----------------
  logic                            ser_busy, ser_last;
  logic [15:0]                     ser_pix;
  logic [6:0]                      ser_ch;
  logic [G-1:0][CO-1:0][ACC_W-1:0] ser_sum;
  logic                            n_ready;
  logic [NT-1:0][NX-1:0][ACC_W-1:0] n_cur;

  assign gather = (&u_res_valid) && !ser_busy;
  assign tf_pop = gather;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tf_wr <= '0; tf_rd <= '0; tf_cnt <= '0;
    end else begin
      if (s2_fire && s2_tlast) begin tf_q[tf_wr] <= {s2_last, s2_pix}; tf_wr <= tf_wr + 2'd1; end
      if (tf_pop) tf_rd <= tf_rd + 2'd1;
      tf_cnt <= tf_cnt + 3'(s2_fire && s2_tlast) - 3'(tf_pop);
    end
  end

  always_comb
    for (int g = 0; g < G; g++) n_cur[g / NX][g % NX] = ser_sum[g][ser_ch[$clog2(CO)-1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ser_busy <= 1'b0; ser_last <= 1'b0; ser_pix <= '0; ser_ch <= '0; ser_sum <= '0;
    end else begin
      if (gather) begin
        ser_busy <= 1'b1;
        ser_sum  <= u_sum;
        {ser_last, ser_pix} <= tf_q[tf_rd];
        ser_ch   <= '0;
      end else if (ser_busy && n_ready) begin
        if (ser_ch == co - 7'd1) ser_busy <= 1'b0;
        ser_ch <= ser_ch + 7'd1;
      end
    end
  end

  // ---------------- neurons and pooling ----------------
  logic        nd_valid, nd_ready, nd_last;
  logic [NT-1:0][NX-1:0] nd_spk;
  logic [6:0]  nd_ch;
  logic [15:0] nd_pix;
  logic        mp_ready;
  spk_beat_t   nd_beat;

  neuron_dynamics #(.NT(NT), .NX(NX), .NC(CO), .AW(ACC_W), .W(VW)) u_neu (
    .clk, .rst_n, .res_en, .leak_sh, .vth,
    .bwe(w_we && w_sel), .bch(w_ch), .bdata(VW'($signed(w_data[VW-1:0]))),
    .in_valid(ser_busy), .in_ready(n_ready), .in_cur(n_cur), .in_ch(ser_ch), .in_pix(ser_pix),
    .in_last(ser_last && ser_ch == co - 7'd1),
    .res_in_valid, .res_in_ready, .res_in,
    .out_valid(nd_valid), .out_ready(nd_ready), .out_spk(nd_spk), .out_ch(nd_ch),
    .out_pix(nd_pix), .out_last(nd_last), .out_res(res_out));

  assign nd_ready      = mp_ready && res_out_ready;
  assign res_out_valid = nd_valid && mp_ready;
  assign nd_beat       = '{spk: nd_spk, ch: nd_ch, pix: nd_pix, last: nd_last};

  max_pool #(.NT(NT), .NX(NX), .NC(CO), .RB_D(RB_D)) u_mp (
    .clk, .rst_n, .pool_en, .ow, .co,
    .in_valid(nd_valid && res_out_ready), .in_ready(mp_ready), .in_beat(nd_beat),
    .out_valid, .out_ready, .out_beat);
endmodule
