// firefly_t: top level of the dual-engine spiking accelerator.
//
// Blocks: config_regs (layer registers), orchestrator (input spike buffer and
// sliding-window beats), sparse_engine (weight RAMs, load-balanced sparse
// PEs, neurons, max pool), binary_engine (spiking attention on Q, K, V),
// a residual RAM and output_packer (host beats).
//
// Host interface (all plain signals):
//   host_we/host_sel/host_addr/host_data write port
//     sel 0 config register host_addr[2:0]
//     sel 1 weight vector: host_addr[8:0] = address k, [14:9] = channel
//     sel 2 bias: host_addr[5:0] = channel, host_data[VW-1:0]
//     sel 3 input pixel: host_addr[7:0] = x, [15:8] = y, [23:16] = slice cb,
//           host_data = NT x P_CI spikes ([t*P_CI + ci])
//   out_* : packed result beats of NT x NX x P_CI spikes, with first pixel
//           index and channel slice; out_last marks the last beat of a run.
//   busy / done : a run starts with a write to config register 4 and ends
//           (done pulse) when its last beat has left: to the host for an
//           ordinary or V run, into the binary engine for a K or Q run.
//   stall / attn : status, high while the sparse engine's broadcast waits and
//           while the binary engine computes.
// Data path: orchestrator -> sparse engine -> (role NONE) packer, or
// (role K/Q/V) binary engine -> packer after the V run.  With res_store set the
// neurons' residual output X is written in order into the residual RAM; a
// later run with res_en reads it back in the same order (same output shape).
// The split into these blocks follows the paper's overlay; the host map, the
// residual RAM (instead of a host stream) and the done rule are this design's.
module firefly_t
  import fft_pkg::*;
#(
  parameter int NT    = P_TS,
  parameter int NX    = P_FX,
  parameter int CI    = P_CI,
  parameter int CO    = P_CO,
  parameter int WO    = P_WO,
  parameter int ML    = M_LANES,
  parameter int WD    = WDEPTH,
  parameter int BD    = 512,
  parameter int LM    = L_MAX,
  parameter int RES_D = 4096,
  parameter int RB_D  = 4096
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          host_we,
  input  logic [1:0]                    host_sel,
  input  logic [23:0]                   host_addr,
  input  logic [63:0]                   host_data,
  output logic                          out_valid,
  input  logic                          out_ready,
  output logic [NT-1:0][NX-1:0][CI-1:0] out_data,
  output logic [15:0]                   out_pix,
  output logic [6:0]                    out_cb,
  output logic                          out_last,
  output logic                          busy,
  output logic                          done,
  output logic                          stall,
  output logic                          attn
);
  localparam int WAW = $clog2(WD);
  localparam int CHW = $clog2(CO);
  localparam int RAW = $clog2(RES_D);

  layer_cfg_t cfg;
  logic res_store, start;
  config_regs u_cfg (.clk, .rst_n, .wr_en(host_we && host_sel == 2'd0), .wr_addr(host_addr[2:0]),
                     .wr_data(host_data), .cfg, .res_store, .start);

  // ---------------- orchestrator ----------------
  logic o_valid, o_ready, o_tlast, o_last, o_busy;
  logic [NT-1:0][NX-1:0][CI-1:0] o_spk;
  logic [WAW-1:0] o_k;
  logic [15:0] o_pix;
  logic [NT-1:0][CI-1:0] wr_px;
  always_comb
    for (int t = 0; t < NT; t++) wr_px[t] = host_data[t*CI +: CI];

  orchestrator #(.NT(NT), .NX(NX), .CI(CI), .BD(BD), .KW(WAW)) u_orch (
    .clk, .rst_n, .fh(cfg.fh), .fw(cfg.fw), .ci_blk(cfg.ci_blk), .kh(cfg.kh), .kw(cfg.kw), .pad(cfg.pad),
    .wr_en(host_we && host_sel == 2'd3), .wr_y(host_addr[15:8]), .wr_x(host_addr[7:0]),
    .wr_cb(host_addr[23:16]), .wr_data(wr_px), .start, .busy(o_busy),
    .out_valid(o_valid), .out_ready(o_ready), .out_spk(o_spk), .out_k(o_k), .out_pix(o_pix),
    .out_tlast(o_tlast), .out_last(o_last));

  // ---------------- sparse engine ----------------
  logic [7:0] ow;
  assign ow = cfg.fw + {cfg.pad, 1'b0} - {6'd0, cfg.kw} + 8'd1;

  logic ri_valid, ri_ready, ro_valid, ro_ready;
  logic [NT-1:0][NX-1:0][VW-1:0] ri_data, ro_data;
  logic s_valid, s_ready;
  spk_beat_t s_beat;

  sparse_engine #(.NT(NT), .NX(NX), .CI(CI), .CO(CO), .WO(WO), .ML(ML), .WD(WD), .RB_D(RB_D)) u_se (
    .clk, .rst_n, .co(cfg.co), .res_en(cfg.res_en), .leak_sh(cfg.leak_sh), .vth(cfg.vth),
    .pool_en(cfg.pool_en), .ow(ow),
    .w_we(host_we && (host_sel == 2'd1 || host_sel == 2'd2)), .w_sel(host_sel == 2'd2),
    .w_ch(host_sel == 2'd2 ? CHW'(host_addr[5:0]) : CHW'(host_addr[14:9])),
    .w_addr(WAW'(host_addr[8:0])), .w_data(host_data),
    .in_valid(o_valid), .in_ready(o_ready), .in_spk(o_spk), .in_k(o_k), .in_pix(o_pix),
    .in_tlast(o_tlast), .in_last(o_last),
    .res_in_valid(ri_valid), .res_in_ready(ri_ready), .res_in(ri_data),
    .res_out_valid(ro_valid), .res_out_ready(ro_ready), .res_out(ro_data),
    .out_valid(s_valid), .out_ready(s_ready), .out_beat(s_beat), .stall);

  // ---------------- residual RAM ----------------
  logic [NT-1:0][NX-1:0][VW-1:0] rram [RES_D];
  logic [RAW-1:0] rwp, rrp;
  logic           rq_valid;
  assign ro_ready = 1'b1;
  // read side: one registered word ahead of the consumer
  assign ri_valid = rq_valid;
  always_ff @(posedge clk) begin
    if (ro_valid && res_store) rram[rwp] <= ro_data;
    if (!rq_valid || ri_ready) ri_data <= rram[rrp];
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rwp <= '0; rrp <= '0; rq_valid <= 1'b0;
    end else if (start) begin
      rwp <= '0; rrp <= '0; rq_valid <= 1'b0;
    end else begin
      if (ro_valid && res_store) rwp <= rwp + 1'b1;
      if (cfg.res_en && busy && (!rq_valid || ri_ready)) begin
        rq_valid <= 1'b1;
        rrp      <= rrp + 1'b1;
      end else if (ri_ready) rq_valid <= 1'b0;
    end
  end

  // ---------------- binary engine ----------------
  logic b_in_valid, b_in_ready, b_out_valid, b_out_ready;
  spk_beat_t b_out_beat;
  logic to_bin;
  assign to_bin = (cfg.role != ROLE_NONE);
  assign b_in_valid = s_valid && to_bin;

  binary_engine #(.NT(NT), .NX(NX), .D(CO), .LM(LM)) u_be (
    .clk, .rst_n, .role(cfg.role), .seq_len(cfg.seq_len), .dim(cfg.co), .thr_s(cfg.thr_s), .thr_o(cfg.thr_o),
    .in_valid(b_in_valid), .in_ready(b_in_ready), .in_beat(s_beat),
    .out_valid(b_out_valid), .out_ready(b_out_ready), .out_beat(b_out_beat), .busy(attn));

  // ---------------- output ----------------
  logic p_valid, p_ready;
  spk_beat_t p_beat;
  assign p_valid     = b_out_valid || (s_valid && !to_bin);
  assign p_beat      = b_out_valid ? b_out_beat : s_beat;
  assign b_out_ready = p_ready;
  assign s_ready     = to_bin ? b_in_ready : (p_ready && !b_out_valid);

  output_packer #(.NT(NT), .NX(NX), .CI(CI)) u_pk (
    .clk, .rst_n, .co(cfg.co), .in_valid(p_valid), .in_ready(p_ready), .in_beat(p_beat),
    .out_valid, .out_ready, .out_data, .out_pix, .out_cb, .out_last);

  // ---------------- run status ----------------
  logic fin;
  assign fin = (out_valid && out_ready && out_last) ||
               (s_valid && s_ready && s_beat.last && (cfg.role == ROLE_K || cfg.role == ROLE_Q));
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= busy && fin;
      if (start) busy <= 1'b1;
      else if (fin) busy <= 1'b0;
    end
  end
endmodule
