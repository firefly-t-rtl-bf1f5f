// max_pool: optional 2x2 / stride-2 max pooling of the spike stream.
//
// For binary spikes the maximum is an OR.  Beats arrive channel-serially:
// for each output row, for each group of NX pixels, for each of the co
// channels, one beat of NX pixels x NT time steps.  Horizontal pairs are
// ORed inside the beat; the result of an even row is kept in a row buffer
// addressed by (pixel group, channel) and ORed with the odd row.  Two
// consecutive pooled groups of NX/2 pixels are joined again into NX pixels,
// so the output keeps the input beat format with pix counted in the pooled
// map.  With pool_en low the stream passes unchanged.  The paper only names
// the max-pooling module (with a row buffer in its figure); this realisation
// is this design's own.  Requires ow to be a multiple of 2*NX and an even
// number of rows.
//
// Timing: one register stage, in_ready = !out_valid || out_ready.
module max_pool
  import fft_pkg::*;
#(
  parameter int NT    = P_TS,
  parameter int NX    = P_FX,
  parameter int NC    = P_CO,
  parameter int RB_D  = 4096     // row buffer entries: (ow/NX) * co
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  pool_en,
  input  logic [7:0]            ow,       // width of the incoming map
  input  logic [6:0]            co,       // channels per pixel group
  input  logic                  in_valid,
  output logic                  in_ready,
  input  spk_beat_t             in_beat,
  output logic                  out_valid,
  input  logic                  out_ready,
  output spk_beat_t             out_beat
);
  localparam int HX = NX / 2;
  logic [NT-1:0][HX-1:0] rowbuf [RB_D];
  logic [NT-1:0][HX-1:0] pkbuf  [NC];

  logic [6:0]  c_cnt;
  logic [7:0]  g_cnt;     // pixel group within the row
  logic [7:0]  r_cnt;     // row
  logic        fire;
  assign in_ready = !out_valid || out_ready;
  assign fire     = in_valid && in_ready;

  logic [NT-1:0][HX-1:0] hp, vp;
  always_comb
    for (int t = 0; t < NT; t++)
      for (int j = 0; j < HX; j++)
        hp[t][j] = in_beat.spk[t][2*j] | in_beat.spk[t][2*j+1];

  logic [$clog2(RB_D)-1:0] rb_addr;
  assign rb_addr = $clog2(RB_D)'(int'(g_cnt) * int'(co) + int'(c_cnt));
  assign vp = hp | rowbuf[rb_addr];

  logic [7:0] ngrp;
  assign ngrp = ow / 8'(NX);

  always_ff @(posedge clk) begin
    if (fire && pool_en && !r_cnt[0]) rowbuf[rb_addr] <= hp;
    if (fire && pool_en && r_cnt[0] && !g_cnt[0]) pkbuf[c_cnt[$clog2(NC)-1:0]] <= vp;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_cnt <= '0; g_cnt <= '0; r_cnt <= '0;
      out_valid <= 1'b0; out_beat <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (fire) begin
        if (!pool_en) begin
          out_valid <= 1'b1;
          out_beat  <= in_beat;
        end else begin
          // counters over (row, group, channel)
          if (c_cnt == co - 7'd1) begin
            c_cnt <= '0;
            if (g_cnt == ngrp - 8'd1) begin
              g_cnt <= '0;
              r_cnt <= in_beat.last ? 8'd0 : r_cnt + 8'd1;
            end else g_cnt <= g_cnt + 8'd1;
          end else c_cnt <= c_cnt + 7'd1;
          if (in_beat.last) begin c_cnt <= '0; g_cnt <= '0; r_cnt <= '0; end
          if (r_cnt[0] && g_cnt[0]) begin
            out_valid <= 1'b1;
            for (int t = 0; t < NT; t++)
              out_beat.spk[t] <= {vp[t], pkbuf[c_cnt[$clog2(NC)-1:0]][t]};
            out_beat.ch   <= in_beat.ch;
            out_beat.pix  <= 16'((int'(r_cnt) / 2) * (int'(ow) / 2) + (int'(g_cnt) / 2) * NX);
            out_beat.last <= in_beat.last;
          end
        end
      end
    end
  end
endmodule
