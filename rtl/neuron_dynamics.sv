// neuron_dynamics: the P_TS x P_FX grid of spiking neurons behind the
// sparse engine.
//
// The load-balancing array produces all P_CO channels of a tile at once, but
// they are handed over one channel per cycle, so only one neuron per
// (time step, pixel) is needed.  For channel c of the beat the module forms
// the input current  X[t] = I[t] + bias[c] (+ R[t] when res_en)
// where R is the residual membrane stream of a pre-neuron residual
// connection, and runs a leaky integrate-and-fire neuron along the P_TS time
// steps of the beat (all time steps of a run are in one beat):
//     H[t] = V[t-1] - (V[t-1] >>> leak_sh) + X[t]   (leak_sh = 0: no leak)
//     S[t] = (H[t] >= vth),   V[t] = S[t] ? 0 : H[t],   V[-1] = 0
// X is also sent out as the residual output.  Bias per channel (written via
// bwe/bch/bdata) and one threshold per layer are this design's choices; the
// paper names LIF neurons, bias and threshold inputs and the pre-neuron
// residual but gives no equations for its neuron module.
//
// Timing: one beat per cycle, one register stage (out_valid/out_ready); a
// beat waits for its residual beat when res_en is set.
module neuron_dynamics
  import fft_pkg::*;
#(
  parameter int NT = P_TS,
  parameter int NX = P_FX,
  parameter int NC = P_CO,
  parameter int AW = ACC_W,
  parameter int W  = VW
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          res_en,
  input  logic [3:0]                    leak_sh,
  input  logic signed [W-1:0]           vth,
  input  logic                          bwe,
  input  logic [$clog2(NC)-1:0]         bch,
  input  logic signed [W-1:0]           bdata,
  input  logic                          in_valid,
  output logic                          in_ready,
  input  logic [NT-1:0][NX-1:0][AW-1:0] in_cur,
  input  logic [6:0]                    in_ch,
  input  logic [15:0]                   in_pix,
  input  logic                          in_last,
  input  logic                          res_in_valid,
  output logic                          res_in_ready,
  input  logic [NT-1:0][NX-1:0][W-1:0]  res_in,
  output logic                          out_valid,
  input  logic                          out_ready,
  output logic [NT-1:0][NX-1:0]         out_spk,
  output logic [6:0]                    out_ch,
  output logic [15:0]                   out_pix,
  output logic                          out_last,
  output logic [NT-1:0][NX-1:0][W-1:0]  out_res
);
  logic signed [W-1:0] bias [NC];
  always_ff @(posedge clk) if (bwe) bias[bch] <= bdata;

  logic fire;
  assign fire         = in_valid && (!res_en || res_in_valid) && (!out_valid || out_ready);
  assign in_ready     = (!res_en || res_in_valid) && (!out_valid || out_ready);
  assign res_in_ready = res_en && in_valid && (!out_valid || out_ready);

  logic [NT-1:0][NX-1:0]        s_n;
  logic [NT-1:0][NX-1:0][W-1:0] x_n;
  always_comb begin
    for (int x = 0; x < NX; x++) begin
      automatic logic signed [W-1:0] v;
      automatic logic signed [W-1:0] h;
      v = '0;
      for (int t = 0; t < NT; t++) begin
        x_n[t][x] = W'($signed(in_cur[t][x])) + bias[in_ch[$clog2(NC)-1:0]]
                  + (res_en ? $signed(res_in[t][x]) : W'(0));
        h = v - ((leak_sh == 0) ? W'(0) : (v >>> leak_sh)) + $signed(x_n[t][x]);
        s_n[t][x] = (h >= vth);
        v = s_n[t][x] ? W'(0) : h;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_spk <= '0; out_ch <= '0; out_pix <= '0; out_last <= 1'b0; out_res <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (fire) begin
        out_valid <= 1'b1;
        out_spk   <= s_n;
        out_res   <= x_n;
        out_ch    <= in_ch;
        out_pix   <= in_pix;
        out_last  <= in_last;
      end
    end
  end
endmodule
