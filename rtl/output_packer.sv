// output_packer: turns the channel-serial spike beats of the sparse engine
// into beats for the host.
//
// Input beats carry one output channel c of NX pixels x NT time steps.  The
// packer collects CI consecutive channels of the same pixel group and emits
// one beat of NT x NX x CI bits, laid out as [t][x][channel bit], together
// with the pixel index of the group and the channel slice c / CI.  A run whose
// channel count is not a multiple of CI flushes the partial slice (upper bits
// zero) when the channel index wraps, the pixel changes or the last beat
// arrives.  With the default sizes the beat is 128 bits wide, the width of
// one high-performance AXI port.  The layout is this design's choice.
//
// Timing: accepts one beat per cycle; the packed beat is registered and is
// held until out_ready.  The input stalls only while a full beat waits.
module output_packer
  import fft_pkg::*;
#(
  parameter int NT = P_TS,
  parameter int NX = P_FX,
  parameter int CI = P_CI
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [6:0]                    co,        // channels per pixel in the run
  input  logic                          in_valid,
  output logic                          in_ready,
  input  spk_beat_t                     in_beat,
  output logic                          out_valid,
  input  logic                          out_ready,
  output logic [NT-1:0][NX-1:0][CI-1:0] out_data,
  output logic [15:0]                   out_pix,
  output logic [6:0]                    out_cb,
  output logic                          out_last
);
  localparam int CBW = $clog2(CI);
  logic [NT-1:0][NX-1:0][CI-1:0] acc;

  logic fin;       // this input beat closes a slice
  assign fin = (int'(in_beat.ch[CBW-1:0]) == CI - 1) || (in_beat.ch == co - 7'd1) || in_beat.last;
  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0; out_valid <= 1'b0; out_data <= '0; out_pix <= '0; out_cb <= '0; out_last <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        automatic logic [NT-1:0][NX-1:0][CI-1:0] nx;
        nx = acc;
        for (int t = 0; t < NT; t++)
          for (int x = 0; x < NX; x++)
            nx[t][x][in_beat.ch[CBW-1:0]] = in_beat.spk[t][x];
        if (fin) begin
          out_valid <= 1'b1;
          out_data  <= nx;
          out_pix   <= in_beat.pix;
          out_cb    <= 7'(in_beat.ch >> CBW);
          out_last  <= in_beat.last;
          acc       <= '0;
        end else begin
          acc <= nx;
        end
      end
    end
  end
endmodule
