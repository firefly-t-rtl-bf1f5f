// orchestrator: input spike buffer and sliding-window address generation
// that feeds the sparse engine.
//
// The input feature map of a run (fh x fw pixels, ci_blk slices of P_CI
// channels, P_TS time steps per pixel) is written by the host into NX banks:
// pixel column x goes to bank x mod NX at address
//     ((y*fw + x) / NX) * ci_blk + cb .
// After start the generator walks, for every output row oy and every group of
// NX output columns ox0, the kernel positions (ky, kx) and channel slices cb
// and emits one beat per step: the NX pixels (oy+ky-pad, ox0+j+kx-pad),
// j = 0..NX-1, each carrying NT x P_CI spikes.  The NX columns of one beat are
// consecutive and so lie in NX different banks; every bank is read once per
// cycle and the bank outputs are rotated by the column offset so that lane j
// receives its own pixel.  Pixels outside the map read as zero (padding).
// The beat also carries the weight address k = (ky*kw + kx)*ci_blk + cb, the
// index oy*ow + ox0 of its first output pixel, tlast on the last k of a tile
// and last on the last beat of the run.  Stride 1 only; ow must be a multiple
// of NX.
//
// Timing: one beat per cycle while out_ready is high; the bank read is
// registered, so the first beat leaves two cycles after start.  A run keeps
// busy high until its last beat is accepted.  The banked buffer and rotation
// follow the paper's orchestrator; bank mapping, address order and the
// loop order (rows, column groups, ky, kx, cb) are this design's choices.
module orchestrator
  import fft_pkg::*;
#(
  parameter int NT = P_TS,
  parameter int NX = P_FX,
  parameter int CI = P_CI,
  parameter int BD = 512,          // words per bank
  parameter int KW = 9             // weight-address width
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [7:0]                    fh,
  input  logic [7:0]                    fw,
  input  logic [7:0]                    ci_blk,
  input  logic [1:0]                    kh,
  input  logic [1:0]                    kw,
  input  logic [1:0]                    pad,
  // host write port: one pixel x one channel slice
  input  logic                          wr_en,
  input  logic [7:0]                    wr_y,
  input  logic [7:0]                    wr_x,
  input  logic [7:0]                    wr_cb,
  input  logic [NT-1:0][CI-1:0]         wr_data,
  // control
  input  logic                          start,
  output logic                          busy,
  // beat stream to the sparse engine
  output logic                          out_valid,
  input  logic                          out_ready,
  output logic [NT-1:0][NX-1:0][CI-1:0] out_spk,
  output logic [KW-1:0]                 out_k,
  output logic [15:0]                   out_pix,
  output logic                          out_tlast,
  output logic                          out_last
);
  localparam int AW = $clog2(BD);
  localparam int XW = (NX > 1) ? $clog2(NX) : 1;

  logic [NT-1:0][CI-1:0] bank [NX][BD];
  logic [NX-1:0][NT-1:0][CI-1:0] bq;     // registered bank outputs

  function automatic logic [AW-1:0] word_addr(input int y, input int x, input int cb);
    return AW'(((y * int'(fw) + x) / NX) * int'(ci_blk) + cb);
  endfunction

  // host writes
  always_ff @(posedge clk) begin
    if (wr_en) bank[int'(wr_x) % NX][word_addr(int'(wr_y), int'(wr_x), int'(wr_cb))] <= wr_data;
  end

  // ---------------- loop counters ----------------
  logic [7:0] oy, ox0, cb;
  logic [1:0] ky, kx;
  logic       gen;            // generator active
  logic [7:0] oh, ow;
  assign oh = fh + {pad, 1'b0} - {6'd0, kh} + 8'd1;
  assign ow = fw + {pad, 1'b0} - {6'd0, kw} + 8'd1;

  logic adv;                  // issue a read this cycle
  assign adv = gen && (!out_valid || out_ready);

  logic last_cb, last_kx, last_ky, last_ox, last_oy;
  assign last_cb = (cb == ci_blk - 8'd1);
  assign last_kx = (kx == kw - 2'd1);
  assign last_ky = (ky == kh - 2'd1);
  assign last_ox = (ox0 + 8'(NX) >= ow);
  assign last_oy = (oy == oh - 8'd1);

  // per-bank address, padding mask and lane rotation for the current step
  logic [NX-1:0][AW-1:0] baddr;
  logic [NX-1:0]         lane_zero;
  logic [XW-1:0]         rot;
  always_comb begin
    automatic int iy, dx;
    iy  = int'(oy) + int'(ky) - int'(pad);
    dx  = int'(kx) - int'(pad);
    rot = XW'(((dx % NX) + NX) % NX);
    baddr = '0;
    lane_zero = '0;
    for (int j = 0; j < NX; j++) begin
      automatic int ix, b;
      ix = int'(ox0) + j + dx;
      b  = ((ix % NX) + NX) % NX;
      lane_zero[j] = (iy < 0) || (iy >= int'(fh)) || (ix < 0) || (ix >= int'(fw));
      if (!lane_zero[j]) baddr[b] = word_addr(iy, ix, int'(cb));
    end
  end

  logic [NX-1:0] zq;
  logic [XW-1:0] rq;
  always_ff @(posedge clk) begin
    if (adv) begin
      for (int b = 0; b < NX; b++) bq[b] <= bank[b][baddr[b]];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gen <= 1'b0; busy <= 1'b0;
      oy <= '0; ox0 <= '0; ky <= '0; kx <= '0; cb <= '0;
      out_valid <= 1'b0; out_k <= '0; out_pix <= '0; out_tlast <= 1'b0; out_last <= 1'b0;
      zq <= '0; rq <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (out_valid && out_ready && out_last) busy <= 1'b0;
      if (start && !busy) begin
        gen <= 1'b1; busy <= 1'b1;
        oy <= '0; ox0 <= '0; ky <= '0; kx <= '0; cb <= '0;
      end else if (adv) begin
        out_valid <= 1'b1;
        out_k     <= KW'((int'(ky) * int'(kw) + int'(kx)) * int'(ci_blk) + int'(cb));
        out_pix   <= 16'(int'(oy) * int'(ow) + int'(ox0));
        out_tlast <= last_cb && last_kx && last_ky;
        out_last  <= last_cb && last_kx && last_ky && last_ox && last_oy;
        zq        <= lane_zero;
        rq        <= rot;
        cb <= last_cb ? '0 : cb + 8'd1;
        if (last_cb) begin
          kx <= last_kx ? '0 : kx + 2'd1;
          if (last_kx) begin
            ky <= last_ky ? '0 : ky + 2'd1;
            if (last_ky) begin
              ox0 <= last_ox ? '0 : ox0 + 8'(NX);
              if (last_ox) begin
                oy <= oy + 8'd1;
                if (last_oy) gen <= 1'b0;
              end
            end
          end
        end
      end
    end
  end

  // lane j takes bank (j + rot) mod NX
  always_comb begin
    for (int j = 0; j < NX; j++)
      for (int t = 0; t < NT; t++)
        out_spk[t][j] = zq[j] ? '0 : bq[(j + int'(rq)) % NX][t];
  end
endmodule
