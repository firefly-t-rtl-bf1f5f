// sparse_decoder: M-lane bitmap decoder of the sparse engine.
//
// A spike vector of N bits (N = P_CI) is loaded into the spike register.  In
// every cycle lane m reports the position of the m-th remaining set bit, so up
// to M indices leave per cycle.  The lanes follow the look-ahead-carry
// formulation of the paper:
//     g[n][m] = i[n] & c[n][m-1],   c[n+1][m] = g[n][m] | c[n][m],
//     o[n][m] = g[n][m] & ~c[n][m], c[n][-1] = 1,  c[0][m] = 0
// where c[n][m] says that lane m already found its spike below position n.
// The carries are formed in groups of GRP bits: a ripple inside a group and a
// look-ahead OR across groups, as in the grouped organisation of the paper.
// After each cycle the bits at or below the last lane's find are cleared by
// i[n] = i[n] & c[n][M-1].  The paper prints this update with c[n+1][M-1],
// which by its own carry definition would keep the bit lane M-1 just reported;
// its text says processed bits are cleared, which is what is built here.  A tracker loaded with the popcount of the vector counts down by M;
// a new vector is accepted in the cycle where tracker <= M, so an all-zero
// vector also takes one cycle.
//
// Interface: in_valid/in_ready handshake with a TW-bit tag carried along.
// The outputs are combinational from the registers and cannot be stalled:
// lane_vld[m]/lane_idx[m] for the current cycle, busy, done (this is the last
// cycle of the held vector) and tag.
module sparse_decoder #(
  parameter int N   = 16,
  parameter int M   = 2,
  parameter int GRP = 4,
  parameter int TW  = 1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         in_valid,
  output logic                         in_ready,
  input  logic [N-1:0]                 in_bits,
  input  logic [TW-1:0]                in_tag,
  output logic                         busy,
  output logic                         done,
  output logic [M-1:0]                 lane_vld,
  output logic [M-1:0][$clog2(N)-1:0]  lane_idx,
  output logic [TW-1:0]                tag
);
  localparam int IW = $clog2(N);
  localparam int NG = (N + GRP - 1) / GRP;
  localparam int CTW = $clog2(N + 1);

  logic [N-1:0]   spk;
  logic [CTW-1:0] trk;

  // carries c[m][n] for n = 0..N ; index N is the carry out of the top bit
  logic [M-1:0][N:0]   c;
  logic [M-1:0][N-1:0] g;
  logic [M-1:0][N-1:0] o;
  logic [M-1:0][NG:0]  cg;     // group carry-in per lane
  logic [M-1:0][NG-1:0] gg;    // group generate per lane

  always_comb begin
    for (int m = 0; m < M; m++) begin
      for (int n = 0; n < N; n++)
        g[m][n] = spk[n] & ((m == 0) ? 1'b1 : c[m-1][n]);
      // group generate and look-ahead across groups
      for (int k = 0; k < NG; k++) begin
        gg[m][k] = 1'b0;
        for (int b = 0; b < GRP; b++)
          if (k*GRP + b < N) gg[m][k] = gg[m][k] | g[m][k*GRP+b];
      end
      cg[m][0] = 1'b0;
      for (int k = 0; k < NG; k++) cg[m][k+1] = cg[m][k] | gg[m][k];
      // ripple inside each group
      for (int n = 0; n <= N; n++) begin
        if (n % GRP == 0) c[m][n] = cg[m][n / GRP];
        else              c[m][n] = g[m][n-1] | c[m][n-1];
      end
      for (int n = 0; n < N; n++) o[m][n] = g[m][n] & ~c[m][n];
    end
  end

  // one-hot to index
  always_comb begin
    for (int m = 0; m < M; m++) begin
      lane_idx[m] = '0;
      for (int n = 0; n < N; n++)
        if (o[m][n]) lane_idx[m] = lane_idx[m] | IW'(n);
      lane_vld[m] = busy & (|o[m]);
    end
  end

  function automatic logic [CTW-1:0] popc(input logic [N-1:0] v);
    popc = '0;
    for (int n = 0; n < N; n++) popc = popc + CTW'(v[n]);
  endfunction

  assign done     = busy && (trk <= CTW'(M));
  assign in_ready = !busy || done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      spk  <= '0;
      trk  <= '0;
      tag  <= '0;
    end else if (in_valid && in_ready) begin
      busy <= 1'b1;
      spk  <= in_bits;
      trk  <= popc(in_bits);
      tag  <= in_tag;
    end else if (done) begin
      busy <= 1'b0;
      spk  <= '0;
    end else if (busy) begin
      for (int n = 0; n < N; n++) spk[n] <= spk[n] & c[M-1][n];
      trk <= trk - CTW'(M);
    end
  end

  // a lane can only report a bit that is set in the spike register
  always_ff @(posedge clk)
    if (rst_n) for (int m = 0; m < M; m++)
      assert (!lane_vld[m] || spk[lane_idx[m]]) else $error("lane reports clear bit");
endmodule
