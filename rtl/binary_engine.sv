// binary_engine: spiking self-attention on binary Q, K and V.
//
// The sparse engine computes Q, K and V of one attention head in three runs
// whose role (K, Q or V) is set in the layer configuration.  Their spike beats
// (one channel d of NX tokens x NT time steps per beat, tokens = pixels) are
// written into three buffers:
//   Q and K : per time step t and token l a D-bit row  Q[t][l][d],
//   V       : stored transposed, per t and channel d an L-bit row Vt[t][d][l],
//             which the channel-serial beat order gives directly.
// The V run's last beat starts the attention, done for every t:
//   phase 1  A[l][j] = ( popcount(Q[t][l] & K[t][j]) >= thr_s ),
//   phase 2  O[l][d] = ( popcount(A[l]    & Vt[t][d]) >= thr_o ),
// both on the BM x BN AND-PopCount array (bin_systolic_array), tile by tile,
// with the reduction dimension fed in BK-bit slices.  O overwrites Q[t],
// which is no longer needed.  Afterwards O is sent out in the sparse
// engine's beat format (channel-serial, NX tokens per beat), so the same
// output path serves both engines.
//
// Interface: in_valid/in_ready for beats (in_ready is low while attention
// runs or results are sent), out_valid/out_ready for results, busy.  Timing:
// a tile takes ceil(R/BK) slice cycles plus BM+BN cycles (array latency,
// done, store), R = D in phase 1 and R = L in phase 2; tiles do not overlap.
// The AND-PopCount array, the Q/K/V roles and a transposing V buffer follow
// the paper.  Thresholding QK^T to a binary matrix, the thresholds thr_s and
// thr_o, storing the buffers as register arrays and the non-overlapped tile
// schedule are this design's choices.
module binary_engine
  import fft_pkg::*;
#(
  parameter int NT = P_TS,
  parameter int NX = P_FX,
  parameter int D  = P_CO,      // largest head dimension
  parameter int LM = L_MAX,     // longest sequence
  parameter int BM = P_BM,
  parameter int BN = P_BN,
  parameter int BK = P_BK
) (
  input  logic             clk,
  input  logic             rst_n,
  input  attn_role_e       role,
  input  logic [8:0]       seq_len,
  input  logic [6:0]       dim,         // head dimension of this head (= co)
  input  logic [CW-1:0]    thr_s,
  input  logic [CW-1:0]    thr_o,
  input  logic             in_valid,
  output logic             in_ready,
  input  spk_beat_t        in_beat,
  output logic             out_valid,
  input  logic             out_ready,
  output spk_beat_t        out_beat,
  output logic             busy
);
  localparam int LW = $clog2(LM + 1);
  localparam int TW = (NT > 1) ? $clog2(NT) : 1;

  logic [D-1:0]  qb [NT][LM];
  logic [D-1:0]  kb [NT][LM];
  logic [LM-1:0] vt [NT][D];
  logic [LM-1:0] ab [LM];
  logic [BM-1:0][BN-1:0][CW-1:0] acc;   // array results

  typedef enum logic [2:0] {S_IDLE, S_FEED, S_WAIT, S_STORE, S_OUT} st_e;
  st_e st;
  logic       ph;                    // 0: QK^T, 1: A V
  logic [TW-1:0] t;
  logic [8:0] r0, c0, kc, nkc;       // tile row / column base, slice, slices
  logic [8:0] L;
  logic [6:0] DD;
  logic [8:0] ncol;                  // columns of the phase: L or D
  logic [8:0] op;                    // output: token group
  logic [6:0] od;                    // output: channel

  assign L    = seq_len;
  assign DD   = dim;
  assign ncol = ph ? 9'(DD) : L;
  assign nkc  = ph ? 9'((int'(L) + BK - 1) / BK) : 9'((int'(DD) + BK - 1) / BK);
  assign busy = (st != S_IDLE);
  assign in_ready = (st == S_IDLE);

  // ---------------- input writes ----------------
  always_ff @(posedge clk) begin
    if (in_valid && in_ready && role != ROLE_NONE) begin
      for (int tt = 0; tt < NT; tt++)
        for (int x = 0; x < NX; x++) begin
          automatic int l;
          l = int'(in_beat.pix) + x;
          if (l < LM && int'(in_beat.ch) < D) begin
            case (role)
              ROLE_K: kb[tt][l][in_beat.ch] <= in_beat.spk[tt][x];
              ROLE_Q: qb[tt][l][in_beat.ch] <= in_beat.spk[tt][x];
              default: vt[tt][in_beat.ch][l] <= in_beat.spk[tt][x];
            endcase
          end
        end
    end
    if (st == S_STORE) begin
      for (int i = 0; i < BM; i++)
        for (int j = 0; j < BN; j++) begin
          automatic int r, c;
          r = int'(r0) + i; c = int'(c0) + j;
          if (r < int'(L) && c < int'(ncol)) begin
            if (!ph) ab[r][c] <= (acc[i][j] >= thr_s);
            else     qb[t][r][c] <= (acc[i][j] >= thr_o);
          end
        end
    end
  end

  // ---------------- slice operands ----------------
  logic [BM-1:0][BK-1:0] a_in;
  logic [BN-1:0][BK-1:0] b_in;
  logic a_done, feed;
  assign feed = (st == S_FEED);

  always_comb begin
    for (int i = 0; i < BM; i++) begin
      a_in[i] = '0;
      for (int k = 0; k < BK; k++) begin
        automatic int r, q;
        r = int'(r0) + i; q = int'(kc) * BK + k;
        if (r < int'(L) && r < LM) begin
          if (!ph) begin if (q < int'(DD) && q < D)  a_in[i][k] = qb[t][r][q]; end
          else     begin if (q < int'(L)  && q < LM) a_in[i][k] = ab[r][q];    end
        end
      end
    end
    for (int j = 0; j < BN; j++) begin
      b_in[j] = '0;
      for (int k = 0; k < BK; k++) begin
        automatic int c, q;
        c = int'(c0) + j; q = int'(kc) * BK + k;
        if (!ph) begin
          if (c < int'(L) && c < LM && q < int'(DD) && q < D) b_in[j][k] = kb[t][c][q];
        end else begin
          if (c < int'(DD) && c < D && q < int'(L) && q < LM) b_in[j][k] = vt[t][c][q];
        end
      end
    end
  end

  bin_systolic_array #(.BM(BM), .BN(BN), .BK(BK), .AW(CW)) u_arr (
    .clk, .rst_n, .in_valid(feed), .in_first(feed && kc == '0), .in_last(feed && kc == nkc - 9'd1),
    .a(a_in), .b(b_in), .done(a_done), .acc(acc));

  // ---------------- control ----------------
  logic last_c, last_r, last_t;
  assign last_c = (int'(c0) + BN >= int'(ncol));
  assign last_r = (int'(r0) + BM >= int'(L));
  assign last_t = (int'(t) == NT - 1);

  logic ob_last;
  assign ob_last = (int'(op) + NX >= int'(L)) && (od == DD - 7'd1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; ph <= 1'b0; t <= '0; r0 <= '0; c0 <= '0; kc <= '0; op <= '0; od <= '0;
    end else begin
      case (st)
        S_IDLE: if (in_valid && role == ROLE_V && in_beat.last) begin
          st <= S_FEED; ph <= 1'b0; t <= '0; r0 <= '0; c0 <= '0; kc <= '0;
        end
        S_FEED: begin
          if (kc == nkc - 9'd1) begin kc <= '0; st <= S_WAIT; end
          else kc <= kc + 9'd1;
        end
        S_WAIT: if (a_done) st <= S_STORE;
        S_STORE: begin
          st <= S_FEED;
          if (last_c) begin
            c0 <= '0;
            if (last_r) begin
              r0 <= '0;
              if (ph) begin
                ph <= 1'b0;
                if (last_t) begin st <= S_OUT; op <= '0; od <= '0; end
                else t <= t + 1'b1;
              end else ph <= 1'b1;
            end else r0 <= r0 + 9'(BM);
          end else c0 <= c0 + 9'(BN);
        end
        S_OUT: if (out_ready) begin
          if (ob_last) st <= S_IDLE;
          if (od == DD - 7'd1) begin od <= '0; op <= op + 9'(NX); end
          else od <= od + 7'd1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // result beats: O[t][op+x][od]
  assign out_valid = (st == S_OUT);
  always_comb begin
    out_beat      = '0;
    out_beat.ch   = od;
    out_beat.pix  = 16'(op);
    out_beat.last = ob_last;
    for (int tt = 0; tt < NT; tt++)
      for (int x = 0; x < NX; x++) begin
        automatic int l;
        l = int'(op) + x;
        if (l < int'(L) && l < LM && int'(od) < D) out_beat.spk[tt][x] = qb[tt][l][od];
      end
  end
endmodule
