// bin_systolic_array: output-stationary BM x BN array of AND-PopCount
// processing elements for the binary engine.
//
// Each cycle with in_valid the caller presents BM row vectors a[i] and BN
// column vectors b[j] of BK bits (one slice of the reduction dimension).
// Row i is delayed by i cycles and column j by j cycles before it enters the
// array; inside, a moves one PE to the right and b one PE down per cycle, so
// PE(i,j) meets a[i] and b[j] of the same slice i+j cycles after they were
// presented.  Each PE adds popcount(a & b) (and_popcount, BK bits) to its own
// accumulator; the slice marked in_first restarts the sum.  When the slice
// marked in_last has passed PE(BM-1, BN-1), done pulses for one cycle and
// acc[i][j] holds the finished sums until the next in_first reaches the PE.
//
// Timing: for a sequence of n slices presented on consecutive cycles, done
// is high in the (n + BM + BN - 2)-th cycle after the cycle of the first
// slice (done is registered).  The
// caller must not start the next sequence before done.  The AND-PopCount PE
// and the array dimensions follow the paper; the skewed output-stationary
// data flow and the first/last flags are this design's choices.
module bin_systolic_array
  import fft_pkg::*;
#(
  parameter int BM = P_BM,
  parameter int BN = P_BN,
  parameter int BK = P_BK,
  parameter int AW = CW
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic                      in_first,
  input  logic                      in_last,
  input  logic [BM-1:0][BK-1:0]     a,
  input  logic [BN-1:0][BK-1:0]     b,
  output logic                      done,
  output logic [BM-1:0][BN-1:0][AW-1:0] acc
);
  localparam int PW = $clog2(BK + 1);

  // skew delay lines: row i delayed by i, column j by j
  logic [BM-1:0][BK-1:0] a_sk;
  logic [BM-1:0][2:0]    f_sk;          // {valid, first, last}
  logic [BN-1:0][BK-1:0] b_sk;

  for (genvar i = 0; i < BM; i++) begin : g_ask
    if (i == 0) begin : g0
      assign a_sk[0] = a[0];
      assign f_sk[0] = {in_valid, in_first, in_last};
    end else begin : gd
      logic [i-1:0][BK-1:0] da;
      logic [i-1:0][2:0]    df;
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          da <= '0; df <= '0;
        end else begin
          da[0] <= a[i];
          df[0] <= {in_valid, in_first, in_last};
          for (int s = 1; s < i; s++) begin
            da[s] <= da[s-1];
            df[s] <= df[s-1];
          end
        end
      end
      assign a_sk[i] = da[i-1];
      assign f_sk[i] = df[i-1];
    end
  end
  for (genvar j = 0; j < BN; j++) begin : g_bsk
    if (j == 0) begin : g0
      assign b_sk[0] = b[0];
    end else begin : gd
      logic [j-1:0][BK-1:0] db;
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) db <= '0;
        else begin
          db[0] <= b[j];
          for (int s = 1; s < j; s++) db[s] <= db[s-1];
        end
      end
      assign b_sk[j] = db[j-1];
    end
  end

  // PE grid: inputs of PE(i,j)
  logic [BM-1:0][BN:0][BK-1:0] ah;     // a flowing right
  logic [BM-1:0][BN:0][2:0]    fh;     // flags flowing right with a
  logic [BM:0][BN-1:0][BK-1:0] bv;     // b flowing down

  for (genvar i = 0; i < BM; i++) begin : g_r
    assign ah[i][0] = a_sk[i];
    assign fh[i][0] = f_sk[i];
  end
  for (genvar j = 0; j < BN; j++) begin : g_c
    assign bv[0][j] = b_sk[j];
  end

  for (genvar i = 0; i < BM; i++) begin : g_i
    for (genvar j = 0; j < BN; j++) begin : g_j
      logic [PW-1:0] pc;
      and_popcount #(.N(BK)) u_pc (.a(ah[i][j]), .b(bv[i][j]), .count(pc));
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          acc[i][j]  <= '0;
          ah[i][j+1] <= '0;
          fh[i][j+1] <= '0;
          bv[i+1][j] <= '0;
        end else begin
          ah[i][j+1] <= ah[i][j];
          fh[i][j+1] <= fh[i][j];
          bv[i+1][j] <= bv[i][j];
          if (fh[i][j][2])
            acc[i][j] <= (fh[i][j][1] ? AW'(0) : acc[i][j]) + AW'(pc);
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) done <= 1'b0;
    else        done <= fh[BM-1][BN-1][2] && fh[BM-1][BN-1][0];
  end
endmodule
