// and_popcount: AND followed by population count, arranged for LUT6 devices.
//
// count = popcount(a & b) for two N-bit spike vectors.  The structure follows
// the LUT6-oriented reduction of the paper:
//   stage 0  - "6:2 compressors": each takes three bit pairs (six inputs),
//              forms the three ANDs and their 2-bit sum (two LUT6 outputs);
//   stage 1+ - "6:3 compressors": six bits of one weight are counted into a
//              3-bit number (three LUT6s), Wallace style, until no column is
//              more than two bits high; a column rest of 3..5 bits goes
//              through one more (zero-padded) compressor, a rest of 1..2 bits
//              passes to the next stage;
//   final    - a carry-propagate adder sums the two remaining rows.
// The reduction schedule depends only on N and is unrolled at elaboration.
// Purely combinational; the caller registers the result.  Grouping the
// first stage in threes and the rule for partial columns are this design's
// reading of the 18-bit example printed in the paper's figure.
module and_popcount #(
  parameter int N = 16
) (
  input  logic [N-1:0]             a,
  input  logic [N-1:0]             b,
  output logic [$clog2(N+1)-1:0]   count
);
  localparam int OW   = $clog2(N + 1);
  localparam int W    = OW + 3;            // columns tracked (headroom)
  localparam int NG   = (N + 2) / 3;       // 6:2 compressors in stage 0
  localparam int MAXH = NG + 6;            // enough for any column height
  localparam int NSTG = 8;                 // reduction stages (>= needed)

  logic [N-1:0] p;
  assign p = a & b;

  logic [W-1:0][MAXH-1:0] col, nxt;
  int h [W];
  int hn [W];
  logic [W-1:0] row0, row1;
  logic [2:0]   s3;
  logic [1:0]   s2;

  always_comb begin
    s2  = '0;
    s3  = '0;
    nxt = '0;
    col = '0;
    for (int w = 0; w < W; w++) h[w] = 0;
    // stage 0: 6:2 compressors (AND + count of three pairs)
    for (int k = 0; k < NG; k++) begin
      s2 = 2'd0;
      for (int j = 0; j < 3; j++)
        if (3*k + j < N) s2 = s2 + {1'b0, p[3*k+j]};
      col[0][h[0]] = s2[0]; h[0] = h[0] + 1;
      col[1][h[1]] = s2[1]; h[1] = h[1] + 1;
    end
    // stages 1..: 6:3 compressors per column
    for (int st = 0; st < NSTG; st++) begin
      nxt = '0;
      for (int w = 0; w < W; w++) hn[w] = 0;
      for (int w = 0; w < W; w++) begin
        if (h[w] <= 2) begin
          for (int i = 0; i < MAXH; i++)
            if (i < h[w]) begin nxt[w][hn[w]] = col[w][i]; hn[w] = hn[w] + 1; end
        end else begin
          for (int g = 0; g < (MAXH + 5) / 6; g++) begin
            if (6*g < h[w]) begin
              if (h[w] - 6*g >= 3) begin
                s3 = 3'd0;
                for (int j = 0; j < 6; j++)
                  if (6*g + j < h[w] && 6*g + j < MAXH) s3 = s3 + {2'b0, col[w][6*g+j]};
                nxt[w][hn[w]] = s3[0]; hn[w] = hn[w] + 1;
                if (w + 1 < W) begin nxt[w+1][hn[w+1]] = s3[1]; hn[w+1] = hn[w+1] + 1; end
                if (w + 2 < W) begin nxt[w+2][hn[w+2]] = s3[2]; hn[w+2] = hn[w+2] + 1; end
              end else begin
                for (int j = 0; j < 2; j++)
                  if (6*g + j < h[w]) begin nxt[w][hn[w]] = col[w][6*g+j]; hn[w] = hn[w] + 1; end
              end
            end
          end
        end
      end
      col = nxt;
      for (int w = 0; w < W; w++) h[w] = hn[w];
    end
    // final carry-propagate addition of the two rows
    for (int w = 0; w < W; w++) begin
      row0[w] = col[w][0];
      row1[w] = col[w][1];
    end
  end

  logic [W-1:0] total;
  assign total = row0 + row1;
  assign count = total[OW-1:0];
endmodule
