// weight_memory: the P_CO weight RAMs of the sparse engine.
//
// RAM c holds, for output channel c of the current channel group, the
// K_h*K_w*C_i/P_CI weight vectors of one kernel, each vector being P_CI
// signed WB-bit weights (one per input channel of a channel slice).  All RAMs
// are read at the same address: the vector of every channel for one kernel
// position is broadcast to the whole pixel/time grid.  Writes come from the
// host weight stream one channel at a time.  The read has one cycle of
// latency and rdata holds its value while re is low.  One RAM per output
// channel and the broadcast read follow the paper; the depth (WDEPTH) and
// write port are this design's choice.
module weight_memory #(
  parameter int P_CI   = 16,
  parameter int P_CO   = 64,
  parameter int WB     = 4,
  parameter int WDEPTH = 512
) (
  input  logic                                   clk,
  input  logic                                   we,
  input  logic [$clog2(P_CO)-1:0]                wch,
  input  logic [$clog2(WDEPTH)-1:0]              waddr,
  input  logic [P_CI*WB-1:0]                     wdata,
  input  logic                                   re,
  input  logic [$clog2(WDEPTH)-1:0]              raddr,
  output logic [P_CO-1:0][P_CI*WB-1:0]           rdata
);
  for (genvar c = 0; c < P_CO; c++) begin : g_ram
    logic [P_CI*WB-1:0] mem [WDEPTH];
    always_ff @(posedge clk) begin
      if (we && wch == $clog2(P_CO)'(c)) mem[waddr] <= wdata;
      if (re) rdata[c] <= mem[raddr];
    end
  end
endmodule
