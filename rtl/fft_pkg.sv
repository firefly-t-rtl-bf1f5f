// fft_pkg: parameters and types shared by the dual-engine spiking accelerator.
//
// The hardware parallelism is (P_TS, P_FX, P_CI, P_CO): time steps, pixels,
// input channels and output channels processed side by side.  The product
// P_TS*P_FX = 8, P_CI = 16 and P_CO = 64 follow the evaluated configuration;
// the split of the 8 into 4 time steps x 2 pixels is this design's choice.
// The sparse engine uses P_WO = 2 workers per grid point, each with an M = 2
// lane sparse decoder (throughput G = P_WO*M = 4).  Weights are 4-bit signed.
// Accumulator and membrane widths, and every field of layer_cfg_t, are this
// design's own choices.
package fft_pkg;

  parameter int P_TS    = 4;    // temporal parallelism (= time steps per run)
  parameter int P_FX    = 2;    // pixel parallelism
  parameter int P_CI    = 16;   // input-channel parallelism (decoder width)
  parameter int P_CO    = 64;   // output-channel parallelism (weight RAMs)
  parameter int P_WO    = 2;    // load-balancing workers per grid point
  parameter int M_LANES = 2;    // sparse decoder lanes
  parameter int WB      = 4;    // weight bits (signed)
  parameter int ACC_W   = 18;   // PE accumulator width
  parameter int VW      = 20;   // membrane / residual width
  parameter int WDEPTH  = 512;  // weight vectors per weight RAM

  // binary engine
  parameter int P_BM    = 8;
  parameter int P_BN    = 8;
  parameter int P_BK    = 16;
  parameter int L_MAX   = 256;  // longest token sequence held
  parameter int CW      = 9;    // AND-PopCount accumulator width (>= log2(L_MAX)+1)

  // attention role of a sparse-engine run
  typedef enum logic [1:0] {
    ROLE_NONE = 2'd0,   // ordinary convolution / linear layer, output to host
    ROLE_K    = 2'd1,   // result is K of the current head
    ROLE_Q    = 2'd2,   // result is Q of the current head
    ROLE_V    = 2'd3    // result is V; attention runs after it
  } attn_role_e;

  // Layer configuration as held in the register space and passed downstream.
  typedef struct packed {
    logic [7:0]  fh;          // input feature-map height
    logic [7:0]  fw;          // input feature-map width (multiple of P_FX)
    logic [7:0]  ci_blk;      // C_i / P_CI
    logic [1:0]  kh;          // kernel height (1..3)
    logic [1:0]  kw;          // kernel width  (1..3)
    logic [1:0]  pad;         // zero padding on every side
    logic [6:0]  co;          // output channels in this run (1..P_CO)
    logic        res_en;      // add residual membrane input
    logic        pool_en;     // 2x2 max pooling after the neurons
    logic [3:0]  leak_sh;     // LIF leak: V -= V >>> leak_sh (0 = no leak)
    logic signed [VW-1:0] vth;// firing threshold
    attn_role_e  role;        // attention role
    logic [8:0]  seq_len;     // attention: sequence length L
    logic [CW-1:0] thr_s;     // attention: threshold on QK^T counts
    logic [CW-1:0] thr_o;     // attention: threshold on QK^T V counts
  } layer_cfg_t;

  // Channel-serial beat leaving the neuron grid / max-pool.
  typedef struct packed {
    logic [P_TS-1:0][P_FX-1:0] spk;   // spikes of P_FX pixels x P_TS steps
    logic [6:0]                ch;    // output channel within the run
    logic [15:0]               pix;   // index of the first pixel (row-major)
    logic                      last;  // last beat of the run
  } spk_beat_t;

endpackage
