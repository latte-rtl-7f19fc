// nldu_pkg: constants and types shared by the neural local decoding unit (NLDU).
//
// The NLDU is a small fully convolutional network (four Conv3d layers, 2-7-7-7-6
// channels, 3x3x3 kernels except the last 1x1x1) that runs on the readout FPGA,
// one syndrome round per microsecond, and removes the errors it is confident
// about before syndromes are sent to the host decoder. Layer shapes, the region
// size N = 9, the receptive field R = 7, INT8 quantisation and the PE counts
// P1..P3 = 52, 33, 27 follow the published design. Accumulator width, bias width
// and the requantisation by arithmetic shift are choices of this implementation.
package nldu_pkg;

  // ---- network shape (published) ----
  localparam int unsigned K0      = 2;   // input channels: S^X, S^Z
  localparam int unsigned K1      = 7;   // layer 1 output channels
  localparam int unsigned K2      = 7;
  localparam int unsigned K3      = 7;
  localparam int unsigned K4      = 6;   // I, X, Y, Z, M, H
  localparam int unsigned KTAPS   = 27;  // 3x3x3 kernel taps
  localparam int unsigned KXY     = 9;   // taps per time slice
  localparam int unsigned N_DEF   = 9;   // region of N x N positions per board
  localparam int unsigned HALO    = 3;   // floor(R/2), R = 7

  // ---- arithmetic (INT8 published, the rest chosen here) ----
  localparam int unsigned DW      = 8;   // activations and weights
  localparam int unsigned AW      = 24;  // accumulators
  localparam int unsigned BW      = 16;  // bias words
  localparam int unsigned SHW     = 5;   // requantisation shift field

  // cycles a PE spends on one group of positions: 27 multiply-accumulates
  // and one cycle that combines REG with the FIFO (the "28" of the latency model)
  localparam int unsigned CYC_PER_GROUP = KTAPS + 1;

  typedef logic signed [DW-1:0] act_t;
  typedef logic signed [DW-1:0] wgt_t;
  typedef logic signed [AW-1:0] acc_t;
  typedef logic signed [BW-1:0] bias_t;

  // class order of the first four outputs of layer 4
  typedef enum logic [1:0] {CLS_I = 2'd0, CLS_X = 2'd1, CLS_Y = 2'd2, CLS_Z = 2'd3} pauli_e;

  // compressed prediction per position, E = [X, Z, M, H]
  typedef struct packed {
    logic x;
    logic z;
    logic m;
    logic h;
  } err_t;

  // syndrome tensor channels
  localparam int unsigned CH_X = 0;
  localparam int unsigned CH_Z = 1;

  // tensor value encoding of the embedding: 0 no defect, 1 defect, 2 virtual vertex
  localparam logic [1:0] SYN_VIRTUAL = 2'd2;

  // weight-load bus stage numbers
  localparam logic [1:0] WSTAGE_L1 = 2'd0;
  localparam logic [1:0] WSTAGE_L2 = 2'd1;
  localparam logic [1:0] WSTAGE_L3 = 2'd2;
  localparam logic [1:0] WSTAGE_L4 = 2'd3;

  function automatic int unsigned ceil_div(input int unsigned a, input int unsigned b);
    return (a + b - 1) / b;
  endfunction

  // Saturate an accumulator to signed INT8 after an arithmetic right shift
  // with round-half-up.
  function automatic act_t requant(input acc_t v, input logic [SHW-1:0] sh);
    acc_t r;
    acc_t rnd;
    rnd = (sh == '0) ? '0 : (acc_t'(1) <<< (sh - 1));
    r   = (v + rnd) >>> sh;
    if (r > acc_t'(127))       return act_t'(127);
    else if (r < acc_t'(-128)) return act_t'(-128);
    else                       return act_t'(r);
  endfunction

endpackage
