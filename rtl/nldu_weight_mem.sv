// nldu_weight_mem: kernel-weight and bias memory of one inference layer.
//
// The published design keeps all network parameters in block RAM. This memory
// is organised so that one read returns the weights of one kernel tap (x,y,z)
// for every input/output channel pair, which is what all OCUs and PEs of a
// stage consume in the same cycle: NTAP words of K_IN*K_OUT INT8 weights, read
// with one cycle of latency like a BRAM. Biases are K_OUT 16-bit registers
// read in parallel. The word layout and the load port are this design's own.
//
// Load port (one value per write):
//   waddr <  NTAP*K_IN*K_OUT : weight, waddr = (tap*K_IN + l)*K_OUT + k,
//                              tap = z*9 + x*3 + y for 3x3x3 kernels
//   waddr <  that + K_OUT    : bias of output channel waddr - NTAP*K_IN*K_OUT
//   wdata[7:0] is the weight, wdata[15:0] the bias.
module nldu_weight_mem
  import nldu_pkg::*;
#(
  parameter int unsigned K_IN  = 2,
  parameter int unsigned K_OUT = 7,
  parameter int unsigned NTAP  = 27
) (
  input  logic               clk,
  input  logic               we,
  input  logic [15:0]        waddr,
  input  logic [15:0]        wdata,
  input  logic [$clog2(NTAP+1)-1:0] raddr,
  output wgt_t               rdata [K_IN][K_OUT],
  output bias_t              bias  [K_OUT]
);

  localparam int unsigned NW   = K_IN * K_OUT;
  localparam int unsigned WORD = NW * DW;

  logic [WORD-1:0] mem [NTAP];
  logic [WORD-1:0] rword;
  bias_t           bias_q [K_OUT];

  int unsigned wtap, wsub;
  always_comb begin
    wtap = 32'(waddr) / NW;
    wsub = 32'(waddr) % NW;
  end

  always_ff @(posedge clk) begin
    if (we && (32'(waddr) < NTAP * NW))
      mem[wtap][wsub*DW +: DW] <= wdata[DW-1:0];
    rword <= mem[raddr];
  end

  always_ff @(posedge clk) begin
    if (we && (32'(waddr) >= NTAP * NW) && (32'(waddr) < NTAP * NW + K_OUT))
      bias_q[32'(waddr) - NTAP * NW] <= bias_t'(wdata);
  end

  always_comb begin
    for (int l = 0; l < int'(K_IN); l++)
      for (int k = 0; k < int'(K_OUT); k++)
        rdata[l][k] = wgt_t'(rword[(l*K_OUT + k)*DW +: DW]);
  end

  assign bias = bias_q;

endmodule
