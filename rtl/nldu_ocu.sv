// nldu_ocu: output-channel unit, P processing elements sharing one kernel.
//
// One OCU computes a single output channel k of a convolution layer. Its P PEs
// work on P different output positions at once with the same weights, which
// arrive once per cycle for every input channel, and each PE receives its own
// window values. The P results leave together ("serial to parallel"): the
// stage writes them into its output frame at the positions of the current
// group. The split into OCUs and PEs follows the published design.
module nldu_ocu
  import nldu_pkg::*;
#(
  parameter int unsigned K_IN  = 2,
  parameter int unsigned P     = 52,
  parameter int unsigned NSLOT = 4,
  parameter bit          RELU  = 1'b1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       mac,
  input  logic                       first,
  input  logic [1:0]                 slice,
  input  logic                       fin,
  input  logic [$clog2(NSLOT+1)-1:0] slot,
  input  act_t                       d [P][K_IN],
  input  wgt_t                       w [K_IN],
  input  bias_t                      bias,
  input  logic [SHW-1:0]             shift,
  output act_t                       out [P],
  output logic                       out_vld
);

  logic vld [P];

  for (genvar p = 0; p < int'(P); p++) begin : g_pe
    nldu_pe #(.K_IN(K_IN), .NSLOT(NSLOT), .RELU(RELU)) u_pe (
      .clk, .rst_n, .mac, .first, .slice, .fin, .slot,
      .d(d[p]), .w(w), .bias, .shift, .out(out[p]), .out_vld(vld[p])
    );
  end

  assign out_vld = vld[0];

endmodule
