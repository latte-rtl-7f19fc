// nldu_pe: processing element, one output value per position group.
//
// A PE holds one ICU per input channel. Their per-channel sums are added by an
// adder tree, the bias of the output channel is added, and the result goes
// through ReLU (the ">0" multiplexer of the published PE) unless RELU is 0, as
// in the last layer. The sum is then requantised to INT8 by an arithmetic right
// shift with rounding and saturation; the published design trains an INT8
// model but does not say how the requantisation is done, so the shift is this
// design's choice and is set per layer by the host.
//
// Interface: the ICU control signals are shared by every PE of a stage; d
// carries one input value per channel, w one weight per channel. out/out_vld
// follow the ICU outputs combinationally, one cycle after fin.
module nldu_pe
  import nldu_pkg::*;
#(
  parameter int unsigned K_IN  = 2,
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
  input  act_t                       d [K_IN],
  input  wgt_t                       w [K_IN],
  input  bias_t                      bias,
  input  logic [SHW-1:0]             shift,
  output act_t                       out,
  output logic                       out_vld
);

  acc_t y   [K_IN];
  logic vld [K_IN];
  acc_t sum;

  for (genvar l = 0; l < int'(K_IN); l++) begin : g_icu
    nldu_icu #(.NSLOT(NSLOT)) u_icu (
      .clk, .rst_n, .mac, .first, .slice, .fin, .slot,
      .d(d[l]), .w(w[l]), .y(y[l]), .y_vld(vld[l])
    );
  end

  // adder tree over input channels plus bias
  always_comb begin
    sum = acc_t'(bias);
    for (int l = 0; l < int'(K_IN); l++) sum = sum + y[l];
  end

  always_comb begin
    if (RELU && sum[AW-1]) out = '0;
    else                   out = requant(sum, shift);
  end

  assign out_vld = vld[0];

endmodule
