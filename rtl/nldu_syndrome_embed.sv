// nldu_syndrome_embed: detector formation and tensor embedding of one round.
//
// Stabiliser measurements of the region arrive once per round as an N x N x 2
// tensor, channel 0 for X stabilisers and channel 1 for Z stabilisers, in the
// coordinate layout where every X and Z vertex of a rotated surface-code patch
// (and every virtual boundary vertex) has its own position. A detector is the
// XOR of a stabiliser's outcome in this and the previous round. The embedded
// value is 1 for a defect, 0 for no defect or for a position that is not a
// vertex of that channel, and the constant 2 at virtual boundary vertices,
// which tells the network where the logical boundaries are. This follows the
// published embedding; the masks that describe the patch geometry (vmask_*
// for real vertices, virt_* for virtual ones) are static inputs here, and the
// previous-round outcomes start at 0 after reset, which are this design's
// choices.
//
// Timing: one cycle; s/s_vld are registered copies of the round given with
// meas_vld.
module nldu_syndrome_embed
  import nldu_pkg::*;
#(
  parameter int unsigned N = 9
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       meas_vld,
  input  logic       meas   [N*N][2],
  input  logic       vmask_x [N*N],
  input  logic       vmask_z [N*N],
  input  logic       virt_x  [N*N],
  input  logic       virt_z  [N*N],
  output logic [1:0] s      [N*N][2],
  output logic       s_vld
);

  logic prev [N*N][2];

  function automatic logic [1:0] embed(input logic vtx, input logic virt, input logic det);
    if (virt)     return SYN_VIRTUAL;
    else if (vtx) return {1'b0, det};
    else          return 2'd0;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_vld <= 1'b0;
      for (int p = 0; p < int'(N*N); p++) begin
        prev[p][0] <= 1'b0;
        prev[p][1] <= 1'b0;
        s[p][0]    <= 2'd0;
        s[p][1]    <= 2'd0;
      end
    end else begin
      s_vld <= meas_vld;
      if (meas_vld) begin
        prev <= meas;
        for (int p = 0; p < int'(N*N); p++) begin
          s[p][CH_X] <= embed(vmask_x[p], virt_x[p], meas[p][CH_X] ^ prev[p][CH_X]);
          s[p][CH_Z] <= embed(vmask_z[p], virt_z[p], meas[p][CH_Z] ^ prev[p][CH_Z]);
        end
      end
    end
  end

endmodule
