// nldu_dequant: "virtual dequantisation" of the layer-4 scores.
//
// The network's six INT8 scores per position are never converted back to
// probabilities. For the Pauli classes I, X, Y, Z a comparator tree picks the
// largest score (argmax is unchanged by the common scale). For the two binary
// outputs M and H the sigmoid is skipped: a confidence of 0.8 corresponds to a
// pre-sigmoid value ln(4), which the host converts to an INT8 threshold with
// the layer's scale and writes to theta_m / theta_h. A score strictly above
// the threshold is an error. The result is compressed to E = [X, Z, M, H], a Y
// counting as both X and Z. All of that follows the published post-processing;
// ties in the comparator tree go to the lower class index (I first), which is
// this design's choice. Purely combinational, one position per entry.
module nldu_dequant
  import nldu_pkg::*;
#(
  parameter int unsigned NPOS = 81
) (
  input  act_t score [NPOS][K4],   // order I, X, Y, Z, M, H
  input  act_t theta_m,
  input  act_t theta_h,
  output err_t e     [NPOS]
);

  always_comb begin
    for (int p = 0; p < int'(NPOS); p++) begin
      pauli_e c01, c23, cls;
      act_t   v01, v23;
      // two-level comparator tree
      c01 = (score[p][1] > score[p][0]) ? CLS_X : CLS_I;
      v01 = (score[p][1] > score[p][0]) ? score[p][1] : score[p][0];
      c23 = (score[p][3] > score[p][2]) ? CLS_Z : CLS_Y;
      v23 = (score[p][3] > score[p][2]) ? score[p][3] : score[p][2];
      cls = (v23 > v01) ? c23 : c01;
      e[p].x = (cls == CLS_X) || (cls == CLS_Y);
      e[p].z = (cls == CLS_Z) || (cls == CLS_Y);
      e[p].m = score[p][4] > theta_m;
      e[p].h = score[p][5] > theta_h;
    end
  end

endmodule
