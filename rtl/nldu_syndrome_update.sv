// nldu_syndrome_update: parallel syndrome and local logical update.
//
// Once the network has predicted E = [X, Z, M, H] at every position of round
// t, each detector is corrected independently of all others by XOR with the
// predictions that touch it, so the whole region is updated in one cycle. With
// the stabiliser at tensor position (r,c) covering the data qubits at
// (r,c), (r,c+1), (r+1,c), (r+1,c+1):
//   S'z(r,c)[t] = Sz ^ M(r,c)[t] ^ M(r,c)[t-1] ^ H(r,c)[t] ^ H(r+2,c)[t-1]
//                 ^ X(r,c) ^ X(r,c+1) ^ X(r+1,c) ^ X(r+1,c+1)
//   S'x(r,c)[t] = Sx ^ M(r,c)[t] ^ M(r,c)[t-1] ^ H(r,c)[t] ^ H(r,c-2)[t-1]
//                 ^ Z(r,c) ^ Z(r,c+1) ^ Z(r+1,c) ^ Z(r+1,c+1)
// The Z-detector equation is the published one. The X-detector hook direction
// (two columns to the right, one round later) is read from the published hook
// example (3,4,t)-(5,4,t+1); the text only says it differs from the Z case.
// Predictions of round t-1 are kept in flip-flops. Predictions outside the
// region (row N, column N, rows N+1 and columns -2,-1 for hooks) come from the
// neighbouring boards on e_halo. Detectors are updated only where vmask_z /
// vmask_x mark a real vertex; elsewhere S' is 0.
//
// The local logical state L^L_S is updated at the same time: an X (or Y) error
// on a data qubit of the logical-Z support (lz_mask) flips logical Z, a Z error
// on the logical-X support (lx_mask) flips logical X. Restricting this to data
// errors, and clearing L^L_S at the feedback tick, are this design's choices.
//
// Timing: when `en` is high, s_in and the predictions belong to the same round;
// s_out, the defect counts and ll_* are registered and valid (out_vld) in the
// next cycle.
module nldu_syndrome_update
  import nldu_pkg::*;
#(
  parameter int unsigned N = 9
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       en,
  input  logic [1:0] s_in   [N*N][2],       // embedded detectors (0, 1, or 2 virtual)
  input  err_t       e_core [N*N],
  input  err_t       e_halo [(N+4)*(N+4)],  // (r+2)*(N+4)+(c+2), r,c in -2..N+1
  input  logic       vmask_z [N*N],
  input  logic       vmask_x [N*N],
  input  logic       lz_mask [N*N],
  input  logic       lx_mask [N*N],
  input  logic       tick,                  // feedback tick: clear L^L_S after use
  output logic       s_out  [N*N][2],
  output logic       out_vld,
  output logic [15:0] defects_in,
  output logic [15:0] defects_out,
  output logic       ll_z,
  output logic       ll_x
);

  localparam int unsigned NE = N + 4;

  logic m_prev [N*N];
  logic h_prev [NE*NE];

  function automatic err_t e_at(input int r, input int c, input err_t core[N*N], input err_t halo[NE*NE]);
    if (r >= 0 && r < int'(N) && c >= 0 && c < int'(N)) return core[r*int'(N) + c];
    else                                           return halo[(r+2)*int'(NE) + (c+2)];
  endfunction

  logic h_now [NE*NE];
  always_comb begin
    for (int r = -2; r < int'(N) + 2; r++)
      for (int c = -2; c < int'(N) + 2; c++)
        h_now[(r+2)*int'(NE) + (c+2)] = e_at(r, c, e_core, e_halo).h;
  end

  logic        s_nxt [N*N][2];
  logic        lz_flip, lx_flip;
  logic [15:0] cnt_in, cnt_out;

  always_comb begin
    lz_flip = 1'b0;
    lx_flip = 1'b0;
    cnt_in  = '0;
    cnt_out = '0;
    for (int r = 0; r < int'(N); r++) begin
      for (int c = 0; c < int'(N); c++) begin
        int   p;
        err_t e00, e01, e10, e11;
        logic meas, zdet, xdet;
        p    = r*int'(N) + c;
        e00  = e_core[p];
        e01  = e_at(r,   c+1, e_core, e_halo);
        e10  = e_at(r+1, c,   e_core, e_halo);
        e11  = e_at(r+1, c+1, e_core, e_halo);
        meas = e00.m ^ m_prev[p] ^ e00.h;
        zdet = (s_in[p][CH_Z] == 2'd1) ^ meas ^ h_prev[(r+4)*int'(NE) + (c+2)]
               ^ e00.x ^ e01.x ^ e10.x ^ e11.x;
        xdet = (s_in[p][CH_X] == 2'd1) ^ meas ^ h_prev[(r+2)*int'(NE) + c]
               ^ e00.z ^ e01.z ^ e10.z ^ e11.z;
        s_nxt[p][CH_Z] = vmask_z[p] && zdet;
        s_nxt[p][CH_X] = vmask_x[p] && xdet;
        cnt_in  = cnt_in  + 16'(vmask_z[p] && (s_in[p][CH_Z] == 2'd1))
                          + 16'(vmask_x[p] && (s_in[p][CH_X] == 2'd1));
        cnt_out = cnt_out + 16'(s_nxt[p][CH_Z]) + 16'(s_nxt[p][CH_X]);
        lz_flip = lz_flip ^ (lz_mask[p] && e00.x);
        lx_flip = lx_flip ^ (lx_mask[p] && e00.z);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_vld     <= 1'b0;
      defects_in  <= '0;
      defects_out <= '0;
      ll_z        <= 1'b0;
      ll_x        <= 1'b0;
      for (int p = 0; p < int'(N*N); p++) begin
        m_prev[p]   <= 1'b0;
        s_out[p][0] <= 1'b0;
        s_out[p][1] <= 1'b0;
      end
      for (int q = 0; q < int'(NE*NE); q++) h_prev[q] <= 1'b0;
    end else begin
      out_vld <= en;
      if (en) begin
        s_out       <= s_nxt;
        defects_in  <= cnt_in;
        defects_out <= cnt_out;
        for (int p = 0; p < int'(N*N); p++) m_prev[p] <= e_core[p].m;
        h_prev <= h_now;
      end
      if (tick) begin
        ll_z <= en && lz_flip;
        ll_x <= en && lx_flip;
      end else if (en) begin
        ll_z <= ll_z ^ lz_flip;
        ll_x <= ll_x ^ lx_flip;
      end
    end
  end

endmodule
