// nldu_icu: input-channel unit, the innermost block of the streaming convolution.
//
// One ICU computes, for one input channel l and one output channel k, the
// contribution of a 3x3x3 kernel to the outputs of NSLOT output positions while
// syndrome rounds stream in one at a time. A round is never revisited: every
// input value of round t is multiplied by the three time slices of the kernel
// as soon as it arrives. The 9 taps of slice z=2 are summed in REG; that sum
// completes the output whose window ends at round t. The sums of slices z=1
// and z=0 are pushed into a FIFO and popped one and two rounds later. So the
// output for the window (t-2, t-1, t) is
//     y = REG(t, z=2) + pend1,   pend1 = S(t-1, z=1) + S(t-2, z=0).
// The FIFO, REG and the first-iteration multiplexer follow the published
// microarchitecture. Here the FIFO is indexed by the slot of the position
// group, and the z=0 partial sum is folded into the z=1 entry when that entry
// is written; both are this design's choices.
//
// Timing (driven by the stage state machine, one tap per cycle):
//   mac      : multiply d*w and accumulate; `first` restarts the accumulator
//              at tap 0, 9 and 18 of a position group (slices z=2, 1, 0)
//   fin      : the cycle after tap 26; y is written and the FIFO entry of
//              `slot` is popped and pushed; y_vld is high in the next cycle
//   Reset clears the FIFO, which is the zero padding before the first round.
module nldu_icu
  import nldu_pkg::*;
#(
  parameter int unsigned NSLOT = 4   // position groups handled by this ICU
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      mac,
  input  logic                      first,
  input  logic [1:0]                slice,  // 0: z=2, 1: z=1, 2: z=0
  input  logic                      fin,
  input  logic [$clog2(NSLOT+1)-1:0] slot,
  input  act_t                      d,
  input  wgt_t                      w,
  output acc_t                      y,
  output logic                      y_vld
);

  acc_t acc;          // FMA accumulator
  acc_t reg2;         // REG: slice z=2 sum of the current round
  acc_t s1;           // slice z=1 sum, waits for fin
  acc_t pend1 [NSLOT];  // FIFO entry popped next round
  acc_t pend2 [NSLOT];  // FIFO entry popped in two rounds
  acc_t prod;

  assign prod = acc_t'(d) * acc_t'(w);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc   <= '0;
      reg2  <= '0;
      s1    <= '0;
      y     <= '0;
      y_vld <= 1'b0;
      for (int i = 0; i < int'(NSLOT); i++) begin
        pend1[i] <= '0;
        pend2[i] <= '0;
      end
    end else begin
      y_vld <= 1'b0;
      if (mac) begin
        if (first) begin
          // the finished slice leaves the accumulator
          if (slice == 2'd1) reg2 <= acc;
          if (slice == 2'd2) s1   <= acc;
          acc <= prod;
        end else begin
          acc <= acc + prod;
        end
      end
      if (fin) begin
        // acc now holds the z=0 sum of this round
        for (int i = 0; i < int'(NSLOT); i++)
          if (32'(slot) == i) begin
            y        <= reg2 + pend1[i];
            pend1[i] <= s1 + pend2[i];
            pend2[i] <= acc;
          end
        y_vld <= 1'b1;
      end
    end
  end

  // slot must stay in range whenever the FIFO is touched
  a_slot: assert property (@(posedge clk) disable iff (!rst_n) fin |-> (32'(slot) < NSLOT));

endmodule
