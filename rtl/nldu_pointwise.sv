// nldu_pointwise: layer 4 of the network, a 1x1x1 convolution from K3 = 7
// channels to the six scores I, X, Y, Z, M, H.
//
// Layer 4 runs in the third stage after layer 3, since it only combines the
// channels of one position. Following the published OCU4 datapath (parallel to
// serial, one multiplier, one adder, REG), each of the six output units per
// lane takes the K_IN inputs one per cycle and accumulates them; LANES
// positions are processed at once. Each group of LANES positions takes
// K_IN + 1 cycles. The result is requantised to signed INT8 without ReLU; the
// scores are compared by the post-processing as INT8 values. The number of
// lanes is this design's choice (the paper gives no count for OCU4).
//
// Timing: `start` latches in_frame when idle; `done` pulses
// G*(K_IN+1) + 2 cycles later, G = ceil(NPOS/LANES), with out_frame valid.
module nldu_pointwise
  import nldu_pkg::*;
#(
  parameter int unsigned K_IN  = 7,
  parameter int unsigned K_OUT = 6,
  parameter int unsigned NPOS  = 81,
  parameter int unsigned LANES = 27
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  act_t          in_frame  [NPOS][K_IN],
  input  logic [SHW-1:0] shift,
  output act_t          out_frame [NPOS][K_OUT],
  output logic          busy,
  output logic          done,
  input  logic          wt_we,
  input  logic [15:0]   wt_addr,
  input  logic [15:0]   wt_data
);

  localparam int unsigned G  = ceil_div(NPOS, LANES);
  localparam int unsigned GW = $clog2(G + 1);
  localparam int unsigned CW = $clog2(K_IN + 1);

  typedef enum logic [1:0] {S_IDLE, S_MAC, S_WR, S_DONE} state_e;
  state_e state;

  act_t          fr  [NPOS][K_IN];
  logic [GW-1:0] grp;
  logic [CW-1:0] ch;
  acc_t          acc [LANES][K_OUT];
  wgt_t          wrd [K_IN][K_OUT];
  bias_t         bias [K_OUT];

  nldu_weight_mem #(.K_IN(K_IN), .K_OUT(K_OUT), .NTAP(1)) u_wmem (
    .clk, .we(wt_we), .waddr(wt_addr), .wdata(wt_data),
    .raddr('0), .rdata(wrd), .bias
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      grp   <= '0;
      ch    <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_MAC;
          grp   <= '0;
          ch    <= '0;
        end
        S_MAC: begin
          if (32'(ch) == K_IN - 1) state <= S_WR;
          else                     ch    <= ch + 1'b1;
        end
        S_WR: begin
          ch <= '0;
          if (32'(grp) == G - 1) state <= S_DONE;
          else begin
            grp   <= grp + 1'b1;
            state <= S_MAC;
          end
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (state == S_IDLE && start) fr <= in_frame;
  end

  // serial multiply-accumulate, one input channel per cycle. Lane ln of
  // group g works on position g*LANES + ln; the operand is picked by an AND-OR
  // selector over the G constant positions of the lane.
  always_ff @(posedge clk) begin
    if (state == S_MAC) begin
      for (int ln = 0; ln < int'(LANES); ln++) begin
        act_t x;
        x = '0;
        for (int g = 0; g < int'(G); g++)
          if (g * int'(LANES) + ln < int'(NPOS) && 32'(grp) == g)
            for (int c = 0; c < int'(K_IN); c++)
              if (32'(ch) == c) x = x | fr[g * int'(LANES) + ln][c];
        for (int k = 0; k < int'(K_OUT); k++) begin
          acc_t prod;
          prod = acc_t'(x) * acc_t'(wrd[ch][k]);
          acc[ln][k] <= ((ch == '0) ? acc_t'(bias[k]) : acc[ln][k]) + prod;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (state == S_WR) begin
      for (int ln = 0; ln < int'(LANES); ln++)
        for (int g = 0; g < int'(G); g++)
          if (g * int'(LANES) + ln < int'(NPOS) && 32'(grp) == g)
            for (int k = 0; k < int'(K_OUT); k++)
              out_frame[g * int'(LANES) + ln][k] <= requant(acc[ln][k], shift);
    end
  end

endmodule
