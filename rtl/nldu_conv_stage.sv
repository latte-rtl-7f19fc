// nldu_conv_stage: one streaming inference stage (a Conv3d 3x3x3 layer).
//
// Each syndrome round the previous stage (or the embedded syndrome tensor)
// delivers a frame of IN_DIM x IN_DIM positions with K_IN channels. The stage
// computes the "valid" spatial convolution, so its output frame is
// OUT_DIM = IN_DIM - 2 positions wide, and the temporal part of the kernel is
// handled inside the ICUs: the output written after round t covers the
// rounds t-2..t. Three such stages therefore delay the network output by three
// rounds, the fixed pipeline delay of the published latency model.
//
// The stage has K_OUT OCUs with P PEs each, as in the published design. The P
// PEs of all OCUs step through the output positions in groups of P; one group
// takes 28 cycles, the 27 kernel taps plus one cycle to combine REG and FIFO,
// so a round needs ceil(OUT_DIM^2/P) groups. The state machine issues one tap
// address per cycle to the weight memory (one cycle read latency) and loads
// each PE's window value into a register in the same cycle, so the ICUs see
// weight and data together. Window order, address layout and the input latch
// are this design's choices.
//
// Timing: `start` is sampled when the stage is idle; the input frame is latched
// then, so the source may change it afterwards. `done` is a one-cycle pulse
// 28*G + 3 cycles after start, when out_frame holds the new round; out_frame
// keeps it until the next round's groups are written. A start while busy is
// dropped and flagged on `overrun` (a backlog: the stage took longer than one
// round).
module nldu_conv_stage
  import nldu_pkg::*;
#(
  parameter int unsigned K_IN   = 2,
  parameter int unsigned K_OUT  = 7,
  parameter int unsigned P      = 52,
  parameter int unsigned IN_DIM = 15,
  parameter bit          RELU   = 1'b1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  act_t         in_frame  [IN_DIM*IN_DIM][K_IN],
  input  logic [SHW-1:0] shift,
  output act_t         out_frame [(IN_DIM-2)*(IN_DIM-2)][K_OUT],
  output logic         busy,
  output logic         done,
  output logic         overrun,
  // weight load port, see nldu_weight_mem
  input  logic         wt_we,
  input  logic [15:0]  wt_addr,
  input  logic [15:0]  wt_data
);

  localparam int unsigned OUT_DIM = IN_DIM - 2;
  localparam int unsigned NPOS    = OUT_DIM * OUT_DIM;
  localparam int unsigned G       = ceil_div(NPOS, P);
  localparam int unsigned SW      = $clog2(G + 1);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_FIN, S_DRAIN} state_e;
  state_e state;

  act_t            fr [IN_DIM*IN_DIM][K_IN];   // latched input round
  logic [4:0]      tap;                        // 0..26, slice-major order
  logic [SW-1:0]   grp;
  logic [$clog2(KTAPS+1)-1:0] raddr;

  // pipeline registers between the issue cycle and the ICUs
  logic            mac_q, first_q, fin_q;
  logic [1:0]      slice_q;
  logic [SW-1:0]   slot_q;
  act_t            d_q [P][K_IN];
  logic [SW-1:0]   cap_grp;

  wgt_t            wrd  [K_IN][K_OUT];
  bias_t           bias [K_OUT];
  wgt_t            w_k  [K_OUT][K_IN];
  act_t            ocu_out [K_OUT][P];
  logic            ocu_vld [K_OUT];

  // ---------------- state machine ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      tap     <= '0;
      grp     <= '0;
      mac_q   <= 1'b0;
      first_q <= 1'b0;
      fin_q   <= 1'b0;
      slice_q <= '0;
      slot_q  <= '0;
      cap_grp <= '0;
      done    <= 1'b0;
      overrun <= 1'b0;
    end else begin
      mac_q   <= 1'b0;
      fin_q   <= 1'b0;
      done    <= 1'b0;
      overrun <= start && (state != S_IDLE);
      if (ocu_vld[0]) begin
        if (32'(cap_grp) == G - 1) done <= 1'b1;
      end
      if (fin_q) cap_grp <= slot_q;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_RUN;
          tap   <= '0;
          grp   <= '0;
        end
        S_RUN: begin
          mac_q   <= 1'b1;
          first_q <= (tap == 5'd0) || (tap == 5'd9) || (tap == 5'd18);
          slice_q <= (tap < 5'd9) ? 2'd0 : (tap < 5'd18) ? 2'd1 : 2'd2;
          if (tap == 5'd26) state <= S_FIN;
          else              tap   <= tap + 5'd1;
        end
        S_FIN: begin
          fin_q  <= 1'b1;
          slot_q <= grp;
          tap    <= '0;
          if (32'(grp) == G - 1) begin
            state <= S_DRAIN;
          end else begin
            grp   <= grp + 1'b1;
            state <= S_RUN;
          end
        end
        S_DRAIN: if (done) state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // input latch
  always_ff @(posedge clk) begin
    if (state == S_IDLE && start) fr <= in_frame;
  end

  // weight address of the tap: z = 2 - slice, tap = z*9 + x*3 + y
  always_comb begin
    int unsigned s, xy;
    s  = 32'(tap) / KXY;
    xy = 32'(tap) % KXY;
    raddr = ($clog2(KTAPS+1))'((2 - s) * KXY + xy);
  end

  // window fetch: PE p of group g works on output position g*P + p. For a
  // fixed PE only G*9 frame positions can ever be needed, so the fetch is an
  // AND-OR selector over those constant positions instead of a full
  // IN_DIM^2-way multiplexer with run-time address arithmetic.
  logic [3:0] txy;
  assign txy = 4'(32'(tap) % KXY);

  for (genvar p = 0; p < int'(P); p++) begin : g_fetch
    for (genvar l = 0; l < int'(K_IN); l++) begin : g_ch
      always_ff @(posedge clk) begin
        act_t v;
        v = '0;
        for (int g = 0; g < int'(G); g++)
          for (int xy = 0; xy < int'(KXY); xy++)
            if (g * int'(P) + p < int'(NPOS))
              if (32'(grp) == g && 32'(txy) == xy)
                v = v | fr[((g * int'(P) + p) / int'(OUT_DIM) + xy / 3) * int'(IN_DIM)
                           + (g * int'(P) + p) % int'(OUT_DIM) + xy % 3][l];
        d_q[p][l] <= v;
      end
    end
  end

  nldu_weight_mem #(.K_IN(K_IN), .K_OUT(K_OUT), .NTAP(KTAPS)) u_wmem (
    .clk, .we(wt_we), .waddr(wt_addr), .wdata(wt_data),
    .raddr, .rdata(wrd), .bias
  );

  always_comb begin
    for (int k = 0; k < int'(K_OUT); k++)
      for (int l = 0; l < int'(K_IN); l++)
        w_k[k][l] = wrd[l][k];
  end

  for (genvar k = 0; k < int'(K_OUT); k++) begin : g_ocu
    nldu_ocu #(.K_IN(K_IN), .P(P), .NSLOT(G), .RELU(RELU)) u_ocu (
      .clk, .rst_n, .mac(mac_q), .first(first_q), .slice(slice_q), .fin(fin_q),
      .slot(slot_q), .d(d_q), .w(w_k[k]), .bias(bias[k]), .shift,
      .out(ocu_out[k]), .out_vld(ocu_vld[k])
    );
  end

  // serial-to-parallel write of a finished group into the output frame
  for (genvar p = 0; p < int'(P); p++) begin : g_wr
    always_ff @(posedge clk) begin
      if (ocu_vld[0])
        for (int g = 0; g < int'(G); g++)
          if (g * int'(P) + p < int'(NPOS) && 32'(cap_grp) == g)
            for (int k = 0; k < int'(K_OUT); k++)
              out_frame[g * int'(P) + p][k] <= ocu_out[k][p];
    end
  end

endmodule
