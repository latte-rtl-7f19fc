// nldu_top: neural local decoding unit of one control board.
//
// Syndromes of an N x N region arrive once per round. They are turned into
// detectors and embedded (nldu_syndrome_embed). The halo of the neighbouring
// boards is added (nldu_halo_sync). A three-stage streaming network removes
// the errors it recognises: ST1 is layer 1, ST2 layer 2, ST3 layers 3 and 4.
// Then the post-processing (nldu_dequant, nldu_syndrome_update) produces the
// reduced syndrome S' that the host decoder reads over AXI4-Lite
// (nldu_axil_slave), together with the board's local logical flips L^L_S.
//
// Pipelining: each stage starts when the one before finishes and works on
// its own copy of the input, so the three stages work on three consecutive
// rounds at once. Every stage must finish within one round (1 us, 300 cycles
// at the published 300 MHz); at the default sizes they take 28*G+3 cycles with
// G = 4, 4, 3 position groups, plus 26 cycles for layer 4. The network's
// window is centred one round back per stage, so the predictions completed
// after input round t belong to round t-3. The embedded detectors are kept in
// a ring of 8 rounds and read back by that round number. Predictions for
// rounds before 0 are dropped. The host must keep sending rounds: the last
// three rounds of an experiment leave the pipeline only when three more
// rounds (for instance all-zero ones) have been sent.
//
// The feedback tick (tick) takes the local logical flips accumulated since
// the previous tick, XORs them with the host's global state L^G_S
// (register GLOBAL_L) and presents the result on logical_out for one cycle.
// Then L^L_S restarts from zero.
//
// Published: region N = 9, the layer shapes, P1..P3 = 52/33/27 PEs, the
// 28-cycle group and the post-processing equations. This design's own choices:
// layer-4 lanes (27), the ring depth, the register map and the handshakes.
// The predictions of neighbouring boards (e_halo) are used when halo_en is set
// and e_halo_vld has arrived for the round.
module nldu_top
  import nldu_pkg::*;
#(
  parameter int unsigned N        = N_DEF,
  parameter int unsigned P1       = 52,
  parameter int unsigned P2       = 33,
  parameter int unsigned P3       = 27,
  parameter int unsigned L4_LANES = 27
) (
  input  logic         clk,
  input  logic         rst_n,
  // readout of one round
  input  logic         meas_vld,
  input  logic         meas     [N*N][2],
  // patch geometry (static)
  input  logic         vmask_x  [N*N],
  input  logic         vmask_z  [N*N],
  input  logic         virt_x   [N*N],
  input  logic         virt_z   [N*N],
  input  logic         lz_mask  [N*N],
  input  logic         lx_mask  [N*N],
  // pre-inference broadcast to and from neighbouring boards
  output logic [1:0]   bcast    [N*N][2],
  output logic         bcast_vld,
  input  logic [1:0]   halo     [(N+6)*(N+6)][2],
  input  logic         halo_vld,
  // post-inference prediction exchange
  output err_t         e_out    [N*N],
  output logic         e_out_vld,
  input  err_t         e_halo   [(N+4)*(N+4)],
  input  logic         e_halo_vld,
  // reduced syndromes as a stream (also readable over AXI)
  output logic         sp_out   [N*N][2],
  output logic         sp_vld,
  output logic [31:0]  sp_round,
  // logical feedback
  input  logic         tick,
  output logic [1:0]   logical_out,
  output logic         logical_vld,
  output logic         overrun,
  // AXI4-Lite slave
  input  logic [11:0]  s_awaddr,
  input  logic         s_awvalid,
  output logic         s_awready,
  input  logic [31:0]  s_wdata,
  input  logic [3:0]   s_wstrb,
  input  logic         s_wvalid,
  output logic         s_wready,
  output logic [1:0]   s_bresp,
  output logic         s_bvalid,
  input  logic         s_bready,
  input  logic [11:0]  s_araddr,
  input  logic         s_arvalid,
  output logic         s_arready,
  output logic [31:0]  s_rdata,
  output logic [1:0]   s_rresp,
  output logic         s_rvalid,
  input  logic         s_rready
);

  localparam int unsigned M    = N + 2*HALO;   // ST1 input side
  localparam int unsigned NPOS = N * N;
  localparam int unsigned RING = 8;

  // ---------------- configuration from the host ----------------
  logic           halo_en;
  logic [1:0]     global_l;
  act_t           theta_m, theta_h;
  logic [SHW-1:0] shift [4];
  logic           wt_we;
  logic [1:0]     wt_stage;
  logic [15:0]    wt_addr, wt_data;

  // ---------------- embedding and halo ----------------
  logic [1:0] s_emb [NPOS][2];
  logic       s_emb_vld;
  act_t       frame0 [M*M][K0];
  logic       frame0_vld;
  logic       halo_late;

  nldu_syndrome_embed #(.N(N)) u_embed (
    .clk, .rst_n, .meas_vld, .meas, .vmask_x, .vmask_z, .virt_x, .virt_z,
    .s(s_emb), .s_vld(s_emb_vld)
  );

  nldu_halo_sync #(.N(N)) u_halo (
    .clk, .rst_n, .halo_en, .local_s(s_emb), .local_vld(s_emb_vld),
    .halo, .halo_vld, .bcast, .bcast_vld, .frame(frame0), .frame_vld(frame0_vld),
    .halo_late
  );

  // round numbers travelling with the frames
  logic [31:0] rnd_in, tag1, tag2, tag3;
  logic [1:0]  ring [RING][NPOS][2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rnd_in <= '0;
    else if (s_emb_vld) rnd_in <= rnd_in + 1;
  end

  always_ff @(posedge clk) begin
    if (s_emb_vld) ring[rnd_in[$clog2(RING)-1:0]] <= s_emb;
  end

  // ---------------- three inference stages ----------------
  act_t l1 [(M-2)*(M-2)][K1];
  act_t l2 [(M-4)*(M-4)][K2];
  act_t l3 [NPOS][K3];
  act_t sc [NPOS][K4];
  logic st1_done, st2_done, st3_done, pw_done;
  logic st1_busy, st2_busy, st3_busy, pw_busy;
  logic ovr1, ovr2, ovr3;

  // frame0_vld comes one cycle after the round was counted in rnd_in
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tag1 <= '0; tag2 <= '0; tag3 <= '0;
    end else begin
      if (frame0_vld && !st1_busy) tag1 <= rnd_in - 1;
      if (st1_done) tag2 <= tag1;
      if (st2_done) tag3 <= tag2;
    end
  end

  nldu_conv_stage #(.K_IN(K0), .K_OUT(K1), .P(P1), .IN_DIM(M)) u_st1 (
    .clk, .rst_n, .start(frame0_vld), .in_frame(frame0), .shift(shift[0]),
    .out_frame(l1), .busy(st1_busy), .done(st1_done), .overrun(ovr1),
    .wt_we(wt_we && wt_stage == WSTAGE_L1), .wt_addr, .wt_data
  );

  nldu_conv_stage #(.K_IN(K1), .K_OUT(K2), .P(P2), .IN_DIM(M-2)) u_st2 (
    .clk, .rst_n, .start(st1_done), .in_frame(l1), .shift(shift[1]),
    .out_frame(l2), .busy(st2_busy), .done(st2_done), .overrun(ovr2),
    .wt_we(wt_we && wt_stage == WSTAGE_L2), .wt_addr, .wt_data
  );

  nldu_conv_stage #(.K_IN(K2), .K_OUT(K3), .P(P3), .IN_DIM(M-4)) u_st3 (
    .clk, .rst_n, .start(st2_done), .in_frame(l2), .shift(shift[2]),
    .out_frame(l3), .busy(st3_busy), .done(st3_done), .overrun(ovr3),
    .wt_we(wt_we && wt_stage == WSTAGE_L3), .wt_addr, .wt_data
  );

  nldu_pointwise #(.K_IN(K3), .K_OUT(K4), .NPOS(NPOS), .LANES(L4_LANES)) u_l4 (
    .clk, .rst_n, .start(st3_done), .in_frame(l3), .shift(shift[3]),
    .out_frame(sc), .busy(pw_busy), .done(pw_done),
    .wt_we(wt_we && wt_stage == WSTAGE_L4), .wt_addr, .wt_data
  );

  // layer 4 of a round must be finished before layer 3 of the next one is
  logic ovr4;
  assign ovr4    = st3_done && pw_busy;
  assign overrun = ovr1 || ovr2 || ovr3 || ovr4 || halo_late;

  // ---------------- post-processing ----------------
  err_t e_now [NPOS];

  nldu_dequant #(.NPOS(NPOS)) u_deq (
    .score(sc), .theta_m, .theta_h, .e(e_now)
  );

  // wait for the neighbours' predictions of the same round
  logic        have_pred, have_ehalo, upd_en;
  logic [31:0] pred_round;
  err_t        e_halo_q [(N+4)*(N+4)];
  err_t        e_halo_use [(N+4)*(N+4)];

  assign upd_en = (have_pred || pw_done) && (!halo_en || have_ehalo || e_halo_vld);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have_pred  <= 1'b0;
      have_ehalo <= 1'b0;
      pred_round <= '0;
      e_out_vld  <= 1'b0;
    end else begin
      e_out_vld <= pw_done;
      if (pw_done) pred_round <= tag3 - 3;
      if (upd_en) begin
        have_pred  <= 1'b0;
        have_ehalo <= 1'b0;
      end else begin
        if (pw_done)    have_pred  <= 1'b1;
        if (e_halo_vld) have_ehalo <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (pw_done) e_out <= e_now;
    if (e_halo_vld) e_halo_q <= e_halo;
  end

  always_comb begin
    for (int q = 0; q < int'((N+4)*(N+4)); q++)
      e_halo_use[q] = !halo_en ? err_t'(0) : (e_halo_vld ? e_halo[q] : e_halo_q[q]);
  end

  logic [31:0] upd_round;
  logic        upd_fire;
  err_t        e_cur [NPOS];
  assign upd_round = pw_done ? tag3 - 3 : pred_round;
  assign e_cur     = pw_done ? e_now : e_out;
  // the first three network outputs cover rounds before the experiment
  assign upd_fire  = upd_en && ($signed(upd_round) >= 0);

  logic        su_vld;
  logic [15:0] d_in, d_out;
  logic        ll_z, ll_x;

  nldu_syndrome_update #(.N(N)) u_upd (
    .clk, .rst_n, .en(upd_fire), .s_in(ring[upd_round[$clog2(RING)-1:0]]),
    .e_core(e_cur), .e_halo(e_halo_use), .vmask_z, .vmask_x, .lz_mask, .lx_mask,
    .tick, .s_out(sp_out), .out_vld(su_vld), .defects_in(d_in), .defects_out(d_out),
    .ll_z, .ll_x
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sp_round    <= '0;
      logical_out <= '0;
      logical_vld <= 1'b0;
    end else begin
      if (upd_fire) sp_round <= upd_round;
      logical_vld <= tick;
      if (tick) logical_out <= {ll_x, ll_z} ^ global_l;
    end
  end
  assign sp_vld = su_vld;

  // ---------------- host interface ----------------
  logic [2*NPOS-1:0] sp_bits;
  always_comb begin
    for (int p = 0; p < int'(NPOS); p++) begin
      sp_bits[2*p]     = sp_out[p][0];
      sp_bits[2*p + 1] = sp_out[p][1];
    end
  end

  nldu_axil_slave #(.NSBITS(2*NPOS)) u_axi (
    .clk, .rst_n,
    .s_awaddr, .s_awvalid, .s_awready, .s_wdata, .s_wstrb, .s_wvalid, .s_wready,
    .s_bresp, .s_bvalid, .s_bready, .s_araddr, .s_arvalid, .s_arready,
    .s_rdata, .s_rresp, .s_rvalid, .s_rready,
    .sp_bits, .sp_vld, .sp_round, .defects_in(d_in), .defects_out(d_out),
    .local_l({ll_x, ll_z}), .overrun,
    .halo_en, .global_l, .theta_m, .theta_h, .shift,
    .wt_we, .wt_stage, .wt_addr, .wt_data
  );

endmodule
