// nldu_halo_sync: pre-inference broadcast between neighbouring boards.
//
// The network's receptive field is 7 x 7 x 7, so the three valid
// convolutions of one board need the syndromes of a border HALO = 3 positions
// wide around its own N x N region, i.e. (N+6)^2 - N^2 values that belong to
// the neighbouring boards. Each board broadcasts its own embedded round
// (bcast, bcast_vld) and receives the neighbours' values on halo/halo_vld,
// already arranged in the (N+6) x (N+6) frame (positions inside the own region
// are ignored). This block waits until both the own round and the halo of the
// same round have arrived, in either order, and then issues the full frame to
// the first inference stage. With halo_en low (a single board holding the whole
// patch) the border is zero and only the own round is awaited. The published
// design broadcasts over GPIO pins with a synchronising state machine; the
// frame layout and this two-flag handshake are this design's own.
//
// Timing: frame/frame_vld one cycle after the later of the two arrivals.
module nldu_halo_sync
  import nldu_pkg::*;
#(
  parameter int unsigned N = 9
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       halo_en,
  input  logic [1:0] local_s   [N*N][2],
  input  logic       local_vld,
  input  logic [1:0] halo      [(N+2*HALO)*(N+2*HALO)][2],
  input  logic       halo_vld,
  output logic [1:0] bcast     [N*N][2],
  output logic       bcast_vld,
  output act_t       frame     [(N+2*HALO)*(N+2*HALO)][K0],
  output logic       frame_vld,
  output logic       halo_late    // own round arrived again before the halo: lost sync
);

  localparam int unsigned M = N + 2*HALO;

  logic [1:0] loc_q  [N*N][2];
  logic [1:0] halo_q [M*M][2];
  logic       have_loc, have_halo;

  logic got_loc, got_halo;
  assign got_loc  = have_loc  || local_vld;
  assign got_halo = !halo_en || have_halo || halo_vld;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have_loc  <= 1'b0;
      have_halo <= 1'b0;
      frame_vld <= 1'b0;
      bcast_vld <= 1'b0;
      halo_late <= 1'b0;
    end else begin
      frame_vld <= 1'b0;
      bcast_vld <= local_vld;
      halo_late <= local_vld && have_loc;
      if (got_loc && got_halo) begin
        frame_vld <= 1'b1;
        have_loc  <= 1'b0;
        have_halo <= 1'b0;
      end else begin
        if (local_vld) have_loc  <= 1'b1;
        if (halo_vld)  have_halo <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (local_vld) begin
      loc_q <= local_s;
      bcast <= local_s;
    end
    if (halo_vld) halo_q <= halo;
  end

  // assemble the frame from whichever copy is current
  always_ff @(posedge clk) begin
    if (got_loc && got_halo) begin
      for (int r = 0; r < int'(M); r++) begin
        for (int c = 0; c < int'(M); c++) begin
          int q;
          q = r*int'(M) + c;
          for (int ch = 0; ch < int'(K0); ch++) begin
            logic [1:0] v;
            if (r >= int'(HALO) && r < int'(HALO+N) && c >= int'(HALO) && c < int'(HALO+N))
              v = local_vld ? local_s[(r-int'(HALO))*int'(N) + (c-int'(HALO))][ch]
                            : loc_q[(r-int'(HALO))*int'(N) + (c-int'(HALO))][ch];
            else if (!halo_en)
              v = 2'd0;
            else
              v = halo_vld ? halo[q][ch] : halo_q[q][ch];
            frame[q][ch] <= act_t'(v);
          end
        end
      end
    end
  end

endmodule
