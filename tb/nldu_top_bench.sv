// nldu_top_bench: end-to-end bench of the NLDU, shared by the reduced-size and
// the full-size testbench.
//
// A host model loads random weights and biases for all four layers, the
// requantisation shifts, the thresholds, the halo enable and a global logical
// state over AXI4-Lite. Then NROUNDS syndrome rounds are streamed, one every
// ROUND_CYC cycles (300 = 1 us at 300 MHz): random sparse stabiliser flips on
// a rotated-surface-code-like geometry, plus random halo values from the
// neighbouring boards. The neighbours' predictions come back after a random
// delay. Every output round is compared bit for bit with an integer model:
// embedding, three Conv3d layers and a 1x1x1 layer over the round stream,
// virtual dequantisation and the update equations, all written in
// nldu_ref_pkg. Also checked: the constant latency from a round's readout
// to its predictions, the feedback tick result L^L xor L^G, an S' read back
// over AXI, and an overrun when two rounds arrive too close together. Each
// mechanism is counted and must occur at least once.
module nldu_top_bench
  import nldu_pkg::*;
  import nldu_ref_pkg::*;
#(
  parameter int N         = 9,
  parameter int P1        = 52,
  parameter int P2        = 33,
  parameter int P3        = 27,
  parameter int L4        = 27,
  parameter bit FULL      = 1'b1,   // instantiate the top with its own defaults
  parameter int NROUNDS   = 10,
  parameter int ROUND_CYC = 300
) ();

  localparam int M  = N + 6;
  localparam int NE = N + 4;
  localparam int SH1 = 3, SH2 = 7, SH3 = 7, SH4 = 4;
  localparam int THM = 20, THH = 24;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic         meas_vld = 0;
  logic         meas     [N*N][2];
  logic         vmask_x  [N*N], vmask_z [N*N], virt_x [N*N], virt_z [N*N], lz_mask [N*N], lx_mask [N*N];
  logic [1:0]   bcast    [N*N][2];
  logic         bcast_vld;
  logic [1:0]   halo     [M*M][2];
  logic         halo_vld = 0;
  err_t         e_out    [N*N];
  logic         e_out_vld;
  err_t         e_halo   [NE*NE];
  logic         e_halo_vld = 0;
  logic         sp_out   [N*N][2];
  logic         sp_vld;
  logic [31:0]  sp_round;
  logic         tick = 0;
  logic [1:0]   logical_out;
  logic         logical_vld;
  logic         overrun;
  logic [11:0]  s_awaddr = 0, s_araddr = 0;
  logic         s_awvalid = 0, s_wvalid = 0, s_bready = 0, s_arvalid = 0, s_rready = 0;
  logic [31:0]  s_wdata = 0;
  logic [3:0]   s_wstrb = 4'hF;
  logic         s_awready, s_wready, s_bvalid, s_arready, s_rvalid;
  logic [1:0]   s_bresp, s_rresp;
  logic [31:0]  s_rdata;

  logic [15:0]  dut_din, dut_dout;   // the update block's defect counters

  if (FULL) begin : g_full
    nldu_top u_dut (.*);
    assign dut_din = u_dut.d_in;
    assign dut_dout = u_dut.d_out;
  end else begin : g_small
    nldu_top #(.N(N), .P1(P1), .P2(P2), .P3(P3), .L4_LANES(L4)) u_dut (.*);
    assign dut_din = u_dut.d_in;
    assign dut_dout = u_dut.d_out;
  end

  int checks = 0, failures = 0;
  // mechanism counters
  int n_wload = 0, n_dropped = 0, n_halo_wait = 0, n_x = 0, n_z = 0, n_m = 0, n_h = 0;
  int n_reduced = 0, n_tick = 0, n_overrun = 0, n_axi_sp = 0, n_rounds_out = 0;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ---------------- AXI host ----------------
  task automatic axi_write(input logic [11:0] a, input logic [31:0] d);
    @(negedge clk);
    s_awaddr = a; s_awvalid = 1; s_wdata = d; s_wvalid = 1; s_bready = 1;
    do @(posedge clk); while (!(s_awready && s_wready));
    @(negedge clk);
    s_awvalid = 0; s_wvalid = 0;
    while (!s_bvalid) @(negedge clk);
    @(negedge clk);
    s_bready = 0;
  endtask

  task automatic axi_read(input logic [11:0] a, output logic [31:0] d);
    @(negedge clk);
    s_araddr = a; s_arvalid = 1; s_rready = 1;
    do @(posedge clk); while (!s_arready);
    @(negedge clk);
    s_arvalid = 0;
    while (!s_rvalid) @(negedge clk);
    d = s_rdata;
    @(negedge clk);
    s_rready = 0;
  endtask

  // ---------------- reference model state ----------------
  int w1[], w2[], w3[], w4[], b1[], b2[], b3[], b4[];
  int f_h[3][];      // input frames t-2, t-1, t
  int l1_h[3][];
  int l2_h[3][];
  int s_emb [int][];   // embedded detectors by round
  int e_core [int][];  // predictions by round (N*N)
  int e_hal [int][];   // neighbour predictions by round ((N+4)^2)
  bit vz[], vx[], lzm[], lxm[];
  bit prev_meas[];
  int e_prev_ext[];
  bit lz_acc, lx_acc;
  int meas_cyc [int];
  int cyc = 0;
  always @(posedge clk) cyc++;

  function automatic void load_rand(ref int w[], input int n, input int lo, input int hi);
    w = new[n];
    foreach (w[i]) w[i] = lo + int'($urandom_range(hi - lo));
  endfunction

  task automatic load_layer(input int st, input int w[], input int b[]);
    axi_write(12'h020, {14'h0, 2'(st), 16'h0});
    foreach (w[i]) begin axi_write(12'h024, 32'(w[i]) & 32'hFFFF); n_wload++; end
    foreach (b[i]) begin axi_write(12'h024, 32'(b[i]) & 32'hFFFF); n_wload++; end
  endtask

  // reference: one new input round through the network
  task automatic ref_round(input int t, input int frame[]);
    int l1[], l2[], l3[], sc[], z[];
    f_h[0] = f_h[1]; f_h[1] = f_h[2]; f_h[2] = frame;
    conv3(f_h[0], f_h[1], f_h[2], M, K0, K1, w1, b1, SH1, 1'b1, l1);
    l1_h[0] = l1_h[1]; l1_h[1] = l1_h[2]; l1_h[2] = l1;
    conv3(l1_h[0], l1_h[1], l1_h[2], M-2, K1, K2, w2, b2, SH2, 1'b1, l2);
    l2_h[0] = l2_h[1]; l2_h[1] = l2_h[2]; l2_h[2] = l2;
    conv3(l2_h[0], l2_h[1], l2_h[2], M-4, K2, K3, w3, b3, SH3, 1'b1, l3);
    conv1(l3, N*N, K3, K4, w4, b4, SH4, sc);
    z = new[N*N];
    for (int p = 0; p < N*N; p++) z[p] = pred(sc, p, THM, THH);
    e_core[t-3] = z;
  endtask

  // ---------------- neighbour predictions ----------------
  int npred = 0;
  bit checking = 1'b1;   // cleared for the overrun phase, whose rounds have no reference
  always @(posedge clk) begin
    if (rst_n && e_out_vld) begin
      automatic int r = npred - 3;
      automatic int eh[] = new[NE*NE];
      foreach (eh[i]) eh[i] = ($urandom_range(99) < 10) ? int'($urandom_range(15)) : 0;
      e_hal[r] = eh;
      npred++;
      if (r < 0) n_dropped++;
      fork
        begin
          automatic int dly = (npred % 3 == 0) ? 0 : int'($urandom_range(15)) + 1;
          repeat (dly) @(negedge clk);
          if (dly > 0) n_halo_wait++;
          @(negedge clk);
          for (int q = 0; q < NE*NE; q++) e_halo[q] = err_t'(eh[q]);
          e_halo_vld = 1;
          @(negedge clk);
          e_halo_vld = 0;
        end
      join_none
    end
  end

  // latency from readout to predictions must be the same every round
  int lat_first = -1;
  int lat_exp;
  always @(posedge clk) begin
    if (rst_n && e_out_vld && meas_cyc.exists(npred)) begin
      automatic int lat = cyc - meas_cyc[npred];
      if (lat_first < 0) begin
        lat_first = lat;
        $display("readout-to-prediction latency %0d cycles", lat);
      end
      chk(lat == lat_exp, $sformatf("latency of input round %0d: %0d, expected %0d", npred, lat, lat_exp));
    end
  end

  // ---------------- check every output round ----------------
  always @(posedge clk) begin
    if (rst_n && sp_vld && checking) begin
      automatic int r = int'(sp_round);
      automatic int en[] = new[NE*NE];
      automatic bit sp[];
      automatic bit lzf, lxf;
      automatic int cin, cout;
      if (!e_core.exists(r) || !s_emb.exists(r) || !e_hal.exists(r)) begin
        chk(0, $sformatf("output round %0d has no reference", r));
      end else begin
        // extended prediction plane: own region inside, neighbours outside
        en = e_hal[r];
        for (int rr = 0; rr < N; rr++) for (int c = 0; c < N; c++) en[(rr+2)*NE + c+2] = e_core[r][rr*N + c];
        syn_update(N, s_emb[r], en, e_prev_ext, vz, vx, lzm, lxm, sp, lzf, lxf, cin, cout);
        for (int p = 0; p < N*N; p++) begin
          chk(sp_out[p][0] == sp[p*2] && sp_out[p][1] == sp[p*2+1],
              $sformatf("round %0d pos %0d: S'=%b%b expected %b%b", r, p, sp_out[p][1], sp_out[p][0], sp[p*2+1], sp[p*2]));
          n_x += int'(e_core[r][p][3]); n_z += int'(e_core[r][p][2]);
          n_m += int'(e_core[r][p][1]); n_h += int'(e_core[r][p][0]);
        end
        chk(32'(int'(dut_din)) == cin && 32'(int'(dut_dout)) == cout,
            $sformatf("round %0d defect counts %0d/%0d expected %0d/%0d", r, int'(dut_din), int'(dut_dout), cin, cout));
        if (cout != cin) n_reduced++;
        lz_acc ^= lzf; lx_acc ^= lxf;
        e_prev_ext = en;
        n_rounds_out++;
      end
    end
  end

  initial begin
    repeat (ROUND_CYC * (NROUNDS + 20) + 400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- main sequence ----------------
  initial begin
    logic [31:0] rd;
    int g1, g2, g3, g4;
    g1 = ceil_div((M-2)*(M-2), P1); g2 = ceil_div((M-4)*(M-4), P2);
    g3 = ceil_div(N*N, P3);         g4 = ceil_div(N*N, L4);
    lat_exp = 3 + (28*g1 + 3) + (28*g2 + 3) + (28*g3 + 3) + (8*g4 + 2) + 1;

    // geometry: checkerboard, Z on even parity; the outer ring is virtual
    vz = new[N*N]; vx = new[N*N]; lzm = new[N*N]; lxm = new[N*N]; prev_meas = new[N*N*2];
    for (int r = 0; r < N; r++) for (int c = 0; c < N; c++) begin
      automatic int p = r*N + c;
      automatic bit on_edge = (r == 0) || (c == 0) || (r == N-1) || (c == N-1);
      virt_z[p] = ((r + c) % 2 == 0) && (c == 0 || c == N-1) && (r % 2 == 0);
      virt_x[p] = ((r + c) % 2 == 1) && (r == 0 || r == N-1) && (c % 2 == 1);
      vmask_z[p] = ((r + c) % 2 == 0) && !virt_z[p] && !(on_edge && (r == 0 || r == N-1));
      vmask_x[p] = ((r + c) % 2 == 1) && !virt_x[p] && !(on_edge && (c == 0 || c == N-1));
      lz_mask[p] = (c == 1);
      lx_mask[p] = (r == 1);
      vz[p] = vmask_z[p]; vx[p] = vmask_x[p]; lzm[p] = lz_mask[p]; lxm[p] = lx_mask[p];
      meas[p][0] = 0; meas[p][1] = 0;
      prev_meas[p*2] = 0; prev_meas[p*2+1] = 0;
    end
    for (int q = 0; q < M*M; q++) begin halo[q][0] = 0; halo[q][1] = 0; end
    for (int q = 0; q < NE*NE; q++) e_halo[q] = '0;
    for (int i = 0; i < 3; i++) begin
      f_h[i] = new[M*M*K0]; l1_h[i] = new[(M-2)*(M-2)*K1]; l2_h[i] = new[(M-4)*(M-4)*K2];
      foreach (f_h[i][j]) f_h[i][j] = 0;
      foreach (l1_h[i][j]) l1_h[i][j] = 0;
      foreach (l2_h[i][j]) l2_h[i][j] = 0;
    end
    e_prev_ext = new[NE*NE];
    foreach (e_prev_ext[i]) e_prev_ext[i] = 0;
    lz_acc = 0; lx_acc = 0;

    repeat (5) @(posedge clk);
    rst_n = 1;

    // ---- host configuration ----
    load_rand(w1, 27*K0*K1, -20, 20); load_rand(b1, K1, -30, 30);
    load_rand(w2, 27*K1*K2, -20, 20); load_rand(b2, K2, -300, 300);
    load_rand(w3, 27*K2*K3, -20, 20); load_rand(b3, K3, -300, 300);
    load_rand(w4, K3*K4, -20, 20);    load_rand(b4, K4, -100, 100);
    // put the M and H scores around their thresholds so both fire sometimes
    b4[4] = THM * (1 << SH4) + int'($urandom_range(60)) - 30;
    b4[5] = THH * (1 << SH4) + int'($urandom_range(60)) - 30;
    load_layer(0, w1, b1);
    load_layer(1, w2, b2);
    load_layer(2, w3, b3);
    load_layer(3, w4, b4);
    axi_write(12'h01C, {12'h0, 5'(SH4), 5'(SH3), 5'(SH2), 5'(SH1)});
    axi_write(12'h018, {16'h0, 8'(THH), 8'(THM)});
    axi_write(12'h014, 32'h2);
    axi_write(12'h000, 32'h1);

    // ---- stream rounds (three extra rounds flush the pipeline) ----
    for (int t = 0; t < NROUNDS + 3; t++) begin
      automatic int frame[] = new[M*M*K0];
      automatic int se[] = new[N*N*2];
      automatic bit last = (t >= NROUNDS);
      repeat (ROUND_CYC - 4) @(negedge clk);
      for (int p = 0; p < N*N; p++) for (int ch = 0; ch < 2; ch++) begin
        automatic bit v = (ch == 0) ? vmask_x[p] : vmask_z[p];
        automatic bit vi = (ch == 0) ? virt_x[p] : virt_z[p];
        automatic bit mv = last ? prev_meas[p*2+ch] : (prev_meas[p*2+ch] ^ ($urandom_range(99) < 8));
        meas[p][ch] = mv;
        se[p*2+ch] = vi ? 2 : v ? int'(mv ^ prev_meas[p*2+ch]) : 0;
        prev_meas[p*2+ch] = mv;
      end
      s_emb[t] = se;
      for (int q = 0; q < M*M; q++) for (int ch = 0; ch < 2; ch++)
        halo[q][ch] = ($urandom_range(99) < 6) ? 2'($urandom_range(2)) : 2'd0;
      for (int r = 0; r < M; r++) for (int c = 0; c < M; c++) for (int ch = 0; ch < 2; ch++) begin
        automatic bit in_reg = (r >= 3 && r < 3+N && c >= 3 && c < 3+N);
        frame[(r*M + c)*K0 + ch] = in_reg ? se[((r-3)*N + c-3)*2 + ch] : int'(halo[r*M + c][ch]);
      end
      ref_round(t, frame);
      // halo three cycles early on even rounds, together with the readout on odd ones
      if (t % 2 == 0) begin
        halo_vld = 1; @(negedge clk); halo_vld = 0; repeat (2) @(negedge clk);
      end else begin
        repeat (3) @(negedge clk); halo_vld = 1;
      end
      meas_vld = 1;
      meas_cyc[t] = cyc;
      @(negedge clk);
      meas_vld = 0; halo_vld = 0;
      // feedback tick in the quiet middle of round 5
      if (t == 5) begin
        repeat (ROUND_CYC / 2) @(negedge clk);
        begin
          automatic bit ez = lz_acc, ex = lx_acc;
          tick = 1;
          @(negedge clk);
          tick = 0;
          chk(logical_vld && logical_out == ({ex, ez} ^ 2'b10),
              $sformatf("feedback tick: %b expected %b", logical_out, {ex, ez} ^ 2'b10));
          lz_acc = 0; lx_acc = 0;
          n_tick++;
        end
      end
      // read one S' frame over AXI
      if (t == 7) begin
        logic [31:0] w0;
        repeat (ROUND_CYC / 2) @(negedge clk);
        axi_read(12'h008, rd);
        axi_read(12'h100, w0);
        begin
          automatic bit ok = 1;
          for (int b = 0; b < 32 && b < 2*N*N; b++)
            if (w0[b] != sp_out[b/2][b%2]) ok = 0;
          chk(ok && rd == sp_round, "S' read over AXI");
          n_axi_sp++;
        end
      end
    end
    repeat (3 * ROUND_CYC) @(negedge clk);
    chk(n_rounds_out == NROUNDS, $sformatf("%0d rounds came out, expected %0d", n_rounds_out, NROUNDS));

    // ---- overrun: two rounds 20 cycles apart ----
    checking = 1'b0;
    fork
      begin
        forever begin @(posedge clk); if (rst_n && overrun) n_overrun++; end
      end
    join_none
    for (int k = 0; k < 2; k++) begin
      @(negedge clk); halo_vld = 1; meas_vld = 1;
      @(negedge clk); halo_vld = 0; meas_vld = 0;
      repeat (20) @(negedge clk);
    end
    repeat (3 * ROUND_CYC) @(negedge clk);
    axi_read(12'h004, rd);
    chk(rd[1], "STATUS overrun flag");

    $display("mechanisms: weight loads %0d, dropped warm-up predictions %0d, waits for neighbour predictions %0d",
             n_wload, n_dropped, n_halo_wait);
    $display("            predicted X %0d Z %0d M %0d H %0d, rounds changed by the update %0d",
             n_x, n_z, n_m, n_h, n_reduced);
    $display("            ticks %0d, AXI S' reads %0d, overruns %0d, rounds out %0d",
             n_tick, n_axi_sp, n_overrun, n_rounds_out);
    chk(n_wload > 0, "weight loading happened");
    chk(n_dropped == 3, "three warm-up predictions dropped");
    chk(n_halo_wait > 0, "waited for neighbour predictions");
    chk(n_x > 0 && n_z > 0, "X and Z predictions happened");
    chk(n_m > 0, "measurement-error predictions happened");
    chk(n_h > 0, "hook-error predictions happened");
    chk(n_reduced > 0, "the update changed the syndromes");
    chk(n_tick > 0 && n_axi_sp > 0, "tick and AXI read happened");
    chk(n_overrun > 0, "overrun happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
