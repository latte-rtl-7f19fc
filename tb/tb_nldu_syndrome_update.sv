// tb_nldu_syndrome_update: checks the parallel syndrome update.
// Part 1 replays the published d = 5 example (a 6x6 tensor): a Y error at
// (2,3), an X error at (5,1) on the logical-Z support, a measurement error at
// (2,5) and a hook error at (4,3) in round t explain every defect of rounds t
// and t+1, so S' must be empty in both rounds and logical Z must flip once.
// Part 2 drives random detectors and predictions, including the halo of
// neighbouring boards, for 40 rounds on a 5x5 region and compares S', the
// defect counts and the logical flips with the update equations written out
// directly in the testbench. A feedback tick must restart L^L.
module tb_nldu_syndrome_update;
  import nldu_pkg::*;

  // ---------------- part 1: published example, N = 6 ----------------
  localparam int NA = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       en_a = 0, tick_a = 0;
  logic [1:0] s_a [NA*NA][2];
  err_t       ec_a [NA*NA];
  err_t       eh_a [(NA+4)*(NA+4)];
  logic       vz_a [NA*NA], vx_a [NA*NA], lz_a [NA*NA], lx_a [NA*NA];
  logic       so_a [NA*NA][2];
  logic       vld_a, llz_a, llx_a;
  logic [15:0] din_a, dout_a;

  nldu_syndrome_update #(.N(NA)) dut_a (
    .clk, .rst_n, .en(en_a), .s_in(s_a), .e_core(ec_a), .e_halo(eh_a),
    .vmask_z(vz_a), .vmask_x(vx_a), .lz_mask(lz_a), .lx_mask(lx_a), .tick(tick_a),
    .s_out(so_a), .out_vld(vld_a), .defects_in(din_a), .defects_out(dout_a),
    .ll_z(llz_a), .ll_x(llx_a)
  );

  // published tensors S^Z[t], S^X[t], S^Z[t+1], S^X[t+1]
  int sz_t  [36] = '{2,0,0,0,0,0, 0,0,0,1,0,2, 2,0,1,0,0,0, 0,0,0,0,0,2, 2,0,0,0,0,0, 0,1,0,0,0,2};
  int sx_t  [36] = '{0,2,0,2,0,2, 0,0,1,0,0,0, 0,0,0,1,0,1, 0,0,0,0,0,0, 0,0,0,1,0,0, 2,0,2,0,2,0};
  int sz_t1 [36] = '{2,0,0,0,0,0, 0,0,0,0,0,2, 2,0,0,0,0,0, 0,0,0,0,0,2, 2,0,0,0,0,0, 0,0,0,0,0,2};
  int sx_t1 [36] = '{0,2,0,2,0,2, 0,0,0,0,0,0, 0,0,0,0,0,1, 0,0,0,0,0,0, 0,0,0,0,0,1, 2,0,2,0,2,0};

  int checks = 0, failures = 0;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL: %s", what);
    end
  endtask

  // ---------------- part 2: random, N = 5 ----------------
  localparam int NB = 5, NE = NB + 4;
  logic       en_b = 0, tick_b = 0;
  logic [1:0] s_b [NB*NB][2];
  err_t       ec_b [NB*NB];
  err_t       eh_b [NE*NE];
  logic       vz_b [NB*NB], vx_b [NB*NB], lz_b [NB*NB], lx_b [NB*NB];
  logic       so_b [NB*NB][2];
  logic       vld_b, llz_b, llx_b;
  logic [15:0] din_b, dout_b;

  nldu_syndrome_update #(.N(NB)) dut_b (
    .clk, .rst_n, .en(en_b), .s_in(s_b), .e_core(ec_b), .e_halo(eh_b),
    .vmask_z(vz_b), .vmask_x(vx_b), .lz_mask(lz_b), .lx_mask(lx_b), .tick(tick_b),
    .s_out(so_b), .out_vld(vld_b), .defects_in(din_b), .defects_out(dout_b),
    .ll_z(llz_b), .ll_x(llx_b)
  );

  // full prediction planes over rows/cols -2..N+1 for this and the last round
  err_t ext_now [NE*NE], ext_prev [NE*NE];

  function automatic err_t ex(input err_t a [NE*NE], input int r, input int c);
    return a[(r+2)*NE + (c+2)];
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // ---- part 1 setup ----
    eh_a = '{default: '0};
    for (int r = 0; r < NA; r++)
      for (int c = 0; c < NA; c++) begin
        int p;
        p = r*NA + c;
        vz_a[p] = ((r + c) % 2 == 0) && (sz_t[p] != 2);
        vx_a[p] = ((r + c) % 2 == 1) && (sx_t[p] != 2);
        lz_a[p] = (c == 1) && (r >= 1);    // logical Z support, column 1
        lx_a[p] = (r == 1) && (c >= 1);    // logical X support, row 1
        s_a[p][CH_Z] = 2'(sz_t[p]);
        s_a[p][CH_X] = 2'(sx_t[p]);
        ec_a[p] = '0;
      end
    ec_a[2*NA + 3] = '{x: 1'b1, z: 1'b1, m: 1'b0, h: 1'b0};   // Y
    ec_a[5*NA + 1] = '{x: 1'b1, z: 1'b0, m: 1'b0, h: 1'b0};   // X
    ec_a[2*NA + 5] = '{x: 1'b0, z: 1'b0, m: 1'b1, h: 1'b0};   // M
    ec_a[4*NA + 3] = '{x: 1'b0, z: 1'b0, m: 1'b0, h: 1'b1};   // H
    // ---- part 2 setup ----
    for (int p = 0; p < NB*NB; p++) begin
      vz_b[p] = ((p / NB + p % NB) % 2 == 0);
      vx_b[p] = !vz_b[p];
      lz_b[p] = (p % NB == 0);
      lx_b[p] = (p / NB == 0);
    end
    ext_prev = '{default: '0};
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- part 1: round t ----
    @(negedge clk); en_a = 1;
    @(negedge clk); en_a = 0;
    chk(vld_a, "example round t: out_vld");
    for (int p = 0; p < NA*NA; p++)
      chk(!so_a[p][0] && !so_a[p][1], $sformatf("example round t: S' left at %0d", p));
    chk(din_a == 7 && dout_a == 0, $sformatf("example round t: defects %0d -> %0d", din_a, dout_a));
    chk(llz_a && !llx_a, "example: logical Z flip from X on the Z support");
    // ---- part 1: round t+1 ----
    for (int p = 0; p < NA*NA; p++) begin
      s_a[p][CH_Z] = 2'(sz_t1[p]);
      s_a[p][CH_X] = 2'(sx_t1[p]);
      ec_a[p] = '0;
    end
    @(negedge clk); en_a = 1;
    @(negedge clk); en_a = 0;
    for (int p = 0; p < NA*NA; p++)
      chk(!so_a[p][0] && !so_a[p][1], $sformatf("example round t+1: S' left at %0d", p));
    chk(din_a == 2 && dout_a == 0, $sformatf("example round t+1: defects %0d -> %0d", din_a, dout_a));
    chk(llz_a && !llx_a, "example: logical state kept");
    @(negedge clk); tick_a = 1;
    @(negedge clk); tick_a = 0;
    chk(!llz_a && !llx_a, "tick clears L^L");

    // ---- part 2 ----
    begin
      bit lz_ref, lx_ref;
      lz_ref = 0; lx_ref = 0;
      for (int t = 0; t < 40; t++) begin
        int cin, cout;
        bit tk;
        for (int q = 0; q < NE*NE; q++)
          ext_now[q] = err_t'(($urandom_range(99) < 12) ? $urandom_range(15) : 0);
        for (int r = 0; r < NB; r++) for (int c = 0; c < NB; c++) begin
          ec_b[r*NB + c] = ex(ext_now, r, c);
          s_b[r*NB + c][0] = 2'($urandom_range(2));
          s_b[r*NB + c][1] = 2'($urandom_range(2));
        end
        for (int q = 0; q < NE*NE; q++) eh_b[q] = ext_now[q];
        // core cells of the halo input must be ignored
        for (int r = 0; r < NB; r++) for (int c = 0; c < NB; c++) eh_b[(r+2)*NE + c + 2] = err_t'(4'hF);
        tk = (t % 7 == 6);
        @(negedge clk); en_b = 1; tick_b = tk;
        @(negedge clk); en_b = 0; tick_b = 0;
        cin = 0; cout = 0;
        if (tk) begin lz_ref = 0; lx_ref = 0; end
        for (int r = 0; r < NB; r++) for (int c = 0; c < NB; c++) begin
          int p;
          bit zd, xd, meas;
          p = r*NB + c;
          meas = ex(ext_now, r, c).m ^ ex(ext_prev, r, c).m ^ ex(ext_now, r, c).h;
          zd = (s_b[p][CH_Z] == 1) ^ meas ^ ex(ext_prev, r+2, c).h
               ^ ex(ext_now, r, c).x ^ ex(ext_now, r, c+1).x ^ ex(ext_now, r+1, c).x ^ ex(ext_now, r+1, c+1).x;
          xd = (s_b[p][CH_X] == 1) ^ meas ^ ex(ext_prev, r, c-2).h
               ^ ex(ext_now, r, c).z ^ ex(ext_now, r, c+1).z ^ ex(ext_now, r+1, c).z ^ ex(ext_now, r+1, c+1).z;
          zd &= vz_b[p];
          xd &= vx_b[p];
          cin += int'(vz_b[p] && s_b[p][CH_Z] == 1) + int'(vx_b[p] && s_b[p][CH_X] == 1);
          cout += int'(zd) + int'(xd);
          chk(so_b[p][CH_Z] == zd && so_b[p][CH_X] == xd,
              $sformatf("random round %0d pos (%0d,%0d): S'=%b%b expected %b%b", t, r, c,
                        so_b[p][1], so_b[p][0], zd, xd));
          if (lz_b[p] && ex(ext_now, r, c).x) lz_ref ^= 1;
          if (lx_b[p] && ex(ext_now, r, c).z) lx_ref ^= 1;
        end
        chk(32'(din_b) == cin && 32'(dout_b) == cout, $sformatf("random round %0d counts", t));
        chk(llz_b == lz_ref && llx_b == lx_ref, $sformatf("random round %0d logicals", t));
        ext_prev = ext_now;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
