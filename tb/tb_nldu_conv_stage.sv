// tb_nldu_conv_stage: checks a full inference stage against the reference
// Conv3d. A reduced stage (2 -> 3 channels, 6x6 input, 5 PEs, so 16 output
// positions in 4 groups and one group with idle PEs) gets random weights and
// biases through the load port, then six rounds of random frames. After each
// round the whole output frame is compared with the integer reference over
// the last three rounds, and the time from start to done must be 28*G + 3
// cycles. A second start while the stage is busy must raise overrun.
module tb_nldu_conv_stage;
  import nldu_pkg::*;
  import nldu_ref_pkg::*;
  localparam int K_IN = 2, K_OUT = 3, P = 5, DIN = 6, DOUT = 4, G = 4, NR = 6, SH = 4;

  logic clk = 0, rst_n = 0;
  logic start = 0;
  act_t in_frame [DIN*DIN][K_IN];
  logic [SHW-1:0] shift = SH;
  act_t out_frame [DOUT*DOUT][K_OUT];
  logic busy, done, overrun;
  logic wt_we = 0;
  logic [15:0] wt_addr = 0, wt_data = 0;
  int checks = 0, failures = 0, n_overrun = 0;

  nldu_conv_stage #(.K_IN(K_IN), .K_OUT(K_OUT), .P(P), .IN_DIM(DIN)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && overrun) n_overrun++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int w [27*K_IN*K_OUT];
  int b [K_OUT];
  int h0[], h1[], h2[], ref_out[];

  initial begin
    in_frame = '{default: '{default: 0}};
    h0 = new[DIN*DIN*K_IN]; h1 = new[DIN*DIN*K_IN]; h2 = new[DIN*DIN*K_IN];
    foreach (h0[i]) begin h0[i] = 0; h1[i] = 0; h2[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < 27*K_IN*K_OUT + K_OUT; a++) begin
      @(negedge clk);
      wt_we = 1; wt_addr = 16'(a);
      if (a < 27*K_IN*K_OUT) begin w[a] = int'($urandom_range(60)) - 30; wt_data = 16'(w[a]); end
      else begin b[a-27*K_IN*K_OUT] = int'($urandom_range(400)) - 200; wt_data = 16'(b[a-27*K_IN*K_OUT]); end
    end
    @(negedge clk);
    wt_we = 0;
    for (int t = 0; t < NR; t++) begin
      int cyc;
      h0 = h1; h1 = h2; h2 = new[DIN*DIN*K_IN];
      for (int q = 0; q < DIN*DIN; q++)
        for (int l = 0; l < K_IN; l++) begin
          h2[q*K_IN + l] = int'($urandom_range(20)) - 4;
          in_frame[q][l] = act_t'(h2[q*K_IN + l]);
        end
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      // scramble the source: the stage must have latched it
      in_frame = '{default: '{default: 8'sd99}};
      cyc = 1;
      if (t == 2) begin
        repeat (10) @(negedge clk);
        cyc += 10;
        start = 1;
        @(negedge clk);
        cyc++;
        start = 0;
      end
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != 28*G + 3) begin
        failures++;
        $display("round %0d: latency %0d cycles, expected %0d", t, cyc, 28*G + 3);
      end
      conv3(h0, h1, h2, DIN, K_IN, K_OUT, w, b, SH, 1'b1, ref_out);
      for (int p = 0; p < DOUT*DOUT; p++)
        for (int k = 0; k < K_OUT; k++) begin
          checks++;
          if (int'(out_frame[p][k]) != ref_out[p*K_OUT + k]) begin
            failures++;
            if (failures < 10)
              $display("round %0d pos %0d ch %0d: %0d expected %0d", t, p, k,
                       out_frame[p][k], ref_out[p*K_OUT + k]);
          end
        end
      repeat (5) @(negedge clk);
    end
    checks++;
    if (n_overrun != 1) begin
      failures++;
      $display("overrun seen %0d times, expected 1", n_overrun);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
