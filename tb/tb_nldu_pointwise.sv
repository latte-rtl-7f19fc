// tb_nldu_pointwise: checks layer 4 (1x1x1, 7 -> 6) on 20 positions with 6
// lanes (four groups, the last partly idle) over three rounds of random
// inputs, against the integer reference, and the start-to-done latency of
// G*(K_IN+1) + 2 cycles.
module tb_nldu_pointwise;
  import nldu_pkg::*;
  import nldu_ref_pkg::*;
  localparam int K_IN = 7, K_OUT = 6, NPOS = 20, LANES = 6, G = 4, SH = 3;

  logic clk = 0, rst_n = 0, start = 0;
  act_t in_frame [NPOS][K_IN];
  logic [SHW-1:0] shift = SH;
  act_t out_frame [NPOS][K_OUT];
  logic busy, done;
  logic wt_we = 0;
  logic [15:0] wt_addr = 0, wt_data = 0;
  int checks = 0, failures = 0;

  nldu_pointwise #(.K_IN(K_IN), .K_OUT(K_OUT), .NPOS(NPOS), .LANES(LANES)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int w [K_IN*K_OUT];
  int b [K_OUT];
  int h[], r[];

  initial begin
    in_frame = '{default: '{default: 0}};
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < K_IN*K_OUT + K_OUT; a++) begin
      @(negedge clk);
      wt_we = 1; wt_addr = 16'(a);
      if (a < K_IN*K_OUT) begin w[a] = int'($urandom_range(255)) - 128; wt_data = 16'(w[a]); end
      else begin b[a-K_IN*K_OUT] = int'($urandom_range(2000)) - 1000; wt_data = 16'(b[a-K_IN*K_OUT]); end
    end
    @(negedge clk);
    wt_we = 0;
    for (int t = 0; t < 3; t++) begin
      int cyc;
      h = new[NPOS*K_IN];
      foreach (h[i]) begin
        h[i] = int'($urandom_range(127));
        in_frame[i / K_IN][i % K_IN] = act_t'(h[i]);
      end
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      in_frame = '{default: '{default: 8'sd5}};
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != G*(K_IN+1) + 2) begin
        failures++;
        $display("latency %0d expected %0d", cyc, G*(K_IN+1) + 2);
      end
      conv1(h, NPOS, K_IN, K_OUT, w, b, SH, r);
      for (int p = 0; p < NPOS; p++)
        for (int k = 0; k < K_OUT; k++) begin
          checks++;
          if (int'(out_frame[p][k]) != r[p*K_OUT + k]) begin
            failures++;
            if (failures < 10) $display("pos %0d ch %0d: %0d expected %0d", p, k, out_frame[p][k], r[p*K_OUT + k]);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
