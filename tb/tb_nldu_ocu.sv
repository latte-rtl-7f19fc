// tb_nldu_ocu: checks an OCU of three PEs with three input channels and two
// position slots over four rounds. Every PE gets its own data and all share
// the weights; each PE's output is compared with an integer reference.
module tb_nldu_ocu;
  import nldu_pkg::*;
  import nldu_ref_pkg::*;
  localparam int K_IN = 3;
  localparam int P = 3;
  localparam int NS = 2;
  localparam int NR = 4;

  logic clk = 0, rst_n = 0;
  logic mac = 0, first = 0, fin = 0;
  logic [1:0] slice = 0;
  logic [1:0] slot = 0;
  act_t d [P][K_IN];
  wgt_t w [K_IN];
  bias_t bias;
  logic [SHW-1:0] shift;
  act_t out [P];
  logic out_vld;
  int checks = 0, failures = 0;

  nldu_ocu #(.K_IN(K_IN), .P(P), .NSLOT(NS), .RELU(1'b1)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint part [NR][NS][P][3];

  initial begin
    d = '{default: 0}; w = '{default: 0}; bias = 16'sd100; shift = 5'd5;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < NR; t++) begin
      for (int g = 0; g < NS; g++) begin
        for (int p = 0; p < P; p++) for (int s = 0; s < 3; s++) part[t][g][p][s] = 0;
        for (int tp = 0; tp < 27; tp++) begin
          @(negedge clk);
          mac = 1; first = (tp % 9 == 0); slice = 2'(tp / 9); fin = 0;
          for (int l = 0; l < K_IN; l++) w[l] = wgt_t'($urandom_range(40) - 20);
          for (int p = 0; p < P; p++)
            for (int l = 0; l < K_IN; l++) begin
              d[p][l] = act_t'($urandom_range(30));
              part[t][g][p][tp/9] += longint'(d[p][l]) * longint'(w[l]);
            end
        end
        @(negedge clk);
        mac = 0; first = 0; fin = 1; slot = 2'(g);
        @(negedge clk);
        fin = 0;
        for (int p = 0; p < P; p++) begin
          longint s;
          int exp;
          s = 100 + part[t][g][p][0];
          if (t >= 1) s += part[t-1][g][p][1];
          if (t >= 2) s += part[t-2][g][p][2];
          exp = (s < 0) ? 0 : rq8(s, 5);
          checks++;
          if (!out_vld || int'(out[p]) != exp) begin
            failures++;
            $display("round %0d slot %0d pe %0d: out=%0d expected %0d", t, g, p, out[p], exp);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
