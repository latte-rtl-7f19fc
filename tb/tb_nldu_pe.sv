// tb_nldu_pe: checks a PE with two input channels over five rounds: per-channel
// streaming sums, adder tree, bias, ReLU and INT8 requantisation, against an
// integer reference. Biases and data are chosen so that negative sums (ReLU
// to 0) and saturation at 127 both occur.
module tb_nldu_pe;
  import nldu_pkg::*;
  import nldu_ref_pkg::*;
  localparam int K_IN = 2;
  localparam int NR = 5;

  logic clk = 0, rst_n = 0;
  logic mac = 0, first = 0, fin = 0;
  logic [1:0] slice = 0;
  logic slot = 0;
  act_t d [K_IN];
  wgt_t w [K_IN];
  bias_t bias;
  logic [SHW-1:0] shift;
  act_t out;
  logic out_vld;
  int checks = 0, failures = 0, n_zero = 0, n_sat = 0;

  nldu_pe #(.K_IN(K_IN), .NSLOT(1), .RELU(1'b1)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint part [NR][3];

  initial begin
    d = '{default: 0}; w = '{default: 0}; bias = 0; shift = 5'd6;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < NR; t++) begin
      bias = bias_t'((t % 2 == 0) ? -3000 : 2000);
      for (int s = 0; s < 3; s++) part[t][s] = 0;
      for (int tp = 0; tp < 27; tp++) begin
        @(negedge clk);
        mac = 1; first = (tp % 9 == 0); slice = 2'(tp / 9); fin = 0;
        for (int l = 0; l < K_IN; l++) begin
          d[l] = act_t'($urandom_range(127));
          w[l] = wgt_t'($urandom_range(255));
          part[t][tp/9] += longint'(d[l]) * longint'(w[l]);
        end
      end
      @(negedge clk);
      mac = 0; first = 0; fin = 1;
      @(negedge clk);
      fin = 0;
      begin
        longint s;
        int exp;
        s = longint'(bias) + part[t][0];
        if (t >= 1) s += part[t-1][1];
        if (t >= 2) s += part[t-2][2];
        exp = (s < 0) ? 0 : rq8(s, 6);
        if (exp == 0) n_zero++;
        if (exp == 127) n_sat++;
        checks++;
        if (!out_vld || int'(out) != exp) begin
          failures++;
          $display("round %0d: out=%0d expected %0d (sum %0d)", t, out, exp, s);
        end
      end
    end
    $display("cases: relu-zero %0d saturated %0d", n_zero, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
