// tb_nldu_icu: checks the streaming temporal accumulation of one ICU.
// Two position slots, six rounds of random data and weights are driven in the
// stage's order (27 taps, then fin). For every slot and round the output must
// equal sum(z=2 taps of round t) + sum(z=1 of t-1) + sum(z=0 of t-2), with
// rounds before 0 counting as zero.
module tb_nldu_icu;
  import nldu_pkg::*;
  localparam int NSLOT = 2;
  localparam int NR = 6;

  logic clk = 0, rst_n = 0;
  logic mac = 0, first = 0, fin = 0;
  logic [1:0] slice = 0;
  logic [1:0] slot = 0;
  act_t d = 0;
  wgt_t w = 0;
  acc_t y;
  logic y_vld;
  int checks = 0, failures = 0;

  nldu_icu #(.NSLOT(NSLOT)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint part [NR][NSLOT][3];   // slice sums per round and slot

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < NR; t++) begin
      for (int g = 0; g < NSLOT; g++) begin
        for (int s = 0; s < 3; s++) part[t][g][s] = 0;
        for (int tp = 0; tp < 27; tp++) begin
          @(negedge clk);
          mac = 1; first = (tp % 9 == 0); slice = 2'(tp / 9); fin = 0;
          d = act_t'($urandom_range(255));
          w = wgt_t'($urandom_range(255));
          part[t][g][tp/9] += longint'(d) * longint'(w);
        end
        @(negedge clk);
        mac = 0; first = 0; fin = 1; slot = 2'(g);
        @(negedge clk);
        fin = 0;
        begin
          longint exp;
          exp = part[t][g][0];
          if (t >= 1) exp += part[t-1][g][1];
          if (t >= 2) exp += part[t-2][g][2];
          checks++;
          if (!y_vld || longint'(y) != exp) begin
            failures++;
            $display("round %0d slot %0d: y=%0d vld=%0b expected %0d", t, g, y, y_vld, exp);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
