// tb_nldu_dequant: checks the comparator tree and the M/H thresholds on
// hand-made cases (each class winning, Y giving both X and Z, ties, scores
// equal to the threshold) and on random score vectors against the reference.
module tb_nldu_dequant;
  import nldu_pkg::*;
  import nldu_ref_pkg::*;
  localparam int NPOS = 64;

  act_t score [NPOS][K4];
  act_t theta_m, theta_h;
  err_t e [NPOS];
  int checks = 0, failures = 0;

  nldu_dequant #(.NPOS(NPOS)) dut (.*);

  int sc[];

  initial begin
    sc = new[NPOS*6];
    for (int it = 0; it < 20; it++) begin
      theta_m = act_t'(22); theta_h = act_t'(int'($urandom_range(60)) - 30);
      foreach (sc[i]) sc[i] = int'($urandom_range(255)) - 128;
      if (it == 0) begin
        // I wins, X wins, Y wins, Z wins, tie I/Y, M at threshold, M above
        sc[0*6+0] = 50;  sc[0*6+1] = 10;  sc[0*6+2] = 10;  sc[0*6+3] = 10;
        sc[1*6+0] = 5;   sc[1*6+1] = 60;  sc[1*6+2] = 10;  sc[1*6+3] = 10;
        sc[2*6+0] = 5;   sc[2*6+1] = 6;   sc[2*6+2] = 70;  sc[2*6+3] = 10;
        sc[3*6+0] = 5;   sc[3*6+1] = 6;   sc[3*6+2] = 7;   sc[3*6+3] = 80;
        sc[4*6+0] = 40;  sc[4*6+1] = 6;   sc[4*6+2] = 40;  sc[4*6+3] = 8;
        sc[5*6+4] = 22;  sc[6*6+4] = 23;
      end
      for (int p = 0; p < NPOS; p++) for (int c = 0; c < 6; c++) score[p][c] = act_t'(sc[p*6+c]);
      #1;
      for (int p = 0; p < NPOS; p++) begin
        int exp, got;
        exp = pred(sc, p, int'(theta_m), int'(theta_h));
        got = {28'h0, e[p].x, e[p].z, e[p].m, e[p].h};
        checks++;
        if (got != exp) begin
          failures++;
          if (failures < 10) $display("it %0d pos %0d: E=%b expected %b", it, p, got[3:0], exp[3:0]);
        end
      end
      if (it == 0) begin
        checks += 5;
        if (e[0][3:2] != 2'b00 || e[1][3:2] != 2'b10 || e[2][3:2] != 2'b11 || e[3][3:2] != 2'b01
            || e[4][3:2] != 2'b00 || e[5].m || !e[6].m) begin
          failures++;
          $display("hand-made cases wrong");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
