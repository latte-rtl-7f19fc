// tb_nldu_weight_mem: writes every weight and bias of a 2x3 memory with 27
// taps through the load port, then reads all taps back (one cycle latency)
// and compares each (l,k) lane and every bias with what was written.
module tb_nldu_weight_mem;
  import nldu_pkg::*;
  localparam int K_IN = 2, K_OUT = 3, NTAP = 27;

  logic clk = 0;
  logic we = 0;
  logic [15:0] waddr = 0, wdata = 0;
  logic [4:0] raddr = 0;
  wgt_t rdata [K_IN][K_OUT];
  bias_t bias [K_OUT];
  int checks = 0, failures = 0;
  int ref_w [NTAP*K_IN*K_OUT];
  int ref_b [K_OUT];

  nldu_weight_mem #(.K_IN(K_IN), .K_OUT(K_OUT), .NTAP(NTAP)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < NTAP*K_IN*K_OUT + K_OUT; a++) begin
      @(negedge clk);
      we = 1; waddr = 16'(a);
      if (a < NTAP*K_IN*K_OUT) begin
        ref_w[a] = int'($urandom_range(255)) - 128;
        wdata = 16'(ref_w[a]);
      end else begin
        ref_b[a - NTAP*K_IN*K_OUT] = int'($urandom_range(65535)) - 32768;
        wdata = 16'(ref_b[a - NTAP*K_IN*K_OUT]);
      end
    end
    @(negedge clk);
    we = 0;
    for (int t = 0; t < NTAP; t++) begin
      raddr = 5'(t);
      @(negedge clk);
      for (int l = 0; l < K_IN; l++)
        for (int k = 0; k < K_OUT; k++) begin
          checks++;
          if (int'(rdata[l][k]) != ref_w[(t*K_IN + l)*K_OUT + k]) begin
            failures++;
            $display("tap %0d l %0d k %0d: %0d expected %0d", t, l, k, rdata[l][k],
                     ref_w[(t*K_IN + l)*K_OUT + k]);
          end
        end
    end
    for (int k = 0; k < K_OUT; k++) begin
      checks++;
      if (int'(bias[k]) != ref_b[k]) begin
        failures++;
        $display("bias %0d: %0d expected %0d", k, bias[k], ref_b[k]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
