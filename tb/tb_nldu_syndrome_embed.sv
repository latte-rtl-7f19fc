// tb_nldu_syndrome_embed: drives eight rounds of random stabiliser outcomes on
// a 4x4 region with a random geometry and checks every embedded value: the
// XOR with the previous round at real vertices, 2 at virtual vertices, 0
// elsewhere, and that a cycle without meas_vld changes nothing.
module tb_nldu_syndrome_embed;
  import nldu_pkg::*;
  localparam int N = 4;

  logic clk = 0, rst_n = 0;
  logic meas_vld = 0;
  logic meas [N*N][2];
  logic vmask_x [N*N], vmask_z [N*N], virt_x [N*N], virt_z [N*N];
  logic [1:0] s [N*N][2];
  logic s_vld;
  int checks = 0, failures = 0;

  nldu_syndrome_embed #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit prev [N*N][2];

  initial begin
    for (int p = 0; p < N*N; p++) begin
      int kind;
      kind = $urandom_range(2);
      vmask_x[p] = (kind == 0); virt_x[p] = (kind == 1);
      kind = $urandom_range(2);
      vmask_z[p] = (kind == 0); virt_z[p] = (kind == 1);
      prev[p][0] = 0; prev[p][1] = 0;
      meas[p][0] = 0; meas[p][1] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 8; t++) begin
      @(negedge clk);
      for (int p = 0; p < N*N; p++) begin
        meas[p][0] = 1'($urandom_range(1));
        meas[p][1] = 1'($urandom_range(1));
      end
      meas_vld = 1;
      @(negedge clk);
      meas_vld = 0;
      checks++;
      if (!s_vld) begin failures++; $display("s_vld missing"); end
      for (int p = 0; p < N*N; p++) begin
        logic [1:0] ex, ez;
        ex = virt_x[p] ? 2'd2 : vmask_x[p] ? {1'b0, meas[p][0] ^ prev[p][0]} : 2'd0;
        ez = virt_z[p] ? 2'd2 : vmask_z[p] ? {1'b0, meas[p][1] ^ prev[p][1]} : 2'd0;
        checks++;
        if (s[p][0] != ex || s[p][1] != ez) begin
          failures++;
          $display("round %0d pos %0d: %0d/%0d expected %0d/%0d", t, p, s[p][0], s[p][1], ex, ez);
        end
        prev[p][0] = meas[p][0];
        prev[p][1] = meas[p][1];
      end
      // without meas_vld the output holds
      for (int p = 0; p < N*N; p++) begin meas[p][0] = ~meas[p][0]; meas[p][1] = ~meas[p][1]; end
      @(negedge clk);
      for (int p = 0; p < N*N; p++) begin meas[p][0] = prev[p][0]; meas[p][1] = prev[p][1]; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
