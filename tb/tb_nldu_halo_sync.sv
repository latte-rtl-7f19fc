// tb_nldu_halo_sync: checks the assembly of the (N+6)^2 input frame for a
// 2x2 region. Rounds are sent with the own round first, the halo first, both
// together, and with the halo disabled (zero border). Each issued frame must
// hold the own values in the centre and the neighbours' values around it, and
// exactly one frame must be issued per round, only after both parts arrived.
// A second own round before the halo must raise halo_late.
module tb_nldu_halo_sync;
  import nldu_pkg::*;
  localparam int N = 2, M = N + 6;

  logic clk = 0, rst_n = 0;
  logic halo_en = 1;
  logic [1:0] local_s [N*N][2];
  logic local_vld = 0;
  logic [1:0] halo [M*M][2];
  logic halo_vld = 0;
  logic [1:0] bcast [N*N][2];
  logic bcast_vld;
  act_t frame [M*M][K0];
  logic frame_vld;
  logic halo_late;
  int checks = 0, failures = 0, frames = 0, lates = 0;

  nldu_halo_sync #(.N(N)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (rst_n && frame_vld) frames++;
    if (rst_n && halo_late) lates++;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic randomise();
    for (int p = 0; p < N*N; p++) begin local_s[p][0] = 2'($urandom_range(2)); local_s[p][1] = 2'($urandom_range(2)); end
    for (int q = 0; q < M*M; q++) begin halo[q][0] = 2'($urandom_range(2)); halo[q][1] = 2'($urandom_range(2)); end
  endtask

  task automatic check_frame(input logic [1:0] ls [N*N][2], input logic [1:0] hs [M*M][2], input bit en);
    for (int r = 0; r < M; r++) for (int c = 0; c < M; c++) for (int ch = 0; ch < 2; ch++) begin
      int exp;
      if (r >= 3 && r < 3 + N && c >= 3 && c < 3 + N) exp = ls[(r-3)*N + c - 3][ch];
      else exp = en ? hs[r*M + c][ch] : 0;
      checks++;
      if (int'(frame[r*M + c][ch]) != exp) begin
        failures++;
        if (failures < 10) $display("frame (%0d,%0d,%0d) = %0d expected %0d", r, c, ch, frame[r*M+c][ch], exp);
      end
    end
  endtask

  logic [1:0] ls_q [N*N][2];
  logic [1:0] hs_q [M*M][2];

  initial begin
    randomise();
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int mode = 0; mode < 4; mode++) begin
      int f0;
      randomise();
      ls_q = local_s; hs_q = halo;
      halo_en = (mode != 3);
      f0 = frames;
      @(negedge clk);
      if (mode == 0 || mode == 2 || mode == 3) local_vld = 1;
      if (mode == 1 || mode == 2) halo_vld = 1;
      @(negedge clk);
      local_vld = 0; halo_vld = 0;
      if (mode == 0 || mode == 1) begin
        // the frame must wait for the other half
        randomise();
        repeat (4) @(negedge clk);
        checks++;
        if (frames != f0) begin failures++; $display("mode %0d: frame issued too early", mode); end
        local_s = ls_q; halo = hs_q;
        if (mode == 0) halo_vld = 1; else local_vld = 1;
        @(negedge clk);
        halo_vld = 0; local_vld = 0;
      end
      @(negedge clk);
      checks++;
      if (frames != f0 + 1) begin failures++; $display("mode %0d: %0d frames", mode, frames - f0); end
      check_frame(ls_q, hs_q, halo_en);
      checks++;
      if (bcast != ls_q) begin failures++; $display("mode %0d: broadcast wrong", mode); end
    end
    // lost synchronisation
    halo_en = 1;
    @(negedge clk); local_vld = 1;
    @(negedge clk); local_vld = 0;
    @(negedge clk); local_vld = 1;
    @(negedge clk); local_vld = 0;
    @(negedge clk);
    checks++;
    if (lates != 1) begin failures++; $display("halo_late seen %0d times", lates); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
