// tb_nldu_top: end-to-end test of the NLDU at a reduced size (a 4x4 region,
// 10x10 input frame, PEs scaled to keep 3 to 5 position groups per stage),
// see nldu_top_bench for what is checked.
module tb_nldu_top;
  nldu_top_bench #(.N(4), .P1(13), .P2(9), .P3(6), .L4(6), .FULL(1'b0), .NROUNDS(12)) u_bench ();
endmodule
