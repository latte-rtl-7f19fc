// tb_nldu_top_full: the same end-to-end test with the NLDU at its default,
// published size: a 9x9 region, 15x15 input frames, 52/33/27 PEs, one round
// per 300 cycles.
module tb_nldu_top_full;
  nldu_top_bench #(.FULL(1'b1), .NROUNDS(10)) u_bench ();
endmodule
