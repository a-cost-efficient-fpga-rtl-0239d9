// tb_tt_top: reduced-size end-to-end test of the whole core (4 channels,
// 8 x 8 input, 2 heads, 4-bit LLT), two inferences with C = 2 and C = 1 after
// one parameter load. The environment tt_top_env does all the work: host
// register programming, DRAM model, reference model and mechanism counters.
module tb_tt_top;
  tt_top_env #(.FULL(1'b0)) env ();
endmodule
