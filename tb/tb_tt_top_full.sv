// tb_tt_top_full: end-to-end test of the core at the size the design is
// built for (its default parameters: 64 x 24 x 24 input, 8-bit LLT, 4 heads,
// 64/16/16 lanes). One parameter load of every block and one inference with
// C = 10, the iteration count of the paper's evaluation, checked word for
// word against the reference model; the same environment as the reduced test.
module tb_tt_top_full;
  tt_top_env #(.FULL(1'b1), .FULL_C(10)) env ();
endmodule
