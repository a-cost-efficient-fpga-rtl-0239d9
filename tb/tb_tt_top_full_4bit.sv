// tb_tt_top_full_4bit: end-to-end test of the full-size core built for
// 4-bit LLT quantization (NBITS = 4; everything else at its default: 64 x 24
// x 24 input, 4 heads, 64/16/16 lanes). The 4-bit model is the smaller of the
// two quantized configurations the design targets. One parameter load of
// every block (4-bit weights, 144-entry I-LUTs) and one inference with C = 10,
// checked word for word against the reference model with the same
// environment as the other end-to-end tests.
module tb_tt_top_full_4bit;
  tt_top_env #(.FULL(1'b1), .FULL_C(10), .FULL_NB(4)) env ();

  // backstop beyond the environment's own 200 M-cycle watchdog
  initial begin
    repeat (250_000_000) @(posedge env.clk);
    $display("TB_RESULT checks=0 failures=1");
    $finish;
  end
endmodule
