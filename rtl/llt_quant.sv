// llt_quant: learnable-lookup-table (LLT) activation quantizer.
//
// Follows the paper's I-LUT scheme: the activation a is scaled to the table
// range, idx = round(a * 2^n K / s_a), clipped to [0, 2^n K - 1] (the clip of
// a/s_a to [0,1]), and the layer's I-LUT entry at idx is the n-bit code.
// The host passes 2^n K / s_a (Q16.16) so the scaling is a multiply; that
// form of the scale is this design's choice. Purely combinational: the LUT
// itself lives in the owning block's memory, reached through lut_addr and
// lut_data.
module llt_quant import tt_pkg::*; #(
  parameter int unsigned NBITS = 8,
  localparam int unsigned LUTN = (1 << NBITS) * LUT_K
) (
  input  act_t              a,
  input  logic [31:0]       sa_inv,
  input  logic [15:0]       lut_base,
  output logic [15:0]       lut_addr,
  input  logic [NBITS-1:0]  lut_data,
  output logic [NBITS-1:0]  code
);
  logic signed [63:0] prod;
  logic signed [63:0] idx;
  logic [15:0]        idx_c;

  always_comb begin
    prod = 64'(a) * $signed({32'd0, sa_inv});
    idx  = (prod + (64'sd1 <<< (ACT_FRAC + 16 - 1))) >>> (ACT_FRAC + 16);
    if (idx < 0)                      idx_c = '0;
    else if (idx > 64'(LUTN - 1))     idx_c = 16'(LUTN - 1);
    else                              idx_c = idx[15:0];
    lut_addr = lut_base + idx_c;
    code     = lut_data;
  end
endmodule
