// tb_llt_quant: the look-up-table quantizer for 8-bit and 4-bit codes.
// For random activations (including negative ones and ones far above the
// clipping range) and random scales, checks the LUT address against
// round(a * 2^nK / s_a) clipped to [0, 2^nK - 1] plus the table base, and
// that the code is the table entry at that address. Directed cases cover
// zero, the first rounding threshold and the exact clipping point.
module tb_llt_quant;
  import tt_pkg::*;
  import tt_ref_pkg::*;
  int checks = 0, failures = 0;

  act_t a;
  logic [31:0] sa_inv;
  logic [15:0] base, addr8, addr4;
  logic [7:0] code8;
  logic [3:0] code4;
  logic [7:0] lut8 [2304];
  logic [3:0] lut4 [144];

  llt_quant #(.NBITS(8)) u8 (.a, .sa_inv, .lut_base(base), .lut_addr(addr8), .lut_data(lut8[(addr8 - base) % 2304]), .code(code8));
  llt_quant #(.NBITS(4)) u4 (.a, .sa_inv, .lut_base(base), .lut_addr(addr4), .lut_data(lut4[(addr4 - base) % 144]), .code(code4));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input int av, input longint inv8, input longint inv4);
    int i8, i4;
    a = act_t'(av); sa_inv = 32'(inv8);
    #1;
    i8 = quant_idx(av, inv8, 2304);
    checks += 2;
    if (addr8 != 16'(base + i8)) begin failures++; $display("8b a=%0d addr %0d expected %0d", av, addr8 - base, i8); end
    if (code8 != lut8[i8]) begin failures++; $display("8b code mismatch"); end
    sa_inv = 32'(inv4);
    #1;
    i4 = quant_idx(av, inv4, 144);
    checks += 2;
    if (addr4 != 16'(base + i4)) begin failures++; $display("4b a=%0d addr %0d expected %0d", av, addr4 - base, i4); end
    if (code4 != lut4[i4]) begin failures++; $display("4b code mismatch"); end
  endtask

  initial begin
    longint i8, i4;
    foreach (lut8[i]) lut8[i] = 8'($urandom());
    foreach (lut4[i]) lut4[i] = 4'($urandom());
    base = 0;
    // s_a = 4.0: 2^nK/s_a = 576 (8-bit), 36 (4-bit), Q16.16
    i8 = longint'(576) << 16; i4 = longint'(36) << 16;
    check(0, i8, i4);
    check(1, i8, i4);
    check(-5000, i8, i4);
    check(4096, i8, i4);            // exactly s_a: clips to the last entry
    check(4095, i8, i4);
    check(524287, i8, i4);
    for (int n = 0; n < 3000; n++) begin
      longint sa;
      base = 16'($urandom_range(0, 4) * 2304);
      sa = $urandom_range(256, 16384);        // s_a between 0.25 and 16 (Q10.10)
      i8 = (longint'(2304) << 26) / sa;
      i4 = (longint'(144) << 26) / sa;
      check(int'($urandom_range(0, 40000)) - 8000, i8, i4);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
