// tb_dsblock: checks one quantized DSBlock (CIN = 2, 4 x 4 map, LANES = 4,
// 8-bit LLT) against the reference: shortcut = ReLU(BN_s(Conv3x3_s2(x))),
// main = BN_b(Conv3x3_s1(ReLU(BN_a(Conv3x3_s2(x))))), y = main + shortcut,
// each convolution with its own I-LUT and scales. All parameters go
// through the load port; every output word and the cycle count are checked.
module tb_dsblock;
  import tt_pkg::*;
  import tt_ref_pkg::*;

  localparam int CIN = 2, HH = 4, WD = 4, L = 4, SCK = 3, NB = 8;
  localparam int CO = 2 * CIN, LUTN = 256 * 9, G = (CO + L - 1) / L;
  localparam int RA = G * CIN * 9, RB = G * CO * 9;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, busy, done, out_we, ld_we = 0;
  act_t out_data;
  logic [FA_W-1:0] in_addr, out_addr;
  logic [2:0] ld_sel;
  logic [LD_AW-1:0] ld_addr;
  logic [31:0] ld_data;
  int in_mem [CIN*HH*WD];
  int out_mem[CO*HH*WD/4];

  dsblock #(.CIN(CIN), .HH(HH), .WD(WD), .LANES(L), .SC_K(SCK), .NBITS(NB)) dut (
    .clk, .rst_n, .start, .busy, .done,
    .in_addr, .in_data(act_t'(in_mem[in_addr % (CIN*HH*WD)])), .out_we, .out_addr, .out_data,
    .ld_we, .ld_sel, .ld_addr, .ld_data);

  always_ff @(posedge clk) if (out_we) out_mem[out_addr] <= int'(out_data);

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic ld(input int sel, input int addr, input int data);
    @(negedge clk);
    ld_we = 1; ld_sel = 3'(sel); ld_addr = LD_AW'(addr); ld_data = 32'(data);
    @(negedge clk);
    ld_we = 0;
  endtask

  initial begin
    int wa[], wb[], ws[], ga[], ba[], gb[], bb[], gs[], bs[], la[], lb[], ls[];
    int x[], sc[], mid[], mn[];
    longint sa[3], os[3];
    int cyc, pix_o;
    layer_t Lx;
    wa = new[CO*CIN*9]; wb = new[CO*CO*9]; ws = new[CO*CIN*SCK*SCK];
    foreach (wa[i]) wa[i] = int'($urandom_range(0, 254)) - 127;
    foreach (wb[i]) wb[i] = int'($urandom_range(0, 254)) - 127;
    foreach (ws[i]) ws[i] = int'($urandom_range(0, 254)) - 127;
    ga = new[CO]; ba = new[CO]; gb = new[CO]; bb = new[CO]; gs = new[CO]; bs = new[CO];
    for (int c = 0; c < CO; c++) begin
      ga[c] = int'($urandom_range(2048, 6144)); ba[c] = int'($urandom_range(0, 4096)) - 2048;
      gb[c] = int'($urandom_range(2048, 6144)); bb[c] = int'($urandom_range(0, 4096)) - 2048;
      gs[c] = int'($urandom_range(2048, 6144)); bs[c] = int'($urandom_range(0, 4096)) - 2048;
    end
    la = new[LUTN]; lb = new[LUTN]; ls = new[LUTN];
    // monotone step tables with learned-looking jitter of the thresholds
    for (int i = 0; i < LUTN; i++) begin
      la[i] = (i + int'($urandom_range(0, 4))) / 9; if (la[i] > 255) la[i] = 255;
      lb[i] = (i + int'($urandom_range(0, 8))) / 9; if (lb[i] > 255) lb[i] = 255;
      ls[i] = i / 9;
    end
    // s_a = 4, 8, 6 and s_w = 1, 0.5, 2 (oscale = s_a s_w 2^10 / 2^16 * 2^16)
    sa[0] = (64'd2304 << 16) / 4; os[0] = (64'd4 << 26) >> 16;
    sa[1] = (64'd2304 << 16) / 8; os[1] = (64'd4 << 26) >> 16;
    sa[2] = (64'd2304 << 16) / 6; os[2] = (64'd12 << 26) >> 16;
    x = new[CIN*HH*WD];
    foreach (x[i]) begin x[i] = int'($urandom_range(0, 6000)) - 1000; in_mem[i] = x[i]; end

    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int oc = 0; oc < CO; oc++) begin
      for (int ic = 0; ic < CIN; ic++) for (int t = 0; t < 9; t++)
        ld(0, (((oc / L) * CIN + ic) * 9 + t) * L + oc % L, wa[(oc*CIN+ic)*9+t]);
      for (int ic = 0; ic < CO; ic++) for (int t = 0; t < 9; t++)
        ld(0, (RA + ((oc / L) * CO + ic) * 9 + t) * L + oc % L, wb[(oc*CO+ic)*9+t]);
      for (int ic = 0; ic < CIN; ic++) for (int t = 0; t < SCK*SCK; t++)
        ld(0, (RA + RB + ((oc / L) * CIN + ic) * SCK * SCK + t) * L + oc % L, ws[(oc*CIN+ic)*SCK*SCK+t]);
      ld(1, oc, (ga[oc] << 16) | (ba[oc] & 32'hffff));
      ld(1, CO + oc, (gb[oc] << 16) | (bb[oc] & 32'hffff));
      ld(1, 2 * CO + oc, (gs[oc] << 16) | (bs[oc] & 32'hffff));
    end
    for (int i = 0; i < LUTN; i++) begin ld(2, i, la[i]); ld(2, LUTN + i, lb[i]); ld(2, 2 * LUTN + i, ls[i]); end
    for (int k = 0; k < 3; k++) begin ld(3, k, int'(sa[k])); ld(3, 3 + k, int'(os[k])); end

    Lx = '{cin:CIN, add_time:0, t:0, cout:CO, h:HH, w:WD, k3:(SCK == 3), s2:1, dw:0, bn:1, relu:1, quant:1,
           sa_inv:sa[2], oscale:os[2], lutn:LUTN};
    conv_ref(Lx, x, ws, gs, bs, ls, sc);
    Lx.k3 = 1; Lx.sa_inv = sa[0]; Lx.oscale = os[0];
    conv_ref(Lx, x, wa, ga, ba, la, mid);
    Lx = '{cin:CO, add_time:0, t:0, cout:CO, h:HH/2, w:WD/2, k3:1, s2:0, dw:0, bn:1, relu:0, quant:1,
           sa_inv:sa[1], oscale:os[1], lutn:LUTN};
    conv_ref(Lx, mid, wb, gb, bb, lb, mn);

    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    pix_o = HH * WD / 4;
    checks++;
    if (cyc < G * pix_o * (CIN * 9 + CIN * SCK * SCK + CO * 9) ||
        cyc > G * pix_o * (CIN * 9 + 1 + CIN * SCK * SCK + 1 + CO * 9 + 1) + 3 * (L + 4) + 8) begin
      failures++; $display("cycle count %0d unexpected", cyc);
    end
    foreach (mn[i]) begin
      checks++;
      if (out_mem[i] != sat20(longint'(mn[i]) + sc[i])) begin
        failures++;
        if (failures < 10) $display("out[%0d] = %0d expected %0d", i, out_mem[i], sat20(longint'(mn[i]) + sc[i]));
      end
    end
    $display("DSBlock done in %0d cycles", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
