// tb_mhsablock: checks a small MHSABlock (CH = 8, DM = 8, 3 x 3 map,
// 2 heads, LANES = 4, 4-bit LLT) over C = 2 Euler iterations against the
// reference chain: BN(Conv1x1([z,t])) -> W_q, W_k, W_v -> attention core ->
// ReLU(Conv1x1([m,t])) -> z + h f. All parameters (weights, BatchNorm,
// five I-LUTs, scales, R_h, R_w, LayerNorm) go through the load port.
// Every output word and the cycle count are checked.
module tb_mhsablock;
  import tt_pkg::*;
  import tt_ref_pkg::*;

  localparam int CH = 8, DM = 8, HH = 3, WD = 3, HEADS = 2, L = 4, NB = 4;
  localparam int N = HH * WD, NZ = CH * N, LUTN = (1 << NB) * 9;
  localparam int G1 = (DM + L - 1) / L, G2 = (CH + L - 1) / L;
  localparam int R1 = G1 * (CH + 1), RQ = G1 * DM;
  localparam int C = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, busy, done, out_we, ld_we = 0;
  logic [15:0] iters;
  act_t h_step, out_data;
  logic [FA_W-1:0] in_addr, out_addr;
  logic [2:0] ld_sel;
  logic [LD_AW-1:0] ld_addr;
  logic [31:0] ld_data;
  int in_mem[NZ], out_mem[NZ];

  mhsablock #(.CH(CH), .DM(DM), .HH(HH), .WD(WD), .HEADS(HEADS), .LANES(L), .NBITS(NB)) dut (
    .clk, .rst_n, .start, .busy, .done, .iters, .h_step,
    .in_addr, .in_data(act_t'(in_mem[in_addr % NZ])), .out_we, .out_addr, .out_data,
    .ld_we, .ld_sel, .ld_addr, .ld_data);

  always_ff @(posedge clk) if (out_we) out_mem[out_addr] <= int'(out_data);

  initial begin
    repeat (200000) @(posedge clk);
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
    int w1[], wq[], wk[], wv[], w2[], g[], b[], lut[5][], rh[], rw[], lg[], lb[];
    int z[], x[], q[], k[], v[], m[], f[], nob[];
    longint sa[5], os[5];
    int h, cyc, lo, hi;
    layer_t Lx;
    w1 = new[DM*(CH+1)]; wq = new[DM*DM]; wk = new[DM*DM]; wv = new[DM*DM]; w2 = new[CH*(DM+1)];
    foreach (w1[i]) w1[i] = int'($urandom_range(0, 14)) - 7;
    foreach (wq[i]) wq[i] = int'($urandom_range(0, 14)) - 7;
    foreach (wk[i]) wk[i] = int'($urandom_range(0, 14)) - 7;
    foreach (wv[i]) wv[i] = int'($urandom_range(0, 14)) - 7;
    foreach (w2[i]) w2[i] = int'($urandom_range(0, 14)) - 7;
    g = new[DM]; b = new[DM];
    foreach (g[i]) begin g[i] = int'($urandom_range(2048, 6144)); b[i] = int'($urandom_range(0, 4096)) - 2048; end
    for (int s = 0; s < 5; s++) begin
      lut[s] = new[LUTN];
      foreach (lut[s][i]) begin
        lut[s][i] = (i + int'($urandom_range(0, 4))) / 9;
        if (lut[s][i] > 15) lut[s][i] = 15;
      end
      // s_a = 4.0 for every layer; output scales between 2 and 5 per code product
      sa[s] = longint'(LUTN / 4) << 16;
      os[s] = longint'($urandom_range(2, 5)) << 16;
    end
    rh = new[HH*DM]; rw = new[WD*DM];
    foreach (rh[i]) rh[i] = int'($urandom_range(0, 4096)) - 2048;
    foreach (rw[i]) rw[i] = int'($urandom_range(0, 4096)) - 2048;
    lg = new[DM*N]; lb = new[DM*N];
    foreach (lg[i]) begin lg[i] = int'($urandom_range(2048, 6144)); lb[i] = int'($urandom_range(0, 2048)) - 1024; end
    z = new[NZ];
    foreach (z[i]) begin z[i] = int'($urandom_range(0, 4000)); in_mem[i] = z[i]; end

    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int oc = 0; oc < DM; oc++) begin
      for (int ic = 0; ic < CH + 1; ic++)
        ld(0, ((oc / L) * (CH + 1) + ic) * L + oc % L, w1[oc*(CH+1)+ic]);
      for (int ic = 0; ic < DM; ic++) begin
        ld(0, (R1 + (oc / L) * DM + ic) * L + oc % L, wq[oc*DM+ic]);
        ld(0, (R1 + RQ + (oc / L) * DM + ic) * L + oc % L, wk[oc*DM+ic]);
        ld(0, (R1 + 2 * RQ + (oc / L) * DM + ic) * L + oc % L, wv[oc*DM+ic]);
      end
      ld(1, oc, (g[oc] << 16) | (b[oc] & 32'hffff));
    end
    for (int oc = 0; oc < CH; oc++)
      for (int ic = 0; ic < DM + 1; ic++)
        ld(0, (R1 + 3 * RQ + (oc / L) * (DM + 1) + ic) * L + oc % L, w2[oc*(DM+1)+ic]);
    for (int s = 0; s < 5; s++) begin
      for (int i = 0; i < LUTN; i++) ld(2, s * LUTN + i, lut[s][i]);
      ld(3, s, int'(sa[s])); ld(3, 5 + s, int'(os[s]));
    end
    foreach (rh[i]) ld(4, i, rh[i]);
    foreach (rw[i]) ld(5, i, rw[i]);
    foreach (lg[i]) ld(6, i, (lg[i] << 16) | (lb[i] & 32'hffff));

    h = 1024 / C;
    for (int j = 0; j < C; j++) begin
      Lx = '{cin:CH, add_time:1, t:j*h, cout:DM, h:HH, w:WD, k3:0, s2:0, dw:0, bn:1, relu:0, quant:1,
             sa_inv:sa[0], oscale:os[0], lutn:LUTN};
      conv_ref(Lx, z, w1, g, b, lut[0], x);
      Lx = '{cin:DM, add_time:0, t:0, cout:DM, h:HH, w:WD, k3:0, s2:0, dw:0, bn:0, relu:0, quant:1,
             sa_inv:sa[1], oscale:os[1], lutn:LUTN};
      conv_ref(Lx, x, wq, g, b, lut[1], q);
      Lx.sa_inv = sa[2]; Lx.oscale = os[2];
      conv_ref(Lx, x, wk, g, b, lut[2], k);
      Lx.sa_inv = sa[3]; Lx.oscale = os[3];
      conv_ref(Lx, x, wv, g, b, lut[3], v);
      mhsa_ref(DM, HH, WD, HEADS, q, k, v, rh, rw, lg, lb, m);
      Lx = '{cin:DM, add_time:1, t:j*h, cout:CH, h:HH, w:WD, k3:0, s2:0, dw:0, bn:0, relu:1, quant:1,
             sa_inv:sa[4], oscale:os[4], lutn:LUTN};
      conv_ref(Lx, m, w2, g, b, lut[4], f);
      foreach (z[i]) z[i] = euler_ref(z[i], h, f[i]);
    end

    iters = 16'(C); h_step = act_t'(h);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    lo = 2 * NZ + C * (G1 * N * (CH + 1) + 3 * G1 * N * DM + 2 * HEADS * N * N * (DM / HEADS) + DM * N
                       + G2 * N * (DM + 1));
    hi = lo + C * (5 * G1 * N + G2 * N + 6 * (L + 8)) + 16;
    checks++;
    if (cyc < lo || cyc > hi) begin failures++; $display("cycle count %0d outside [%0d, %0d]", cyc, lo, hi); end
    foreach (z[i]) begin
      checks++;
      if (out_mem[i] != z[i]) begin
        failures++;
        if (failures < 10) $display("z[%0d] = %0d expected %0d", i, out_mem[i], z[i]);
      end
    end
    $display("MHSABlock C=%0d done in %0d cycles (bounds %0d..%0d), samples %0d %0d %0d m0=%0d f0=%0d",
             C, cyc, lo, hi, out_mem[0], out_mem[1], out_mem[NZ-1], m[0], f[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
