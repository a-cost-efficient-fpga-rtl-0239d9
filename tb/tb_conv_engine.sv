// tb_conv_engine: checks conv_engine against the nested-loop reference.
//
// Two engines (fixed point, and LLT-quantized with 8-bit codes), LANES = 4,
// run four layers: 3x3 stride 1 with the time channel, BatchNorm and ReLU
// and more output channels than lanes; a depth-wise 3x3 with time channel;
// a quantized 3x3 stride 2 with BatchNorm and ReLU; a quantized 1x1 with
// time channel. Every output word is compared with tt_ref_pkg::conv_ref and
// the cycle count of each layer with the one-tap-per-cycle schedule
// (groups * pixels * (taps + 1) plus the final drain).
module tb_conv_engine;
  import tt_pkg::*;
  import tt_ref_pkg::*;

  localparam int L = 4;
  localparam int LUTN = 256 * 9;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  conv_cfg_t cfg;
  logic start0 = 0, start1 = 0;
  logic busy0, busy1, done0, done1, ov0, ov1;
  logic [FA_W-1:0] ia0, ia1, oa0, oa1;
  act_t od0, od1;
  logic [WA_W-1:0] wa0, wa1;
  logic [15:0] ba0, ba1, la0, la1;

  int in_mem [4096];
  int wrow   [4096][L];
  int bn_g   [64];
  int bn_b   [64];
  int lut    [LUTN];
  int out_mem[4096];
  int nwrites;

  logic [L*16-1:0] wd0;
  logic [L*8-1:0]  wd1;
  always_comb begin
    for (int l = 0; l < L; l++) begin
      wd0[l*16 +: 16] = 16'(wrow[wa0][l]);
      wd1[l*8 +: 8]   = 8'(wrow[wa1][l]);
    end
  end

  conv_engine #(.LANES(L), .QUANT(1'b0), .NBITS(8)) e0 (
    .clk, .rst_n, .start(start0), .cfg, .busy(busy0), .done(done0),
    .in_addr(ia0), .in_data(act_t'(in_mem[ia0])), .w_addr(wa0), .w_data(wd0),
    .bn_addr(ba0), .bn_data({16'(bn_g[ba0]), 16'(bn_b[ba0])}),
    .lut_addr(la0), .lut_data(8'd0), .o_valid(ov0), .o_addr(oa0), .o_data(od0));
  conv_engine #(.LANES(L), .QUANT(1'b1), .NBITS(8)) e1 (
    .clk, .rst_n, .start(start1), .cfg, .busy(busy1), .done(done1),
    .in_addr(ia1), .in_data(act_t'(in_mem[ia1])), .w_addr(wa1), .w_data(wd1),
    .bn_addr(ba1), .bn_data({16'(bn_g[ba1]), 16'(bn_b[ba1])}),
    .lut_addr(la1), .lut_data(8'(lut[la1 % LUTN])), .o_valid(ov1), .o_addr(oa1), .o_data(od1));

  always_ff @(posedge clk) begin
    if (ov0) begin out_mem[oa0] <= int'(od0); nwrites <= nwrites + 1; end
    if (ov1) begin out_mem[oa1] <= int'(od1); nwrites <= nwrites + 1; end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_case(input layer_t Lr, input int seed_scale);
    int k, ce, co, ho, wo, nw, G, cyc, exp_max, exp_min;
    int wt[], ref_out[], bg[], bb[];
    k  = Lr.k3 ? 3 : 1;
    ce = Lr.cin + (Lr.add_time ? 1 : 0);
    co = Lr.dw ? ce : Lr.cout;
    ho = Lr.s2 ? Lr.h / 2 : Lr.h;
    wo = Lr.s2 ? Lr.w / 2 : Lr.w;
    // random data
    for (int i = 0; i < Lr.cin * Lr.h * Lr.w; i++)
      in_mem[i] = Lr.quant ? int'($urandom_range(0, 8192)) : int'($urandom_range(0, 16384)) - 8192;
    nw = Lr.dw ? co * k * k : co * ce * k * k;
    wt = new[nw];
    foreach (wt[i]) wt[i] = Lr.quant ? int'($urandom_range(0, 254)) - 127 : int'($urandom_range(0, 8192)) - 4096;
    bg = new[co]; bb = new[co];
    foreach (bg[i]) begin bg[i] = int'($urandom_range(2048, 6144)); bb[i] = int'($urandom_range(0, 4096)) - 2048; end
    for (int i = 0; i < co; i++) begin bn_g[i] = bg[i]; bn_b[i] = bb[i]; end
    for (int i = 0; i < LUTN; i++) lut[i] = (i * 255) / (LUTN - 1) + ((i % 7 == 3) ? -1 : 0) < 0 ? 0 : (i * 255) / (LUTN - 1) + ((i % 7 == 3) ? -1 : 0);
    // pack weights into LANES-wide rows
    for (int r = 0; r < 4096; r++) for (int l = 0; l < L; l++) wrow[r][l] = 0;
    if (Lr.dw) begin
      for (int c = 0; c < co; c++) for (int t = 0; t < k * k; t++) wrow[(c / L) * k * k + t][c % L] = wt[c * k * k + t];
    end else begin
      for (int oc = 0; oc < co; oc++) for (int ic = 0; ic < ce; ic++) for (int t = 0; t < k * k; t++)
        wrow[((oc / L) * ce + ic) * k * k + t][oc % L] = wt[(oc * ce + ic) * k * k + t];
    end
    conv_ref(Lr, in_mem, wt, bg, bb, lut, ref_out);
    // configure
    cfg = '0;
    cfg.cin = 10'(Lr.cin); cfg.add_time = Lr.add_time; cfg.t_val = act_t'(Lr.t);
    cfg.cout = 10'(Lr.cout); cfg.hin = 6'(Lr.h); cfg.win = 6'(Lr.w);
    cfg.k3 = Lr.k3; cfg.stride2 = Lr.s2; cfg.dw = Lr.dw; cfg.bn = Lr.bn; cfg.relu = Lr.relu;
    cfg.sa_inv = 32'(Lr.sa_inv); cfg.oscale = 32'(Lr.oscale);
    for (int i = 0; i < co * ho * wo; i++) out_mem[i] = 32'h7fffffff;
    nwrites = 0;
    @(negedge clk);
    if (Lr.quant) start1 = 1; else start0 = 1;
    @(negedge clk);
    start0 = 0; start1 = 0;
    cyc = 1;
    while (!(done0 || done1)) begin @(negedge clk); cyc++; end
    $display("case cycles %0d at %0t", cyc, $time);
    G = Lr.dw ? co : (co + L - 1) / L;
    exp_min = G * ho * wo * (Lr.dw ? k * k : ce * k * k);
    exp_max = G * ho * wo * ((Lr.dw ? k * k : ce * k * k) + 1) + L + 4;
    checks++;
    if (cyc < exp_min || cyc > exp_max) begin
      failures++; $display("cycle count %0d outside [%0d,%0d]", cyc, exp_min, exp_max);
    end
    checks++;
    if (nwrites != co * ho * wo) begin failures++; $display("writes %0d expected %0d", nwrites, co * ho * wo); end
    for (int i = 0; i < co * ho * wo; i++) begin
      checks++;
      if (out_mem[i] != ref_out[i]) begin
        failures++;
        if (failures < 10) $display("mismatch at %0d: got %0d expected %0d", i, out_mem[i], ref_out[i]);
      end
    end
  endtask

  initial begin
    layer_t c;
    repeat (3) @(posedge clk);
    rst_n = 1;
    c = '{cin:3, add_time:1, t:300, cout:6, h:5, w:5, k3:1, s2:0, dw:0, bn:1, relu:1, quant:0, sa_inv:0, oscale:0, lutn:LUTN};
    run_case(c, 1);
    c = '{cin:3, add_time:1, t:-200, cout:0, h:5, w:5, k3:1, s2:0, dw:1, bn:0, relu:0, quant:0, sa_inv:0, oscale:0, lutn:LUTN};
    run_case(c, 2);
    // s_a = 8.0 -> sa_inv = 2304/8 * 2^16 ; oscale = s_a*s_w/2^16 * 2^26 with s_w = 1
    c = '{cin:3, add_time:0, t:0, cout:5, h:6, w:6, k3:1, s2:1, dw:0, bn:1, relu:1, quant:1,
          sa_inv:(64'd2304 << 16) / 8, oscale:(64'd8 << 26) >> 16, lutn:LUTN};
    run_case(c, 3);
    c = '{cin:4, add_time:1, t:700, cout:4, h:3, w:3, k3:0, s2:0, dw:0, bn:0, relu:1, quant:1,
          sa_inv:(64'd2304 << 16) / 8, oscale:(64'd8 << 26) >> 16, lutn:LUTN};
    run_case(c, 4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
