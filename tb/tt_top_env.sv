// tt_top_env: end-to-end test environment for tt_top, shared by the reduced
// test (FULL = 0: 4 channels, 8 x 8 input, 2 heads, 4-bit LLT, 4 lanes) and
// the full-size tests (FULL = 1: 64 x 24 x 24 input, 8-bit LLT with the
// core's default parameters, or 4-bit LLT with FULL_NB = 4).
//
// It plays the host: random parameters for all five blocks are generated,
// laid out in the core's parameter address map and written to the DRAM
// model, then loaded with one load-mode operation per on-chip memory
// (MODE = 0, SRC, DST, LEN, CTRL.start, wait for irq_done). Each inference
// (MODE = 1, ITERS = C) reads a random input map from DRAM and writes the
// output map back; the output is compared word for word with a reference
// computed by the plain loop models of tt_ref_pkg (ODEBlock, DSBlock and
// MHSABlock chains in the same fixed-point arithmetic). Runs use different
// C without reloading parameters.
//
// Mechanism counters (each must be non-zero, some must match exactly):
// parameter writes into each of the five blocks, load and inference
// operations, Euler updates in both ODEBlocks and the MHSABlock (exactly
// C x map size per run), quantized MAC cycles, shortcut additions in both
// DSBlocks, attention runs and LayerNorm writes, AXI bursts of 16 beats and
// bursts ending at a 4 KB boundary, and zero AXI protocol errors.
module tt_top_env #(
  parameter bit FULL   = 1'b0,
  parameter int FULL_C = 1,
  parameter int FULL_NB = 8
) ();
  import tt_pkg::*;
  import tt_ref_pkg::*;

  localparam int CH0    = FULL ? 64 : 4;
  localparam int H0     = FULL ? 24 : 8;
  localparam int HEADS  = FULL ? 4 : 2;
  localparam int NB     = FULL ? FULL_NB : 4;
  localparam int L_ODE  = FULL ? 64 : 4;
  localparam int L_DS   = FULL ? 16 : 4;
  localparam int L_MHSA = FULL ? 16 : 4;
  localparam int SC_K   = 3;
  localparam int NRUNS  = FULL ? 1 : 2;
  localparam int NIN    = CH0 * H0 * H0;
  localparam int NOUT   = 4 * CH0 * (H0 / 4) * (H0 / 4);
  localparam int LUTN   = (1 << NB) * 9;
  localparam int unsigned IN_ADDR  = 32'h1000_0040;
  localparam int unsigned OUT_ADDR = 32'h2000_0FC0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [5:0]   awaddr = 0, araddr = 0;
  logic         awvalid = 0, wvalid = 0, bready = 1, arvalid = 0, rready = 1;
  logic         awready, wready, bvalid, arready, rvalid;
  logic [31:0]  wdata = 0, rdata;
  logic [3:0]   wstrb = 4'hF;
  logic [1:0]   bresp, rresp;
  logic [31:0]  m_araddr, m_awaddr;
  logic [7:0]   m_arlen, m_awlen;
  logic [2:0]   m_arsize, m_awsize;
  logic [1:0]   m_arburst, m_awburst;
  logic         m_arvalid, m_arready, m_rlast, m_rvalid, m_rready;
  logic         m_awvalid, m_awready, m_wlast, m_wvalid, m_wready, m_bvalid, m_bready;
  logic [127:0] m_rdata, m_wdata;
  logic [15:0]  m_wstrb;
  logic         irq_done;

  // the core, with its default parameters in the full-size 8-bit configuration
  if (FULL && FULL_NB == 8) begin : g
    tt_top dut (
      .clk, .rst_n,
      .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
      .s_axil_wdata(wdata), .s_axil_wstrb(wstrb), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
      .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(bready),
      .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
      .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(rready),
      .m_axi_araddr(m_araddr), .m_axi_arlen(m_arlen), .m_axi_arsize(m_arsize), .m_axi_arburst(m_arburst),
      .m_axi_arvalid(m_arvalid), .m_axi_arready(m_arready), .m_axi_rdata(m_rdata), .m_axi_rlast(m_rlast),
      .m_axi_rvalid(m_rvalid), .m_axi_rready(m_rready), .m_axi_awaddr(m_awaddr), .m_axi_awlen(m_awlen),
      .m_axi_awsize(m_awsize), .m_axi_awburst(m_awburst), .m_axi_awvalid(m_awvalid), .m_axi_awready(m_awready),
      .m_axi_wdata(m_wdata), .m_axi_wstrb(m_wstrb), .m_axi_wlast(m_wlast), .m_axi_wvalid(m_wvalid),
      .m_axi_wready(m_wready), .m_axi_bvalid(m_bvalid), .m_axi_bready(m_bready), .irq_done);
  end else begin : g
    tt_top #(.CH0(CH0), .H0(H0), .HEADS(HEADS), .NBITS(NB), .L_ODE(L_ODE), .L_DS(L_DS),
             .L_MHSA(L_MHSA), .SC_K(SC_K)) dut (
      .clk, .rst_n,
      .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
      .s_axil_wdata(wdata), .s_axil_wstrb(wstrb), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
      .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(bready),
      .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
      .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(rready),
      .m_axi_araddr(m_araddr), .m_axi_arlen(m_arlen), .m_axi_arsize(m_arsize), .m_axi_arburst(m_arburst),
      .m_axi_arvalid(m_arvalid), .m_axi_arready(m_arready), .m_axi_rdata(m_rdata), .m_axi_rlast(m_rlast),
      .m_axi_rvalid(m_rvalid), .m_axi_rready(m_rready), .m_axi_awaddr(m_awaddr), .m_axi_awlen(m_awlen),
      .m_axi_awsize(m_awsize), .m_axi_awburst(m_awburst), .m_axi_awvalid(m_awvalid), .m_axi_awready(m_awready),
      .m_axi_wdata(m_wdata), .m_axi_wstrb(m_wstrb), .m_axi_wlast(m_wlast), .m_axi_wvalid(m_wvalid),
      .m_axi_wready(m_wready), .m_axi_bvalid(m_bvalid), .m_axi_bready(m_bready), .irq_done);
  end

  axi_mem_model u_mem (.clk, .rst_n,
    .araddr(m_araddr), .arlen(m_arlen), .arsize(m_arsize), .arburst(m_arburst), .arvalid(m_arvalid),
    .arready(m_arready), .rdata(m_rdata), .rlast(m_rlast), .rvalid(m_rvalid), .rready(m_rready),
    .awaddr(m_awaddr), .awlen(m_awlen), .awsize(m_awsize), .awburst(m_awburst), .awvalid(m_awvalid),
    .awready(m_awready), .wdata(m_wdata), .wstrb(m_wstrb), .wlast(m_wlast), .wvalid(m_wvalid),
    .wready(m_wready), .bvalid(m_bvalid), .bready(m_bready));

  // ---------------- mechanism counters ----------------
  longint n_ld[5], n_euler[3], n_qmac, n_sc_add, n_att, n_ln, n_irq;
  initial begin
    foreach (n_ld[i]) n_ld[i] = 0;
    foreach (n_euler[i]) n_euler[i] = 0;
    n_qmac = 0; n_sc_add = 0; n_att = 0; n_ln = 0; n_irq = 0;
  end
  always @(posedge clk) begin
    for (int b = 0; b < 5; b++) if (g.dut.ld_we[b]) n_ld[b]++;
    if (g.dut.u_ode1.eng_ov && g.dut.u_ode1.layer == 2'd3 && int'(g.dut.u_ode1.state) == 3) n_euler[0]++;
    if (g.dut.u_ode2.eng_ov && g.dut.u_ode2.layer == 2'd3 && int'(g.dut.u_ode2.state) == 3) n_euler[1]++;
    if (g.dut.u_mhsa.eng_ov && g.dut.u_mhsa.pass == 3'd5 && int'(g.dut.u_mhsa.state) == 3) n_euler[2]++;
    if (g.dut.u_ds1.eng_busy || g.dut.u_ds2.eng_busy || g.dut.u_mhsa.eng_busy) n_qmac++;
    if (g.dut.u_ds1.out_we || g.dut.u_ds2.out_we) n_sc_add++;
    if (g.dut.u_mhsa.att_done) n_att++;
    if (g.dut.u_mhsa.u_att.o_we && int'(g.dut.u_mhsa.u_att.state) == 4) n_ln++;
    if (irq_done) n_irq++;
  end

  // ---------------- AXI-Lite host ----------------
  task automatic wr(input int a, input logic [31:0] d);
    @(negedge clk);
    awaddr = 6'(a); awvalid = 1; wdata = d; wvalid = 1;
    #1;
    while (!(awready && wready)) begin @(negedge clk); #1; end
    @(negedge clk); awvalid = 0; wvalid = 0;
    while (!bvalid) @(negedge clk);
  endtask

  task automatic rd(input int a, output logic [31:0] d);
    @(negedge clk);
    araddr = 6'(a); arvalid = 1;
    #1;
    while (!arready) begin @(negedge clk); #1; end
    @(negedge clk); arvalid = 0;
    while (!rvalid) @(negedge clk);
    d = rdata;
  endtask

  task automatic run_op(output int cyc);
    logic [31:0] st;
    wr('h00, 1);
    do @(negedge clk); while (!irq_done);
    rd('h04, st);
    checks++;
    if (st != 32'd2) begin failures++; $display("STATUS after operation = %h", st); end
    rd('h20, st);
    cyc = int'(st);
  endtask

  int unsigned dram_ptr = 32'h0000_0F00;
  int n_loads = 0, n_infer = 0;

  task automatic load_region(input int blk, input int sel, input int data[]);
    int cyc;
    foreach (data[i]) u_mem.poke(dram_ptr + 4 * i, data[i]);
    wr('h08, 0);
    wr('h10, dram_ptr);
    wr('h14, (blk << 26) | (sel << 23));
    wr('h18, data.size());
    run_op(cyc);
    checks++;
    if (cyc < data.size()) begin failures++; $display("load of %0d words took %0d cycles", data.size(), cyc); end
    dram_ptr = (dram_ptr + 4 * data.size() + 15) & ~32'hF;
    n_loads++;
  endtask

  // ---------------- parameter sets and reference models ----------------
  function automatic int rnd(input int lo, input int hi);
    return lo + int'($urandom_range(0, hi - lo));
  endfunction

  function automatic void mk_lut(ref int lut[], input int nb);
    lut = new[(1 << nb) * 9];
    foreach (lut[i]) begin
      lut[i] = (i + rnd(0, 4)) / 9;
      if (lut[i] > (1 << nb) - 1) lut[i] = (1 << nb) - 1;
    end
  endfunction

  // s_a = 4.0 for every quantized layer; s_w = 1/sqrt(fan-in)
  function automatic longint sa_inv_of(input int nb);
    return longint'((1 << nb) * 9 / 4) << 16;
  endfunction
  function automatic longint oscale_of(input int nb, input int fanin);
    return longint'(4.0 / $sqrt(real'(fanin)) * real'(longint'(1) << (27 - 2 * nb)) + 0.5);
  endfunction

  class ode_p;
    int ch, hw, ce, dwr, pwr, L;
    int dw1[], pw1[], dw2[], pw2[], g1[], b1[], g2[], b2[], nolut[];
    function new(input int ch_i, input int hw_i, input int lanes);
      int pwa;
      ch = ch_i; hw = hw_i; L = lanes; ce = ch + 1;
      dwr = (ce + L - 1) / L * 9; pwr = (ch + L - 1) / L * ce;
      pwa = int'(4096.0 / $sqrt(real'(ce)));
      dw1 = new[ce*9]; dw2 = new[ce*9]; pw1 = new[ch*ce]; pw2 = new[ch*ce];
      g1 = new[ch]; b1 = new[ch]; g2 = new[ch]; b2 = new[ch]; nolut = new[1];
      foreach (dw1[i]) begin dw1[i] = rnd(-1400, 1400); dw2[i] = rnd(-1400, 1400); end
      foreach (pw1[i]) begin pw1[i] = rnd(-pwa, pwa); pw2[i] = rnd(-pwa, pwa); end
      foreach (g1[i]) begin
        g1[i] = rnd(2048, 6144); b1[i] = rnd(-1024, 1024);
        g2[i] = rnd(2048, 6144); b2[i] = rnd(-1024, 1024);
      end
    endfunction
    function void weights(ref int img[]);
      img = new[(2 * dwr + 2 * pwr) * L];
      foreach (img[i]) img[i] = 0;
      for (int c = 0; c < ce; c++) for (int t = 0; t < 9; t++) begin
        img[((c / L) * 9 + t) * L + c % L] = dw1[c*9+t];
        img[(dwr + pwr + (c / L) * 9 + t) * L + c % L] = dw2[c*9+t];
      end
      for (int oc = 0; oc < ch; oc++) for (int ic = 0; ic < ce; ic++) begin
        img[(dwr + (oc / L) * ce + ic) * L + oc % L] = pw1[oc*ce+ic];
        img[(2 * dwr + pwr + (oc / L) * ce + ic) * L + oc % L] = pw2[oc*ce+ic];
      end
    endfunction
    function void bn(ref int img[]);
      img = new[2 * ch];
      for (int c = 0; c < ch; c++) begin
        img[c] = (g1[c] << 16) | (b1[c] & 32'hffff);
        img[ch + c] = (g2[c] << 16) | (b2[c] & 32'hffff);
      end
    endfunction
    function void run(input int c_iters, input int h, ref int z[]);
      int d[], m[], f[];
      layer_t Ldw, Lpw;
      Ldw = '{cin:ch, add_time:1, t:0, cout:0, h:hw, w:hw, k3:1, s2:0, dw:1, bn:0, relu:0, quant:0, sa_inv:0, oscale:0, lutn:1};
      Lpw = '{cin:ce, add_time:0, t:0, cout:ch, h:hw, w:hw, k3:0, s2:0, dw:0, bn:1, relu:1, quant:0, sa_inv:0, oscale:0, lutn:1};
      for (int j = 0; j < c_iters; j++) begin
        Ldw.t = sat20(longint'(j) * h);
        conv_ref(Ldw, z, dw1, g1, b1, nolut, d);
        Lpw.relu = 1; conv_ref(Lpw, d, pw1, g1, b1, nolut, m);
        conv_ref(Ldw, m, dw2, g1, b1, nolut, d);
        Lpw.relu = 0; conv_ref(Lpw, d, pw2, g2, b2, nolut, f);
        foreach (z[i]) z[i] = euler_ref(z[i], h, f[i]);
      end
    endfunction
  endclass

  class ds_p;
    int cin, co, hw, L, sck, nb, lutn, G, ra, rb, rs;
    int wa[], wb[], ws[], ga[], ba[], gb[], bb[], gs[], bs[], la[], lb[], ls[];
    longint sa[3], os[3];
    function new(input int cin_i, input int hw_i, input int lanes, input int sck_i, input int nb_i);
      int wm;
      cin = cin_i; co = 2 * cin; hw = hw_i; L = lanes; sck = sck_i; nb = nb_i; lutn = (1 << nb) * 9;
      G = (co + L - 1) / L; ra = G * cin * 9; rb = G * co * 9; rs = G * cin * sck * sck;
      wm = (1 << (nb - 1)) - 1;
      wa = new[co*cin*9]; wb = new[co*co*9]; ws = new[co*cin*sck*sck];
      foreach (wa[i]) wa[i] = rnd(-wm, wm);
      foreach (wb[i]) wb[i] = rnd(-wm, wm);
      foreach (ws[i]) ws[i] = rnd(-wm, wm);
      ga = new[co]; ba = new[co]; gb = new[co]; bb = new[co]; gs = new[co]; bs = new[co];
      foreach (ga[i]) begin
        ga[i] = rnd(2048, 6144); ba[i] = rnd(-1024, 1024);
        gb[i] = rnd(2048, 6144); bb[i] = rnd(-1024, 1024);
        gs[i] = rnd(2048, 6144); bs[i] = rnd(-1024, 1024);
      end
      mk_lut(la, nb); mk_lut(lb, nb); mk_lut(ls, nb);
      foreach (sa[k]) sa[k] = sa_inv_of(nb);
      os[0] = oscale_of(nb, cin * 9); os[1] = oscale_of(nb, co * 9); os[2] = oscale_of(nb, cin * sck * sck);
    endfunction
    function void weights(ref int img[]);
      img = new[(ra + rb + rs) * L];
      foreach (img[i]) img[i] = 0;
      for (int oc = 0; oc < co; oc++) begin
        for (int ic = 0; ic < cin; ic++) for (int t = 0; t < 9; t++)
          img[(((oc / L) * cin + ic) * 9 + t) * L + oc % L] = wa[(oc*cin+ic)*9+t];
        for (int ic = 0; ic < co; ic++) for (int t = 0; t < 9; t++)
          img[(ra + ((oc / L) * co + ic) * 9 + t) * L + oc % L] = wb[(oc*co+ic)*9+t];
        for (int ic = 0; ic < cin; ic++) for (int t = 0; t < sck*sck; t++)
          img[(ra + rb + ((oc / L) * cin + ic) * sck * sck + t) * L + oc % L] = ws[(oc*cin+ic)*sck*sck+t];
      end
    endfunction
    function void bn(ref int img[]);
      img = new[3 * co];
      for (int c = 0; c < co; c++) begin
        img[c] = (ga[c] << 16) | (ba[c] & 32'hffff);
        img[co + c] = (gb[c] << 16) | (bb[c] & 32'hffff);
        img[2 * co + c] = (gs[c] << 16) | (bs[c] & 32'hffff);
      end
    endfunction
    function void luts(ref int img[]);
      img = new[3 * lutn];
      for (int i = 0; i < lutn; i++) begin img[i] = la[i]; img[lutn + i] = lb[i]; img[2 * lutn + i] = ls[i]; end
    endfunction
    function void scales(ref int img[]);
      img = new[6];
      for (int k = 0; k < 3; k++) begin img[k] = int'(sa[k]); img[3 + k] = int'(os[k]); end
    endfunction
    function void run(input int x[], ref int y[]);
      int sc[], mid[], mn[];
      layer_t Lx;
      Lx = '{cin:cin, add_time:0, t:0, cout:co, h:hw, w:hw, k3:(sck == 3), s2:1, dw:0, bn:1, relu:1, quant:1,
             sa_inv:sa[2], oscale:os[2], lutn:lutn};
      conv_ref(Lx, x, ws, gs, bs, ls, sc);
      Lx.k3 = 1; Lx.sa_inv = sa[0]; Lx.oscale = os[0];
      conv_ref(Lx, x, wa, ga, ba, la, mid);
      Lx = '{cin:co, add_time:0, t:0, cout:co, h:hw/2, w:hw/2, k3:1, s2:0, dw:0, bn:1, relu:0, quant:1,
             sa_inv:sa[1], oscale:os[1], lutn:lutn};
      conv_ref(Lx, mid, wb, gb, bb, lb, mn);
      y = new[mn.size()];
      foreach (y[i]) y[i] = sat20(longint'(mn[i]) + sc[i]);
    endfunction
  endclass

  class mhsa_p;
    int ch, dm, hw, n, heads, L, nb, lutn, G1, G2, r1, rq, r2;
    int w1[], wq[], wk[], wv[], w2[], g[], b[], rh[], rw[], lg[], lb[];
    int lut0[], lut1[], lut2[], lut3[], lut4[];
    longint sa[5], os[5];
    function new(input int ch_i, input int dm_i, input int hw_i, input int heads_i, input int lanes, input int nb_i);
      int wm;
      ch = ch_i; dm = dm_i; hw = hw_i; n = hw * hw; heads = heads_i; L = lanes; nb = nb_i; lutn = (1 << nb) * 9;
      G1 = (dm + L - 1) / L; G2 = (ch + L - 1) / L; r1 = G1 * (ch + 1); rq = G1 * dm; r2 = G2 * (dm + 1);
      wm = (1 << (nb - 1)) - 1;
      w1 = new[dm*(ch+1)]; wq = new[dm*dm]; wk = new[dm*dm]; wv = new[dm*dm]; w2 = new[ch*(dm+1)];
      foreach (w1[i]) w1[i] = rnd(-wm, wm);
      foreach (wq[i]) begin wq[i] = rnd(-wm, wm); wk[i] = rnd(-wm, wm); wv[i] = rnd(-wm, wm); end
      foreach (w2[i]) w2[i] = rnd(-wm, wm);
      g = new[dm]; b = new[dm];
      foreach (g[i]) begin g[i] = rnd(2048, 6144); b[i] = rnd(-1024, 1024); end
      rh = new[hw*dm]; rw = new[hw*dm];
      foreach (rh[i]) begin rh[i] = rnd(-2048, 2048); rw[i] = rnd(-2048, 2048); end
      lg = new[dm*n]; lb = new[dm*n];
      foreach (lg[i]) begin lg[i] = rnd(2048, 6144); lb[i] = rnd(-1024, 1024); end
      mk_lut(lut0, nb); mk_lut(lut1, nb); mk_lut(lut2, nb); mk_lut(lut3, nb); mk_lut(lut4, nb);
      foreach (sa[k]) sa[k] = sa_inv_of(nb);
      os[0] = oscale_of(nb, ch + 1);
      os[1] = oscale_of(nb, dm); os[2] = oscale_of(nb, dm); os[3] = oscale_of(nb, dm);
      os[4] = oscale_of(nb, dm + 1);
    endfunction
    function void weights(ref int img[]);
      img = new[(r1 + 3 * rq + r2) * L];
      foreach (img[i]) img[i] = 0;
      for (int oc = 0; oc < dm; oc++) begin
        for (int ic = 0; ic < ch + 1; ic++) img[((oc / L) * (ch + 1) + ic) * L + oc % L] = w1[oc*(ch+1)+ic];
        for (int ic = 0; ic < dm; ic++) begin
          img[(r1 + (oc / L) * dm + ic) * L + oc % L] = wq[oc*dm+ic];
          img[(r1 + rq + (oc / L) * dm + ic) * L + oc % L] = wk[oc*dm+ic];
          img[(r1 + 2 * rq + (oc / L) * dm + ic) * L + oc % L] = wv[oc*dm+ic];
        end
      end
      for (int oc = 0; oc < ch; oc++) for (int ic = 0; ic < dm + 1; ic++)
        img[(r1 + 3 * rq + (oc / L) * (dm + 1) + ic) * L + oc % L] = w2[oc*(dm+1)+ic];
    endfunction
    function void bn(ref int img[]);
      img = new[dm];
      foreach (img[c]) img[c] = (g[c] << 16) | (b[c] & 32'hffff);
    endfunction
    function void luts(ref int img[]);
      img = new[5 * lutn];
      for (int i = 0; i < lutn; i++) begin
        img[i] = lut0[i]; img[lutn + i] = lut1[i]; img[2 * lutn + i] = lut2[i];
        img[3 * lutn + i] = lut3[i]; img[4 * lutn + i] = lut4[i];
      end
    endfunction
    function void scales(ref int img[]);
      img = new[10];
      for (int k = 0; k < 5; k++) begin img[k] = int'(sa[k]); img[5 + k] = int'(os[k]); end
    endfunction
    function void ln(ref int img[]);
      img = new[dm * n];
      foreach (img[i]) img[i] = (lg[i] << 16) | (lb[i] & 32'hffff);
    endfunction
    function void run(input int c_iters, input int h, ref int z[]);
      int x[], q[], k[], v[], m[], f[];
      layer_t Lx;
      for (int j = 0; j < c_iters; j++) begin
        Lx = '{cin:ch, add_time:1, t:sat20(longint'(j) * h), cout:dm, h:hw, w:hw, k3:0, s2:0, dw:0, bn:1, relu:0,
               quant:1, sa_inv:sa[0], oscale:os[0], lutn:lutn};
        conv_ref(Lx, z, w1, g, b, lut0, x);
        Lx = '{cin:dm, add_time:0, t:0, cout:dm, h:hw, w:hw, k3:0, s2:0, dw:0, bn:0, relu:0, quant:1,
               sa_inv:sa[1], oscale:os[1], lutn:lutn};
        conv_ref(Lx, x, wq, g, b, lut1, q);
        Lx.sa_inv = sa[2]; Lx.oscale = os[2];
        conv_ref(Lx, x, wk, g, b, lut2, k);
        Lx.sa_inv = sa[3]; Lx.oscale = os[3];
        conv_ref(Lx, x, wv, g, b, lut3, v);
        mhsa_ref(dm, hw, hw, heads, q, k, v, rh, rw, lg, lb, m);
        Lx = '{cin:dm, add_time:1, t:sat20(longint'(j) * h), cout:ch, h:hw, w:hw, k3:0, s2:0, dw:0, bn:0, relu:1,
               quant:1, sa_inv:sa[4], oscale:os[4], lutn:lutn};
        conv_ref(Lx, m, w2, g, b, lut4, f);
        foreach (z[i]) z[i] = euler_ref(z[i], h, f[i]);
      end
    endfunction
  endclass

  // ---------------- test sequence ----------------
  initial begin
    longint limit;
    limit = FULL ? 64'd200_000_000 : 64'd3_000_000;
    for (longint i = 0; i < limit; i++) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ode_p  o1, o2;
    ds_p   d1, d2;
    mhsa_p ma;
    int img[], x[], y[], x2[], y2[], cyc, h, c_run, nz_ode1, nz_ode2, nz_mhsa, mism;
    longint exp_euler[3];
    int runs[2];
    logic [31:0] v;
    runs[0] = FULL ? FULL_C : 2;
    runs[1] = 1;
    exp_euler[0] = 0; exp_euler[1] = 0; exp_euler[2] = 0;
    nz_ode1 = CH0 * H0 * H0; nz_ode2 = CH0 * H0 * H0 / 2; nz_mhsa = NOUT;

    o1 = new(CH0, H0, L_ODE);
    d1 = new(CH0, H0, L_DS, SC_K, NB);
    o2 = new(2 * CH0, H0 / 2, L_ODE);
    d2 = new(2 * CH0, H0 / 2, L_DS, SC_K, NB);
    ma = new(4 * CH0, CH0, H0 / 4, HEADS, L_MHSA, NB);

    repeat (3) @(posedge clk);
    rst_n = 1;
    rd('h0C, v);
    checks++;
    if (v != 32'd10) begin failures++; $display("ITERS reset value %0d", v); end

    // parameter load, one load-mode operation per on-chip memory
    o1.weights(img); load_region(0, 0, img);
    o1.bn(img);      load_region(0, 1, img);
    d1.weights(img); load_region(1, 0, img);
    d1.bn(img);      load_region(1, 1, img);
    d1.luts(img);    load_region(1, 2, img);
    d1.scales(img);  load_region(1, 3, img);
    o2.weights(img); load_region(2, 0, img);
    o2.bn(img);      load_region(2, 1, img);
    d2.weights(img); load_region(3, 0, img);
    d2.bn(img);      load_region(3, 1, img);
    d2.luts(img);    load_region(3, 2, img);
    d2.scales(img);  load_region(3, 3, img);
    ma.weights(img); load_region(4, 0, img);
    ma.bn(img);      load_region(4, 1, img);
    ma.luts(img);    load_region(4, 2, img);
    ma.scales(img);  load_region(4, 3, img);
    img = new[ma.hw * ma.dm];
    foreach (img[i]) img[i] = ma.rh[i];
    load_region(4, 4, img);
    foreach (img[i]) img[i] = ma.rw[i];
    load_region(4, 5, img);
    ma.ln(img);      load_region(4, 6, img);
    $display("parameters loaded: %0d operations", n_loads);

    for (int r = 0; r < NRUNS; r++) begin
      c_run = runs[r];
      h = (c_run == 0) ? 0 : 1024 / c_run;
      x = new[NIN];
      foreach (x[i]) begin x[i] = rnd(-2048, 4096); u_mem.poke(IN_ADDR + 4 * i, x[i]); end
      for (int i = 0; i < NOUT + 4; i++) u_mem.poke(OUT_ADDR + 4 * i, 32'h5a5a5a5a);
      y = x;
      o1.run(c_run, h, y);
      d1.run(y, x);
      o2.run(c_run, h, x);
      x2 = x;
      d2.run(x, y);
      y2 = y;
      ma.run(c_run, h, y);
      exp_euler[0] += longint'(c_run) * nz_ode1;
      exp_euler[1] += longint'(c_run) * nz_ode2;
      exp_euler[2] += longint'(c_run) * nz_mhsa;

      wr('h08, 1);
      wr('h0C, c_run);
      wr('h10, IN_ADDR);
      wr('h1C, OUT_ADDR);
      run_op(cyc);
      n_infer++;
      mism = 0;
      for (int i = 0; i < NOUT; i++) begin
        checks++;
        if (u_mem.peek(OUT_ADDR + 4 * i) != 32'(y[i])) begin
          failures++; mism++;
          if (mism < 8) $display("C=%0d out[%0d] = %0d expected %0d", c_run, i,
                                 $signed(u_mem.peek(OUT_ADDR + 4 * i)), y[i]);
        end
      end
      // intermediate maps left in the ping-pong buffers: ODEBlock2 output in
      // buffer A, DSBlock2 output in buffer B
      mism = 0;
      foreach (x2[i]) if (int'($signed(g.dut.u_bufa.mem[i])) != x2[i]) mism++;
      checks++;
      if (mism != 0) begin failures++; $display("ODEBlock2 output: %0d mismatches", mism); end
      mism = 0;
      foreach (y2[i]) if (int'($signed(g.dut.u_bufb.mem[i])) != y2[i]) mism++;
      checks++;
      if (mism != 0) begin failures++; $display("DSBlock2 output: %0d mismatches", mism); end
      checks++;
      if (u_mem.peek(OUT_ADDR + 4 * NOUT) != 32'h5a5a5a5a) begin failures++; $display("output overrun"); end
      $display("inference C=%0d: %0d cycles, out[0..2] = %0d %0d %0d, %0d mismatches", c_run, cyc,
               y[0], y[1], y[2], mism);
    end

    // every mechanism must have been exercised
    for (int b = 0; b < 5; b++) begin
      checks++;
      if (n_ld[b] == 0) begin failures++; $display("no parameter writes into block %0d", b); end
    end
    for (int k = 0; k < 3; k++) begin
      checks++;
      if (n_euler[k] != exp_euler[k] || n_euler[k] == 0) begin
        failures++; $display("Euler updates in block %0d: %0d, expected %0d", k, n_euler[k], exp_euler[k]);
      end
    end
    checks++; if (n_qmac == 0)   begin failures++; $display("no quantized MAC cycles"); end
    checks++; if (n_sc_add == 0) begin failures++; $display("no shortcut additions"); end
    checks++; if (n_att == 0)    begin failures++; $display("attention never ran"); end
    checks++; if (n_ln == 0)     begin failures++; $display("LayerNorm never ran"); end
    checks++; if (n_irq != n_loads + n_infer) begin failures++; $display("irq count %0d", n_irq); end
    checks++; if (n_loads == 0 || n_infer == 0) begin failures++; $display("a mode was never used"); end
    checks++; if (u_mem.errors != 0) begin failures++; $display("%0d AXI protocol errors", u_mem.errors); end
    checks++; if (u_mem.max_len != 16) begin failures++; $display("no full 16-beat burst"); end
    checks++; if (u_mem.boundary_bursts == 0) begin failures++; $display("no burst split at 4 KB"); end
    $display("counts: ld %0d/%0d/%0d/%0d/%0d euler %0d/%0d/%0d qmac %0d sc_add %0d att %0d ln %0d irq %0d",
             n_ld[0], n_ld[1], n_ld[2], n_ld[3], n_ld[4], n_euler[0], n_euler[1], n_euler[2],
             n_qmac, n_sc_add, n_att, n_ln, n_irq);
    $display("axi: rd bursts %0d, wr bursts %0d, at 4 KB %0d", u_mem.rd_bursts, u_mem.wr_bursts, u_mem.boundary_bursts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
