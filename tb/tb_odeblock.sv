// tb_odeblock: checks one ODEBlock (CH = 4, 4 x 4 map, LANES = 4, C = 3)
// against a reference built from tt_ref_pkg layers: C Euler steps of
// BN2(PW2(DW2([ReLU(BN1(PW1(DW1([z,t])))), t]))), t = j/C, h = 1/C.
// Parameters are loaded through the block's load port in the documented
// layout; every output word and the total cycle count are checked, and the
// C = 0 case (input passed through unchanged) is run as well.
module tb_odeblock;
  import tt_pkg::*;
  import tt_ref_pkg::*;

  localparam int CH = 4, HH = 4, WD = 4, L = 4, C = 3;
  localparam int HW = HH * WD, CE = CH + 1;
  localparam int DWR = ((CE + L - 1) / L) * 9, PWR = ((CH + L - 1) / L) * CE;

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
  int in_mem [CH*HW];
  int out_mem[CH*HW];

  odeblock #(.CH(CH), .HH(HH), .WD(WD), .LANES(L)) dut (
    .clk, .rst_n, .start, .busy, .done, .iters, .h_step,
    .in_addr, .in_data(act_t'(in_mem[in_addr])), .out_we, .out_addr, .out_data,
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

  int dw1[], pw1[], dw2[], pw2[], g1[], b1[], g2[], b2[], nolut[];

  task automatic run(input int c_iters);
    int z[], d[], m[], f[], cyc, t, h;
    layer_t Ldw, Lpw;
    h = (c_iters == 0) ? 0 : 1024 / c_iters;
    z = new[CH*HW];
    foreach (z[i]) begin in_mem[i] = int'($urandom_range(0, 8192)) - 4096; z[i] = in_mem[i]; end
    Ldw = '{cin:CH, add_time:1, t:0, cout:0, h:HH, w:WD, k3:1, s2:0, dw:1, bn:0, relu:0, quant:0, sa_inv:0, oscale:0, lutn:1};
    Lpw = '{cin:CE, add_time:0, t:0, cout:CH, h:HH, w:WD, k3:0, s2:0, dw:0, bn:1, relu:1, quant:0, sa_inv:0, oscale:0, lutn:1};
    for (int j = 0; j < c_iters; j++) begin
      t = sat20(longint'(j) * h);
      Ldw.t = t;
      conv_ref(Ldw, z, dw1, g1, b1, nolut, d);
      Lpw.relu = 1; conv_ref(Lpw, d, pw1, g1, b1, nolut, m);
      conv_ref(Ldw, m, dw2, g1, b1, nolut, d);
      Lpw.relu = 0; conv_ref(Lpw, d, pw2, g2, b2, nolut, f);
      foreach (z[i]) z[i] = euler_ref(z[i], h, f[i]);
    end
    iters = 16'(c_iters); h_step = act_t'(h);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    // copy in + copy out + per iteration: DW 2 * CE*HW*(9+1), PW 2 * HW*(CE+1)
    if (cyc > 2 * CH * HW + c_iters * (2 * CE * HW * 10 + 2 * HW * (CE + 1) + 2 * (L + 8)) + 8 ||
        cyc < 2 * CH * HW + c_iters * (2 * CE * HW * 9 + 2 * HW * CE)) begin
      failures++; $display("cycle count %0d unexpected", cyc);
    end
    foreach (z[i]) begin
      checks++;
      if (out_mem[i] != z[i]) begin
        failures++;
        if (failures < 10) $display("C=%0d out[%0d] = %0d expected %0d", c_iters, i, out_mem[i], z[i]);
      end
    end
    $display("C=%0d done in %0d cycles", c_iters, cyc);
  endtask

  initial begin
    dw1 = new[CE*9]; dw2 = new[CE*9]; pw1 = new[CH*CE]; pw2 = new[CH*CE];
    g1 = new[CH]; b1 = new[CH]; g2 = new[CH]; b2 = new[CH]; nolut = new[1];
    foreach (dw1[i]) begin dw1[i] = int'($urandom_range(0, 4096)) - 2048; dw2[i] = int'($urandom_range(0, 4096)) - 2048; end
    foreach (pw1[i]) begin pw1[i] = int'($urandom_range(0, 4096)) - 2048; pw2[i] = int'($urandom_range(0, 4096)) - 2048; end
    foreach (g1[i]) begin
      g1[i] = int'($urandom_range(2048, 6144)); b1[i] = int'($urandom_range(0, 2048)) - 1024;
      g2[i] = int'($urandom_range(2048, 6144)); b2[i] = int'($urandom_range(0, 2048)) - 1024;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // weights: flat index = row * L + lane
    for (int c = 0; c < CE; c++) for (int t = 0; t < 9; t++) begin
      ld(0, ((c / L) * 9 + t) * L + c % L, dw1[c*9+t]);
      ld(0, (DWR + PWR + (c / L) * 9 + t) * L + c % L, dw2[c*9+t]);
    end
    for (int oc = 0; oc < CH; oc++) for (int ic = 0; ic < CE; ic++) begin
      ld(0, (DWR + (oc / L) * CE + ic) * L + oc % L, pw1[oc*CE+ic]);
      ld(0, (2 * DWR + PWR + (oc / L) * CE + ic) * L + oc % L, pw2[oc*CE+ic]);
    end
    for (int c = 0; c < CH; c++) begin
      ld(1, c, (g1[c] << 16) | (b1[c] & 32'hffff));
      ld(1, CH + c, (g2[c] << 16) | (b2[c] & 32'hffff));
    end
    run(C);
    run(0);
    run(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
