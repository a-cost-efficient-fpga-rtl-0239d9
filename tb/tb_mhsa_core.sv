// tb_mhsa_core: checks the attention core (DM = 8, 3 x 3 positions,
// 2 heads) against a reference model of the same fixed-point arithmetic:
// logits q.(k + R_h + R_w), scaling by 1/sqrt(D_h), ReLU, A.V, then
// LayerNorm over all outputs with per-value gamma/beta. Two runs with fresh
// random data; every output word and the cycle count are checked.
module tb_mhsa_core;
  import tt_pkg::*;
  import tt_ref_pkg::*;

  localparam int DM = 8, HH = 3, WD = 3, HEADS = 2;
  localparam int N = HH * WD, DH = DM / HEADS, TOT = DM * N;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, busy, done, o_we;
  logic [FA_W-1:0] q_addr, k_addr, v_addr, ln_addr, o_raddr, o_waddr;
  logic [11:0] rh_addr, rw_addr;
  act_t o_wdata;
  int qm[TOT], km[TOT], vm[TOT], om[TOT], rh[HH*DM], rw[WD*DM], lg[TOT], lb[TOT];

  mhsa_core #(.DM(DM), .HH(HH), .WD(WD), .HEADS(HEADS)) dut (
    .clk, .rst_n, .start, .busy, .done,
    .q_addr, .q_data(act_t'(qm[q_addr % TOT])),
    .k_addr, .k_data(act_t'(km[k_addr % TOT])),
    .v_addr, .v_data(act_t'(vm[v_addr % TOT])),
    .rh_addr, .rh_data(par_t'(rh[rh_addr % (HH*DM)])),
    .rw_addr, .rw_data(par_t'(rw[rw_addr % (WD*DM)])),
    .ln_addr, .ln_data({lg[ln_addr % TOT][15:0], lb[ln_addr % TOT][15:0]}),
    .o_raddr, .o_rdata(act_t'(om[o_raddr % TOT])),
    .o_we, .o_waddr, .o_wdata);

  always_ff @(posedge clk) if (o_we) om[o_waddr] <= int'(o_wdata);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint isqrt_ref(input longint v);
    longint r;
    r = longint'($floor($sqrt(real'(v))));
    while (r * r > v) r--;
    while ((r + 1) * (r + 1) <= v) r++;
    return r;
  endfunction

  task automatic run_case(input int amp);
    int ref_o[TOT], a[N], c, cyc;
    longint acc, sum, sumsq, mean, vr, sd, inv, isq, nrm;
    foreach (qm[x]) begin
      qm[x] = int'($urandom_range(0, 2 * amp)) - amp;
      km[x] = int'($urandom_range(0, 2 * amp)) - amp;
      vm[x] = int'($urandom_range(0, 2 * amp)) - amp;
      lg[x] = int'($urandom_range(2048, 6144));
      lb[x] = int'($urandom_range(0, 2048)) - 1024;
    end
    foreach (rh[x]) rh[x] = int'($urandom_range(0, 4096)) - 2048;
    foreach (rw[x]) rw[x] = int'($urandom_range(0, 4096)) - 2048;
    isq = (longint'(1) << 24) / isqrt_ref(longint'(DH) << 24);
    sum = 0; sumsq = 0;
    for (int hd = 0; hd < HEADS; hd++)
      for (int i = 0; i < N; i++) begin
        for (int j = 0; j < N; j++) begin
          acc = 0;
          for (int d = 0; d < DH; d++) begin
            c = hd * DH + d;
            acc += longint'(qm[c*N+i]) * (longint'(km[c*N+j]) +
                   ((longint'(rh[(j / WD)*DM + c]) + rw[(j % WD)*DM + c]) >>> 2));
          end
          acc = ((acc >>> 10) * isq) >>> 12;
          a[j] = (acc < 0) ? 0 : sat20(acc);
        end
        for (int d = 0; d < DH; d++) begin
          c = hd * DH + d;
          acc = 0;
          for (int j = 0; j < N; j++) acc += longint'(a[j]) * vm[c*N+j];
          ref_o[c*N+i] = sat20(acc >>> 10);
          sum += ref_o[c*N+i];
          sumsq += longint'(ref_o[c*N+i]) * ref_o[c*N+i];
        end
      end
    mean = sum / TOT;
    vr = sumsq / TOT - mean * mean;
    if (vr < 1) vr = 1;
    sd = isqrt_ref(vr);
    inv = ((longint'(1) << 26) / sd) & 64'hffffffff;
    mean = sat20(mean);
    foreach (ref_o[x]) begin
      nrm = ((longint'(ref_o[x]) - mean) * inv) >>> 16;
      ref_o[x] = bn_ref(sat20(nrm), lg[x], lb[x]);
    end

    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc < 2 * HEADS * N * N * DH + TOT || cyc > 2 * HEADS * N * N * DH + TOT + 8) begin
      failures++; $display("cycle count %0d unexpected", cyc);
    end
    foreach (ref_o[x]) begin
      checks++;
      if (om[x] != ref_o[x]) begin
        failures++;
        if (failures < 10) $display("o[%0d] = %0d expected %0d", x, om[x], ref_o[x]);
      end
    end
    $display("case amp=%0d: %0d cycles, sample out %0d %0d %0d", amp, cyc, om[0], om[1], om[TOT-1]);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_case(2048);
    run_case(6000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
