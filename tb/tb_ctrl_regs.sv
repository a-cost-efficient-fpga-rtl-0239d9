// tb_ctrl_regs: AXI-Lite register file. Checks reset values, write/read-back
// of every register with random data and byte strobes (including address and
// data presented in different cycles; ready is sampled 1 time unit after
// the inputs change so the handshake is seen exactly once), the one-cycle start pulse, that start
// is ignored while busy, the sticky done bit (set by done_evt, cleared by a
// new start), the live busy bit and the cycle counter read path.
module tb_ctrl_regs;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [5:0] awaddr = 0, araddr = 0;
  logic awvalid = 0, wvalid = 0, bready = 1, arvalid = 0, rready = 1;
  logic awready, wready, bvalid, arready, rvalid;
  logic [31:0] wdata = 0, rdata;
  logic [3:0] wstrb = 0;
  logic [1:0] bresp, rresp;
  logic start, mode, busy = 0, done_evt = 0;
  logic [15:0] iters;
  logic [31:0] src_addr, dst_addr, len, out_addr, cycles = 0;
  int starts = 0;

  ctrl_regs dut (.clk, .rst_n,
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wstrb(wstrb), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(bready),
    .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(rready),
    .start, .mode, .iters, .src_addr, .dst_addr, .len, .out_addr, .busy, .done_evt, .cycles);

  always_ff @(posedge clk) if (start) starts++;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input int a, input logic [31:0] d, input logic [3:0] s, input bit split);
    @(negedge clk);
    awaddr = 6'(a); awvalid = 1; wdata = d; wstrb = s; wvalid = !split;
    if (split) begin @(negedge clk); wvalid = 1; end
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

  task automatic expect_eq(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("%s = %h expected %h", what, got, exp); end
  endtask

  initial begin
    logic [31:0] d, shadow[8], v;
    int s0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    rd('h0C, d); expect_eq("ITERS reset", d, 10);
    rd('h08, d); expect_eq("MODE reset", d, 0);
    rd('h04, d); expect_eq("STATUS reset", d, 0);
    shadow[3] = 10; shadow[2] = 0;
    for (int r = 4; r <= 7; r++) shadow[r] = 0;
    for (int n = 0; n < 40; n++) begin
      int r;
      logic [3:0] s;
      r = $urandom_range(2, 7);
      v = $urandom(); s = 4'($urandom_range(1, 15));
      wr(r * 4, v, s, n % 2 == 1);
      if (r == 2) begin if (s[0]) shadow[2] = {31'd0, v[0]}; end
      else for (int b = 0; b < 4; b++) if (s[b]) shadow[r][8*b +: 8] = v[8*b +: 8];
      if (r == 3) shadow[3][31:16] = 0;
      rd(r * 4, d); expect_eq($sformatf("reg %0d", r), d, shadow[r]);
    end
    expect_eq("mode port", {31'd0, mode}, shadow[2]);
    expect_eq("iters port", {16'd0, iters}, shadow[3]);
    expect_eq("src port", src_addr, shadow[4]);
    expect_eq("dst port", dst_addr, shadow[5]);
    expect_eq("len port", len, shadow[6]);
    expect_eq("out port", out_addr, shadow[7]);
    cycles = 32'h1234_5678;
    rd('h20, d); expect_eq("CYCLES", d, 32'h1234_5678);
    s0 = starts;
    wr('h00, 1, 4'hF, 0);
    repeat (2) @(posedge clk);
    expect_eq("one start pulse", starts - s0, 1);
    busy = 1;
    rd('h04, d); expect_eq("STATUS busy", d, 1);
    wr('h00, 1, 4'hF, 0);
    repeat (2) @(posedge clk);
    expect_eq("start ignored while busy", starts - s0, 1);
    @(negedge clk); busy = 0; done_evt = 1; @(negedge clk); done_evt = 0;
    rd('h04, d); expect_eq("STATUS done", d, 2);
    rd('h04, d); expect_eq("done sticky", d, 2);
    wr('h00, 1, 4'hF, 1);
    rd('h04, d); expect_eq("done cleared by start", d, 0);
    expect_eq("second start", starts - s0, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
