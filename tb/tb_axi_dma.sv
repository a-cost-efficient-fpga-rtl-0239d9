// tb_axi_dma: exercises the AXI4 master against the stalling memory model.
// Reads: several transfers of random length from 16-byte aligned addresses,
// one deliberately straddling a 4 KB boundary and one longer than a burst;
// the word stream must equal memory contents in order, rd_done must pulse
// once after the last word. Writes: random lengths (including ones that end
// mid-beat) from a source array; memory must hold exactly the written words
// and the word after the block must be untouched. The memory model checks
// burst legality (<= 16 beats, no 4 KB crossing, WLAST placement).
module tb_axi_dma;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rd_start = 0, wr_start = 0, rd_word_valid, rd_done, wr_done;
  logic [31:0] rd_addr, rd_len, rd_word, wr_addr, wr_len, src_idx, src_data;
  logic [31:0] araddr, awaddr;
  logic [7:0] arlen, awlen;
  logic [2:0] arsize, awsize;
  logic [1:0] arburst, awburst;
  logic arvalid, arready, rlast, rvalid, rready, awvalid, awready, wlast, wvalid, wready, bvalid, bready;
  logic [127:0] rdata, wdata;
  logic [15:0] wstrb;
  int src[4096];

  assign src_data = src[src_idx % 4096];

  axi_dma dut (.clk, .rst_n, .rd_start, .rd_addr, .rd_len, .rd_word_valid, .rd_word, .rd_done,
    .wr_start, .wr_addr, .wr_len, .src_idx, .src_data, .wr_done,
    .m_axi_araddr(araddr), .m_axi_arlen(arlen), .m_axi_arsize(arsize), .m_axi_arburst(arburst),
    .m_axi_arvalid(arvalid), .m_axi_arready(arready), .m_axi_rdata(rdata), .m_axi_rlast(rlast),
    .m_axi_rvalid(rvalid), .m_axi_rready(rready), .m_axi_awaddr(awaddr), .m_axi_awlen(awlen),
    .m_axi_awsize(awsize), .m_axi_awburst(awburst), .m_axi_awvalid(awvalid), .m_axi_awready(awready),
    .m_axi_wdata(wdata), .m_axi_wstrb(wstrb), .m_axi_wlast(wlast), .m_axi_wvalid(wvalid),
    .m_axi_wready(wready), .m_axi_bvalid(bvalid), .m_axi_bready(bready));

  axi_mem_model u_mem (.clk, .rst_n, .araddr, .arlen, .arsize, .arburst, .arvalid, .arready,
    .rdata, .rlast, .rvalid, .rready, .awaddr, .awlen, .awsize, .awburst, .awvalid, .awready,
    .wdata, .wstrb, .wlast, .wvalid, .wready, .bvalid, .bready);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic do_read(input int unsigned a, input int n);
    int got = 0, dones = 0;
    for (int i = 0; i < n; i++) u_mem.poke(a + 4 * i, $urandom());
    @(negedge clk); rd_addr = a; rd_len = n; rd_start = 1;
    @(negedge clk); rd_start = 0;
    while (dones == 0) begin
      @(posedge clk);
      if (rd_word_valid) begin
        checks++;
        if (rd_word != u_mem.peek(a + 4 * got)) begin
          failures++; $display("read %h word %0d = %h expected %h", a, got, rd_word, u_mem.peek(a + 4 * got));
        end
        got++;
      end
      if (rd_done) dones++;
    end
    repeat (4) @(posedge clk) if (rd_word_valid || rd_done) begin failures++; $display("read: extra activity"); end
    checks++;
    if (got != n) begin failures++; $display("read %h: %0d words, expected %0d", a, got, n); end
  endtask

  task automatic do_write(input int unsigned a, input int n);
    u_mem.poke(a + 4 * n, 32'hdeadbeef);
    foreach (src[i]) src[i] = $urandom();
    @(negedge clk); wr_addr = a; wr_len = n; wr_start = 1;
    @(negedge clk); wr_start = 0;
    while (!wr_done) @(negedge clk);
    for (int i = 0; i < n; i++) begin
      checks++;
      if (u_mem.peek(a + 4 * i) != src[i]) begin
        failures++; $display("write %h word %0d = %h expected %h", a, i, u_mem.peek(a + 4 * i), src[i]);
      end
    end
    checks++;
    if (u_mem.peek(a + 4 * n) != 32'hdeadbeef) begin failures++; $display("write %h: overrun", a); end
  endtask

  initial begin
    int unsigned a;
    repeat (3) @(posedge clk);
    rst_n = 1;
    do_read(32'h1000_0000, 7);
    do_read(32'h1000_0FE0, 40);          // crosses a 4 KB boundary
    do_read(32'h1000_2000, 300);         // several full bursts
    do_write(32'h2000_0000, 5);
    do_write(32'h2000_1FC0, 77);         // crosses a 4 KB boundary
    for (int r = 0; r < 4; r++) begin
      a = 32'h3000_0000 + ($urandom_range(0, 1023) << 4);
      do_read(a, $urandom_range(1, 200));
      do_write(a + 32'h0010_0000, $urandom_range(1, 200));
    end
    checks++;
    if (u_mem.errors != 0) begin failures++; $display("%0d AXI protocol errors", u_mem.errors); end
    checks++;
    if (u_mem.max_len != 16 || u_mem.boundary_bursts == 0) begin
      failures++; $display("burst coverage: max %0d, boundary %0d", u_mem.max_len, u_mem.boundary_bursts);
    end
    $display("bursts rd=%0d wr=%0d max=%0d at4k=%0d", u_mem.rd_bursts, u_mem.wr_bursts, u_mem.max_len, u_mem.boundary_bursts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
