// axi_mem_model: behavioural AXI4 slave memory for the testbenches, standing
// in for the DDR behind the HP port.
//
// Storage is a sparse array of 32-bit words keyed by byte address / 4
// (unwritten words read as 0), accessed by the testbench through poke/peek.
// One read burst and one write burst are served at a time; ARREADY, RVALID,
// AWREADY and WREADY are throttled at random when STALL is set. Every burst
// is checked: INCR type, full-width beats, at most 16 beats, no 4 KB
// boundary crossing, WLAST exactly on the last beat. Violations are counted
// in 'errors'; bursts, beats and the largest burst are counted for coverage.
module axi_mem_model #(
  parameter int unsigned ADDR_W = 32,
  parameter int unsigned DATA_W = 128,
  parameter bit          STALL  = 1'b1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [ADDR_W-1:0]   araddr,
  input  logic [7:0]          arlen,
  input  logic [2:0]          arsize,
  input  logic [1:0]          arburst,
  input  logic                arvalid,
  output logic                arready,
  output logic [DATA_W-1:0]   rdata,
  output logic                rlast,
  output logic                rvalid,
  input  logic                rready,
  input  logic [ADDR_W-1:0]   awaddr,
  input  logic [7:0]          awlen,
  input  logic [2:0]          awsize,
  input  logic [1:0]          awburst,
  input  logic                awvalid,
  output logic                awready,
  input  logic [DATA_W-1:0]   wdata,
  input  logic [DATA_W/8-1:0] wstrb,
  input  logic                wlast,
  input  logic                wvalid,
  output logic                wready,
  output logic                bvalid,
  input  logic                bready
);
  localparam int unsigned WPB = DATA_W / 32, BB = DATA_W / 8;

  logic [31:0] mem [int unsigned];
  int errors = 0, rd_bursts = 0, wr_bursts = 0, rd_beats = 0, wr_beats = 0, max_len = 0;
  int boundary_bursts = 0;   // bursts that end exactly at a 4 KB boundary

  function automatic void poke(input int unsigned byte_addr, input logic [31:0] d);
    mem[byte_addr >> 2] = d;
  endfunction
  function automatic logic [31:0] peek(input int unsigned byte_addr);
    return mem.exists(byte_addr >> 2) ? mem[byte_addr >> 2] : 32'd0;
  endfunction

  function automatic void check_burst(input logic [ADDR_W-1:0] a, input logic [7:0] len,
                                      input logic [2:0] sz, input logic [1:0] bt);
    longint first, last;
    first = longint'(a);
    last  = first + longint'(len + 1) * BB - 1;
    if (bt != 2'b01 || sz != 3'($clog2(BB)) || len > 8'd15 || (first >> 12) != (last >> 12) || a[3:0] != 0) begin
      errors++;
      $display("axi_mem_model: bad burst addr=%h len=%0d size=%0d burst=%0d", a, len, sz, bt);
    end
    if (((last + 1) & 4095) == 0) boundary_bursts++;
    if (int'(len) + 1 > max_len) max_len = int'(len) + 1;
  endfunction

  // read channel
  logic r_act;
  logic [ADDR_W-1:0] r_a;
  int r_left;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_act <= 1'b0; arready <= 1'b0; rvalid <= 1'b0; rlast <= 1'b0; rdata <= '0; r_a <= '0; r_left <= 0;
    end else begin
      arready <= !r_act && (!STALL || ($urandom_range(0, 3) != 0));
      if (arvalid && arready && !r_act) begin
        check_burst(araddr, arlen, arsize, arburst);
        rd_bursts++;
        r_act <= 1'b1; r_a <= araddr; r_left <= int'(arlen) + 1; arready <= 1'b0;
      end
      if (rvalid && rready) begin
        rvalid <= 1'b0;
        if (rlast) r_act <= 1'b0;
      end
      if (r_act && (!rvalid || rready) && r_left > 0 && (!STALL || $urandom_range(0, 3) != 0)) begin
        for (int w = 0; w < WPB; w++) rdata[32*w +: 32] <= peek(r_a + 32'(4 * w));
        rvalid <= 1'b1; rlast <= (r_left == 1);
        r_a <= r_a + ADDR_W'(BB); r_left <= r_left - 1;
        rd_beats++;
      end
    end
  end

  // write channel
  logic w_act;
  logic [ADDR_W-1:0] w_a;
  int w_left;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_act <= 1'b0; awready <= 1'b0; wready <= 1'b0; bvalid <= 1'b0; w_a <= '0; w_left <= 0;
    end else begin
      awready <= !w_act && !bvalid && (!STALL || ($urandom_range(0, 3) != 0));
      wready  <= w_act && (!STALL || ($urandom_range(0, 2) != 0));
      if (awvalid && awready && !w_act && !bvalid) begin
        check_burst(awaddr, awlen, awsize, awburst);
        wr_bursts++;
        w_act <= 1'b1; w_a <= awaddr; w_left <= int'(awlen) + 1; awready <= 1'b0;
      end
      if (wvalid && wready && w_act) begin
        for (int w = 0; w < WPB; w++)
          if (wstrb[4*w]) poke(w_a + 32'(4 * w), wdata[32*w +: 32]);
        if (wlast != (w_left == 1)) begin
          errors++;
          $display("axi_mem_model: WLAST wrong at addr %h", w_a);
        end
        w_a <= w_a + ADDR_W'(BB); w_left <= w_left - 1;
        wr_beats++;
        if (w_left == 1) begin w_act <= 1'b0; wready <= 1'b0; bvalid <= 1'b1; end
      end
      if (bvalid && bready) bvalid <= 1'b0;
    end
  end
endmodule
