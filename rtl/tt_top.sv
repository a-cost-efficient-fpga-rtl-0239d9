// tt_top: feature-extraction core of the Neural-ODE CNN-Transformer.
//
// The model's feature extractor is a fixed chain of five blocks:
//   ODEBlock1 (CH0 x H0 x H0, iterated C times) -> DSBlock1 (halves H, doubles
//   channels) -> ODEBlock2 (iterated) -> DSBlock2 -> MHSABlock (iterated)
// All parameters stay on chip, so DRAM traffic is only the parameter image
// (once), the input map and the output map. The host configures the core
// through AXI-Lite (ctrl_regs) and the core moves data with its own AXI
// master (axi_dma). Two operation modes, chosen by the MODE register:
//   load (0):      LEN 32-bit words from DRAM at SRC go to the on-chip
//                  parameter buffers starting at parameter word address DST;
//                  bits [28:26] of that address select the block (0 ODEBlock1,
//                  1 DSBlock1, 2 ODEBlock2, 3 DSBlock2, 4 MHSABlock), bits
//                  [25:23] the memory inside the block, bits [22:0] the word.
//   inference (1): CH0*H0*H0 words (Q10.10 in bits 19:0, channel-major) are
//                  read from SRC into the input buffer, the five blocks run
//                  one after another through two shared ping-pong buffers
//                  (input -> A -> B -> A -> B -> output), and the
//                  4*CH0*(H0/4)^2-word output map is written to OUT.
// The block chain, the two modes, the C register, on-chip parameters and the
// 128-bit AXI master / 32-bit AXI-Lite ports follow the paper; the register
// map, parameter address map and buffer ping-pong are this design's own.
// irq_done pulses when an operation ends; h = 1/C is formed here once.
module tt_top import tt_pkg::*; #(
  parameter int unsigned CH0    = 64,
  parameter int unsigned H0     = 24,
  parameter int unsigned HEADS  = 4,
  parameter int unsigned NBITS  = 8,
  parameter int unsigned L_ODE  = 64,
  parameter int unsigned L_DS   = 16,
  parameter int unsigned L_MHSA = 16,
  parameter int unsigned SC_K   = 3
) (
  input  logic          clk,
  input  logic          rst_n,
  // AXI4-Lite control slave
  input  logic [5:0]    s_axil_awaddr,
  input  logic          s_axil_awvalid,
  output logic          s_axil_awready,
  input  logic [31:0]   s_axil_wdata,
  input  logic [3:0]    s_axil_wstrb,
  input  logic          s_axil_wvalid,
  output logic          s_axil_wready,
  output logic [1:0]    s_axil_bresp,
  output logic          s_axil_bvalid,
  input  logic          s_axil_bready,
  input  logic [5:0]    s_axil_araddr,
  input  logic          s_axil_arvalid,
  output logic          s_axil_arready,
  output logic [31:0]   s_axil_rdata,
  output logic [1:0]    s_axil_rresp,
  output logic          s_axil_rvalid,
  input  logic          s_axil_rready,
  // AXI4 master (128-bit)
  output logic [31:0]   m_axi_araddr,
  output logic [7:0]    m_axi_arlen,
  output logic [2:0]    m_axi_arsize,
  output logic [1:0]    m_axi_arburst,
  output logic          m_axi_arvalid,
  input  logic          m_axi_arready,
  input  logic [127:0]  m_axi_rdata,
  input  logic          m_axi_rlast,
  input  logic          m_axi_rvalid,
  output logic          m_axi_rready,
  output logic [31:0]   m_axi_awaddr,
  output logic [7:0]    m_axi_awlen,
  output logic [2:0]    m_axi_awsize,
  output logic [1:0]    m_axi_awburst,
  output logic          m_axi_awvalid,
  input  logic          m_axi_awready,
  output logic [127:0]  m_axi_wdata,
  output logic [15:0]   m_axi_wstrb,
  output logic          m_axi_wlast,
  output logic          m_axi_wvalid,
  input  logic          m_axi_wready,
  input  logic          m_axi_bvalid,
  output logic          m_axi_bready,
  output logic          irq_done
);
  localparam int unsigned NIN  = CH0 * H0 * H0;
  localparam int unsigned NA   = CH0 * H0 * H0;
  localparam int unsigned NB   = CH0 * H0 * H0 / 2;
  localparam int unsigned NOUT = 4 * CH0 * (H0 / 4) * (H0 / 4);

  typedef enum logic [3:0] {T_IDLE, T_LOAD, T_IN, T_ODE1, T_DS1, T_ODE2, T_DS2, T_MHSA, T_OUT, T_DONE} tstate_t;
  tstate_t state;

  // control registers
  logic start, mode;
  logic [15:0] iters;
  logic [31:0] src_addr, dst_addr, len, out_addr, cycles;
  ctrl_regs #(.AXIL_AW(6)) u_regs (
    .clk, .rst_n,
    .s_axil_awaddr, .s_axil_awvalid, .s_axil_awready, .s_axil_wdata, .s_axil_wstrb,
    .s_axil_wvalid, .s_axil_wready, .s_axil_bresp, .s_axil_bvalid, .s_axil_bready,
    .s_axil_araddr, .s_axil_arvalid, .s_axil_arready, .s_axil_rdata, .s_axil_rresp,
    .s_axil_rvalid, .s_axil_rready,
    .start, .mode, .iters, .src_addr, .dst_addr, .len, .out_addr,
    .busy(state != T_IDLE), .done_evt(state == T_DONE), .cycles);

  // DMA
  logic rd_start, rd_word_valid, rd_done, wr_start, wr_done;
  logic [31:0] rd_word, src_idx, src_data;
  axi_dma #(.ADDR_W(32), .DATA_W(128), .MAX_BURST(16)) u_dma (
    .clk, .rst_n,
    .rd_start, .rd_addr(src_addr), .rd_len((state == T_LOAD) ? len : 32'(NIN)),
    .rd_word_valid, .rd_word, .rd_done,
    .wr_start, .wr_addr(out_addr), .wr_len(32'(NOUT)), .src_idx, .src_data, .wr_done,
    .m_axi_araddr, .m_axi_arlen, .m_axi_arsize, .m_axi_arburst, .m_axi_arvalid, .m_axi_arready,
    .m_axi_rdata, .m_axi_rlast, .m_axi_rvalid, .m_axi_rready,
    .m_axi_awaddr, .m_axi_awlen, .m_axi_awsize, .m_axi_awburst, .m_axi_awvalid, .m_axi_awready,
    .m_axi_wdata, .m_axi_wstrb, .m_axi_wlast, .m_axi_wvalid, .m_axi_wready,
    .m_axi_bvalid, .m_axi_bready);

  // Euler step h = 1/C in Q10.10
  act_t h_step;
  assign h_step = (iters == 0) ? '0 : act_t'(32'(1 << ACT_FRAC) / 32'(iters));

  // parameter load routing
  logic [31:0] wcnt;
  logic [31:0] pa;
  logic        ld_we [5];
  always_comb begin
    pa = dst_addr + wcnt;
    for (int b = 0; b < 5; b++) ld_we[b] = (state == T_LOAD) && rd_word_valid && (pa[28:26] == 3'(b));
  end

  // block handshakes
  logic [4:0] blk_start, blk_done;
  logic [FA_W-1:0] i_addr [5];
  logic [FA_W-1:0] o_addr [5];
  act_t o_data [5];
  logic [4:0] o_we;
  logic [4:0] blk_busy;
  act_t in_rd, a_rd, b_rd, out_rd;

  odeblock #(.CH(CH0), .HH(H0), .WD(H0), .LANES(L_ODE)) u_ode1 (
    .clk, .rst_n, .start(blk_start[0]), .busy(blk_busy[0]), .done(blk_done[0]), .iters, .h_step,
    .in_addr(i_addr[0]), .in_data(in_rd), .out_we(o_we[0]), .out_addr(o_addr[0]), .out_data(o_data[0]),
    .ld_we(ld_we[0]), .ld_sel(pa[25:23]), .ld_addr(pa[LD_AW-1:0]), .ld_data(rd_word));
  dsblock #(.CIN(CH0), .HH(H0), .WD(H0), .LANES(L_DS), .SC_K(SC_K), .NBITS(NBITS)) u_ds1 (
    .clk, .rst_n, .start(blk_start[1]), .busy(blk_busy[1]), .done(blk_done[1]),
    .in_addr(i_addr[1]), .in_data(a_rd), .out_we(o_we[1]), .out_addr(o_addr[1]), .out_data(o_data[1]),
    .ld_we(ld_we[1]), .ld_sel(pa[25:23]), .ld_addr(pa[LD_AW-1:0]), .ld_data(rd_word));
  odeblock #(.CH(2 * CH0), .HH(H0 / 2), .WD(H0 / 2), .LANES(L_ODE)) u_ode2 (
    .clk, .rst_n, .start(blk_start[2]), .busy(blk_busy[2]), .done(blk_done[2]), .iters, .h_step,
    .in_addr(i_addr[2]), .in_data(b_rd), .out_we(o_we[2]), .out_addr(o_addr[2]), .out_data(o_data[2]),
    .ld_we(ld_we[2]), .ld_sel(pa[25:23]), .ld_addr(pa[LD_AW-1:0]), .ld_data(rd_word));
  dsblock #(.CIN(2 * CH0), .HH(H0 / 2), .WD(H0 / 2), .LANES(L_DS), .SC_K(SC_K), .NBITS(NBITS)) u_ds2 (
    .clk, .rst_n, .start(blk_start[3]), .busy(blk_busy[3]), .done(blk_done[3]),
    .in_addr(i_addr[3]), .in_data(a_rd), .out_we(o_we[3]), .out_addr(o_addr[3]), .out_data(o_data[3]),
    .ld_we(ld_we[3]), .ld_sel(pa[25:23]), .ld_addr(pa[LD_AW-1:0]), .ld_data(rd_word));
  mhsablock #(.CH(4 * CH0), .DM(CH0), .HH(H0 / 4), .WD(H0 / 4), .HEADS(HEADS), .LANES(L_MHSA), .NBITS(NBITS)) u_mhsa (
    .clk, .rst_n, .start(blk_start[4]), .busy(blk_busy[4]), .done(blk_done[4]), .iters, .h_step,
    .in_addr(i_addr[4]), .in_data(b_rd), .out_we(o_we[4]), .out_addr(o_addr[4]), .out_data(o_data[4]),
    .ld_we(ld_we[4]), .ld_sel(pa[25:23]), .ld_addr(pa[LD_AW-1:0]), .ld_data(rd_word));

  // shared buffers
  logic a_we, b_we;
  logic [FA_W-1:0] a_waddr, b_waddr, a_raddr, b_raddr;
  act_t a_wdata, b_wdata;
  always_comb begin
    a_we    = o_we[0] || o_we[2];
    a_waddr = o_we[0] ? o_addr[0] : o_addr[2];
    a_wdata = o_we[0] ? o_data[0] : o_data[2];
    a_raddr = (state == T_DS2) ? i_addr[3] : i_addr[1];
    b_we    = o_we[1] || o_we[3];
    b_waddr = o_we[1] ? o_addr[1] : o_addr[3];
    b_wdata = o_we[1] ? o_data[1] : o_data[3];
    b_raddr = (state == T_MHSA) ? i_addr[4] : i_addr[2];
  end

  lane_ram #(.LANES(1), .DW(ACT_W), .DEPTH(NIN)) u_inbuf (
    .clk, .we(state == T_IN && rd_word_valid), .wlane(1'b0),
    .waddr($clog2(NIN)'(wcnt)), .wdata(rd_word[ACT_W-1:0]),
    .raddr($clog2(NIN)'(i_addr[0])), .rdata(in_rd));
  lane_ram #(.LANES(1), .DW(ACT_W), .DEPTH(NA)) u_bufa (
    .clk, .we(a_we), .wlane(1'b0), .waddr($clog2(NA)'(a_waddr)), .wdata(a_wdata),
    .raddr($clog2(NA)'(a_raddr)), .rdata(a_rd));
  lane_ram #(.LANES(1), .DW(ACT_W), .DEPTH(NB)) u_bufb (
    .clk, .we(b_we), .wlane(1'b0), .waddr($clog2(NB)'(b_waddr)), .wdata(b_wdata),
    .raddr($clog2(NB)'(b_raddr)), .rdata(b_rd));
  lane_ram #(.LANES(1), .DW(ACT_W), .DEPTH(NOUT)) u_outbuf (
    .clk, .we(o_we[4]), .wlane(1'b0), .waddr($clog2(NOUT)'(o_addr[4])), .wdata(o_data[4]),
    .raddr($clog2(NOUT)'(src_idx)), .rdata(out_rd));
  assign src_data = 32'(signed'(out_rd));

  // sequencer
  logic launched;
  always_comb begin
    blk_start = '0;
    rd_start  = 1'b0;
    wr_start  = 1'b0;
    if (!launched) begin
      case (state)
        T_LOAD, T_IN: rd_start = 1'b1;
        T_ODE1: blk_start[0] = 1'b1;
        T_DS1:  blk_start[1] = 1'b1;
        T_ODE2: blk_start[2] = 1'b1;
        T_DS2:  blk_start[3] = 1'b1;
        T_MHSA: blk_start[4] = 1'b1;
        T_OUT:  wr_start = 1'b1;
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= T_IDLE; launched <= 1'b0; wcnt <= '0; cycles <= '0; irq_done <= 1'b0;
    end else begin
      irq_done <= 1'b0;
      if (state != T_IDLE) cycles <= cycles + 1;
      if (state != T_IDLE && state != T_DONE) launched <= 1'b1;
      if (rd_word_valid) wcnt <= wcnt + 1;
      case (state)
        T_IDLE: if (start) begin
          cycles <= '0; wcnt <= '0; launched <= 1'b0;
          if (mode) state <= T_IN;
          else if (len == 0) state <= T_DONE;
          else state <= T_LOAD;
        end
        T_LOAD: if (rd_done) state <= T_DONE;
        T_IN:   if (rd_done) begin state <= T_ODE1; launched <= 1'b0; end
        T_ODE1: if (blk_done[0]) begin state <= T_DS1;  launched <= 1'b0; end
        T_DS1:  if (blk_done[1]) begin state <= T_ODE2; launched <= 1'b0; end
        T_ODE2: if (blk_done[2]) begin state <= T_DS2;  launched <= 1'b0; end
        T_DS2:  if (blk_done[3]) begin state <= T_MHSA; launched <= 1'b0; end
        T_MHSA: if (blk_done[4]) begin state <= T_OUT;  launched <= 1'b0; end
        T_OUT:  if (wr_done) state <= T_DONE;
        T_DONE: begin irq_done <= 1'b1; launched <= 1'b0; state <= T_IDLE; end
        default: state <= T_IDLE;
      endcase
    end
  end

  // only one block may be running at a time: the shared buffers rely on it
  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(blk_busy))
    else $error("two feature-extraction blocks busy at once");
endmodule
