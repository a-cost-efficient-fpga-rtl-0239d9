// dsblock: down-sampling block (DSBlock1 / DSBlock2), run once per image.
//
// Halves height and width and doubles the channels, ResNet style:
//   main     = BN_b(Conv3x3_s1(ReLU(BN_a(Conv3x3_s2(x)))))
//   shortcut = ReLU(BN_s(ConvSC_s2(x)))        (SC_K x SC_K kernel, default 3)
//   y        = main + shortcut
// The layer list, the shortcut's 3x3 stride-2 kernel and its ReLU before the
// adder follow the paper's DSBlock figure. The block belongs to the quantized
// part of the model: every convolution quantizes its input with its own I-LUT
// and uses signed NBITS-bit weights.
//
// Operation: three conv_engine passes. Pass 0 computes the shortcut into
// scbuf, pass 1 the first main convolution into midbuf, pass 2 the second
// main convolution, whose results are added to scbuf and written straight
// to the shared output buffer. The input map is read from the shared input
// buffer in place.
//
// Interface: start/done pulses; in_addr/in_data and out_we/out_addr/out_data
// address maps channel-major. Parameter load port ld_sel: 0 = weights (flat
// index row * LANES + lane; rows of conv_a, conv_b, shortcut in that order),
// 1 = BatchNorm words {scale, bias} for BN_a, BN_b, BN_s (2*CIN each),
// 2 = I-LUTs (2^n K entries each, conv_a, conv_b, shortcut),
// 3 = scales: words 0..2 = 2^n K / s_a, words 3..5 = output scale
// s_a s_w / 2^(2n) * 2^26, in the order conv_a, conv_b, shortcut.
module dsblock import tt_pkg::*; #(
  parameter int unsigned CIN   = 64,
  parameter int unsigned HH    = 24,
  parameter int unsigned WD    = 24,
  parameter int unsigned LANES = 16,
  parameter int unsigned SC_K  = 3,
  parameter int unsigned NBITS = 8,
  localparam int unsigned LW   = (LANES > 1) ? $clog2(LANES) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              busy,
  output logic              done,
  output logic [FA_W-1:0]   in_addr,
  input  act_t              in_data,
  output logic              out_we,
  output logic [FA_W-1:0]   out_addr,
  output act_t              out_data,
  input  logic              ld_we,
  input  logic [2:0]        ld_sel,
  input  logic [LD_AW-1:0]  ld_addr,
  input  logic [31:0]       ld_data
);
  localparam int unsigned COUT = 2 * CIN;
  localparam int unsigned NO   = COUT * (HH / 2) * (WD / 2);
  localparam int unsigned G    = ceil_div(COUT, LANES);
  localparam int unsigned RA   = G * CIN * 9;
  localparam int unsigned RB   = G * COUT * 9;
  localparam int unsigned RS   = G * CIN * SC_K * SC_K;
  localparam int unsigned WROWS = RA + RB + RS;
  localparam int unsigned LUTN = (1 << NBITS) * LUT_K;

  typedef enum logic [1:0] {S_IDLE, S_START, S_RUN, S_DONE} state_t;
  state_t state;
  logic [1:0] pass;     // 0 = shortcut, 1 = conv_a, 2 = conv_b

  logic [31:0] scale [6];

  conv_cfg_t cfg;
  logic eng_busy, eng_done, eng_ov;
  logic [FA_W-1:0] eng_in_addr, eng_oaddr;
  act_t eng_in_data, eng_odata, mid_rd, sc_rd;
  logic [WA_W-1:0] w_addr;
  logic [LANES*NBITS-1:0] w_data;
  logic [15:0] bn_addr, lut_addr;
  logic [31:0] bn_data;
  logic [NBITS-1:0] lut_data;

  always_comb begin
    cfg = '0;
    cfg.cout = 10'(COUT);
    cfg.bn = 1'b1;
    cfg.stride2 = (pass != 2'd2);
    cfg.hin = (pass == 2'd2) ? 6'(HH / 2) : 6'(HH);
    cfg.win = (pass == 2'd2) ? 6'(WD / 2) : 6'(WD);
    cfg.cin = (pass == 2'd2) ? 10'(COUT) : 10'(CIN);
    cfg.k3  = (pass == 2'd0) ? (SC_K == 3) : 1'b1;
    cfg.relu = (pass != 2'd2);
    case (pass)
      2'd0:    begin cfg.w_base = WA_W'(RA + RB); cfg.bn_base = 16'(2 * COUT); cfg.lut_base = 16'(2 * LUTN);
                     cfg.sa_inv = scale[2]; cfg.oscale = scale[5]; end
      2'd1:    begin cfg.w_base = '0;             cfg.bn_base = 16'd0;        cfg.lut_base = 16'd0;
                     cfg.sa_inv = scale[0]; cfg.oscale = scale[3]; end
      default: begin cfg.w_base = WA_W'(RA);      cfg.bn_base = 16'(COUT);    cfg.lut_base = 16'(LUTN);
                     cfg.sa_inv = scale[1]; cfg.oscale = scale[4]; end
    endcase
  end

  conv_engine #(.LANES(LANES), .QUANT(1'b1), .NBITS(NBITS)) u_eng (
    .clk, .rst_n, .start(state == S_START), .cfg, .busy(eng_busy), .done(eng_done),
    .in_addr(eng_in_addr), .in_data(eng_in_data),
    .w_addr, .w_data, .bn_addr, .bn_data, .lut_addr, .lut_data,
    .o_valid(eng_ov), .o_addr(eng_oaddr), .o_data(eng_odata));

  assign in_addr     = eng_in_addr;
  assign eng_in_data = (pass == 2'd2) ? mid_rd : in_data;
  assign out_we      = (state == S_RUN) && (pass == 2'd2) && eng_ov;
  assign out_addr    = eng_oaddr;
  assign out_data    = sat_act(80'(eng_odata) + 80'(sc_rd));

  lane_ram #(.LANES(1), .DW(ACT_W), .DEPTH(NO)) u_sc (
    .clk, .we(state == S_RUN && pass == 2'd0 && eng_ov), .wlane(1'b0),
    .waddr($clog2(NO)'(eng_oaddr)), .wdata(eng_odata),
    .raddr($clog2(NO)'(eng_oaddr)), .rdata(sc_rd));
  lane_ram #(.LANES(1), .DW(ACT_W), .DEPTH(NO)) u_mid (
    .clk, .we(state == S_RUN && pass == 2'd1 && eng_ov), .wlane(1'b0),
    .waddr($clog2(NO)'(eng_oaddr)), .wdata(eng_odata),
    .raddr($clog2(NO)'(eng_in_addr)), .rdata(mid_rd));
  lane_ram #(.LANES(LANES), .DW(NBITS), .DEPTH(WROWS)) u_w (
    .clk, .we(ld_we && ld_sel == 3'd0), .wlane(LW'(ld_addr)),
    .waddr($clog2(WROWS)'(ld_addr >> LW)), .wdata(ld_data[NBITS-1:0]),
    .raddr($clog2(WROWS)'(w_addr)), .rdata(w_data));
  lane_ram #(.LANES(1), .DW(32), .DEPTH(3 * COUT)) u_bn (
    .clk, .we(ld_we && ld_sel == 3'd1), .wlane(1'b0),
    .waddr($clog2(3 * COUT)'(ld_addr)), .wdata(ld_data),
    .raddr($clog2(3 * COUT)'(bn_addr)), .rdata(bn_data));
  lane_ram #(.LANES(1), .DW(NBITS), .DEPTH(3 * LUTN)) u_lut (
    .clk, .we(ld_we && ld_sel == 3'd2), .wlane(1'b0),
    .waddr($clog2(3 * LUTN)'(ld_addr)), .wdata(ld_data[NBITS-1:0]),
    .raddr($clog2(3 * LUTN)'(lut_addr)), .rdata(lut_data));

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (ld_we && ld_sel == 3'd3 && ld_addr < LD_AW'(6)) scale[ld_addr[2:0]] <= ld_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; pass <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE:  if (start) begin pass <= '0; state <= S_START; end
        S_START: state <= S_RUN;
        S_RUN:   if (eng_done) begin
          if (pass == 2'd2) state <= S_DONE;
          else begin pass <= pass + 1'b1; state <= S_START; end
        end
        S_DONE:  begin done <= 1'b1; state <= S_IDLE; end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
