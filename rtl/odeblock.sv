// odeblock: one Neural-ODE block (ODEBlock1 / ODEBlock2 of the model).
//
// Solves dz/dt = f(z, t) with C forward-Euler steps, reusing one set of
// parameters for every step (which is what makes the model small):
//   for j = 0 .. C-1:  t = j*h,  z <- z + h * f(z, t),   h = 1/C
//   f(z,t) = BN2(DSC2([ ReLU(BN1(DSC1([z, t]))), t ]))
// where [., t] appends a channel filled with t ("Add time") and each DSC is a
// depth-wise 3x3 convolution on Ch+1 channels followed by a point-wise
// (Ch+1) -> Ch convolution. This layer list and the Euler update follow the
// paper; t_0 = 0 is this design's choice.
//
// The block first copies its input map from the shared buffer into its state
// buffer z, runs C iterations (four conv_engine passes each: DW1 -> dwbuf,
// PW1+BN1+ReLU -> midbuf, DW2 -> dwbuf, PW2+BN2 then Euler update in place in
// z), and finally copies z to the shared output buffer. Parameters are
// fixed point (this block is not quantized in the implemented model).
//
// Interface: start pulse, done pulse; iters = C and h_step = 1/C (Q10.10)
// must be stable while busy. in_addr/in_data read the shared input buffer,
// out_we/out_addr/out_data write the shared output buffer (channel-major).
// Parameter load port: ld_sel 0 = weights (flat index: row * LANES + lane,
// layer rows DW1, PW1, DW2, PW2 in that order, see the base constants
// below), ld_sel 1 = BatchNorm words {scale, bias}, BN1 then BN2.
// Timing: about H*W*(2*CH + C*(18*(CH+1) + 2*(CH+1)*ceil(CH/LANES))) cycles.
module odeblock import tt_pkg::*; #(
  parameter int unsigned CH    = 64,
  parameter int unsigned HH    = 24,
  parameter int unsigned WD    = 24,
  parameter int unsigned LANES = 64,
  localparam int unsigned LW   = (LANES > 1) ? $clog2(LANES) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              busy,
  output logic              done,
  input  logic [15:0]       iters,
  input  act_t              h_step,
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
  localparam int unsigned HW   = HH * WD;
  localparam int unsigned NZ   = CH * HW;
  localparam int unsigned NDW  = (CH + 1) * HW;
  localparam int unsigned DWR  = ceil_div(CH + 1, LANES) * 9;
  localparam int unsigned PWR  = ceil_div(CH, LANES) * (CH + 1);
  localparam int unsigned WROWS = 2 * (DWR + PWR);
  localparam int unsigned W_DW1 = 0;
  localparam int unsigned W_PW1 = DWR;
  localparam int unsigned W_DW2 = DWR + PWR;
  localparam int unsigned W_PW2 = 2 * DWR + PWR;

  typedef enum logic [2:0] {S_IDLE, S_COPYIN, S_START, S_RUN, S_COPYOUT, S_DONE} state_t;
  state_t state;
  logic [1:0]  layer;           // 0..3 = DW1, PW1, DW2, PW2
  logic [15:0] j;               // iteration index
  logic [FA_W-1:0] cnt;
  act_t        t_val;

  // engine
  conv_cfg_t cfg;
  logic eng_start, eng_busy, eng_done, eng_ov;
  logic [FA_W-1:0] eng_in_addr, eng_oaddr;
  act_t eng_in_data, eng_odata;
  logic [WA_W-1:0] w_addr;
  logic [LANES*PAR_W-1:0] w_data;
  logic [15:0] bn_addr, lut_addr;
  logic [31:0] bn_data;

  // buffers
  act_t z_rd, dw_rd, mid_rd;
  logic [FA_W-1:0] z_raddr, z_waddr;
  logic z_we;
  act_t z_wdata;

  always_comb begin
    logic signed [79:0] tp;
    tp    = (80'(signed'({1'b0, j})) * 80'(h_step));
    t_val = sat_act(tp);
    cfg = '0;
    cfg.t_val = t_val;
    cfg.hin = 6'(HH); cfg.win = 6'(WD);
    cfg.cout = 10'(CH);
    case (layer)
      2'd0, 2'd2: begin
        cfg.cin = 10'(CH); cfg.add_time = 1'b1; cfg.k3 = 1'b1; cfg.dw = 1'b1;
        cfg.w_base = (layer == 2'd0) ? WA_W'(W_DW1) : WA_W'(W_DW2);
      end
      default: begin
        cfg.cin = 10'(CH + 1); cfg.bn = 1'b1; cfg.relu = (layer == 2'd1);
        cfg.w_base  = (layer == 2'd1) ? WA_W'(W_PW1) : WA_W'(W_PW2);
        cfg.bn_base = (layer == 2'd1) ? 16'd0 : 16'(CH);
      end
    endcase
  end

  conv_engine #(.LANES(LANES), .QUANT(1'b0), .NBITS(8)) u_eng (
    .clk, .rst_n, .start(eng_start), .cfg, .busy(eng_busy), .done(eng_done),
    .in_addr(eng_in_addr), .in_data(eng_in_data),
    .w_addr, .w_data, .bn_addr, .bn_data,
    .lut_addr, .lut_data(8'd0),
    .o_valid(eng_ov), .o_addr(eng_oaddr), .o_data(eng_odata));

  always_comb begin
    case (layer)
      2'd0:    eng_in_data = z_rd;
      2'd2:    eng_in_data = mid_rd;
      default: eng_in_data = dw_rd;
    endcase
    if (state == S_COPYOUT)               z_raddr = cnt;
    else if (layer == 2'd3)               z_raddr = eng_oaddr;
    else                                  z_raddr = eng_in_addr;
    z_we    = (state == S_COPYIN) || (state == S_RUN && layer == 2'd3 && eng_ov);
    z_waddr = (state == S_COPYIN) ? cnt : eng_oaddr;
    z_wdata = (state == S_COPYIN) ? in_data : euler(z_rd, h_step, eng_odata);
    in_addr  = cnt;
    out_we   = (state == S_COPYOUT);
    out_addr = cnt;
    out_data = z_rd;
  end

  lane_ram #(.LANES(1), .DW(ACT_W), .DEPTH(NZ)) u_z (
    .clk, .we(z_we), .wlane(1'b0), .waddr($clog2(NZ)'(z_waddr)), .wdata(z_wdata),
    .raddr($clog2(NZ)'(z_raddr)), .rdata(z_rd));
  lane_ram #(.LANES(1), .DW(ACT_W), .DEPTH(NDW)) u_dw (
    .clk, .we(state == S_RUN && eng_ov && (layer == 2'd0 || layer == 2'd2)), .wlane(1'b0),
    .waddr($clog2(NDW)'(eng_oaddr)), .wdata(eng_odata),
    .raddr($clog2(NDW)'(eng_in_addr)), .rdata(dw_rd));
  lane_ram #(.LANES(1), .DW(ACT_W), .DEPTH(NZ)) u_mid (
    .clk, .we(state == S_RUN && eng_ov && layer == 2'd1), .wlane(1'b0),
    .waddr($clog2(NZ)'(eng_oaddr)), .wdata(eng_odata),
    .raddr($clog2(NZ)'(eng_in_addr)), .rdata(mid_rd));
  lane_ram #(.LANES(LANES), .DW(PAR_W), .DEPTH(WROWS)) u_w (
    .clk, .we(ld_we && ld_sel == 3'd0), .wlane(LW'(ld_addr)),
    .waddr($clog2(WROWS)'(ld_addr >> LW)), .wdata(ld_data[PAR_W-1:0]),
    .raddr($clog2(WROWS)'(w_addr)), .rdata(w_data));
  lane_ram #(.LANES(1), .DW(32), .DEPTH(2 * CH)) u_bn (
    .clk, .we(ld_we && ld_sel == 3'd1), .wlane(1'b0),
    .waddr($clog2(2 * CH)'(ld_addr)), .wdata(ld_data),
    .raddr($clog2(2 * CH)'(bn_addr)), .rdata(bn_data));

  assign busy      = (state != S_IDLE);
  assign eng_start = (state == S_START);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; layer <= '0; j <= '0; cnt <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin cnt <= '0; j <= '0; layer <= '0; state <= S_COPYIN; end
        S_COPYIN: begin
          cnt <= cnt + 1'b1;
          if (cnt == FA_W'(NZ - 1)) begin
            cnt <= '0;
            state <= (iters == 0) ? S_COPYOUT : S_START;
          end
        end
        S_START: state <= S_RUN;
        S_RUN: if (eng_done) begin
          layer <= layer + 1'b1;
          if (layer == 2'd3) begin
            if (j == iters - 1) state <= S_COPYOUT;
            else begin j <= j + 1'b1; state <= S_START; end
          end else state <= S_START;
        end
        S_COPYOUT: begin
          cnt <= cnt + 1'b1;
          if (cnt == FA_W'(NZ - 1)) state <= S_DONE;
        end
        S_DONE: begin done <= 1'b1; state <= S_IDLE; end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
