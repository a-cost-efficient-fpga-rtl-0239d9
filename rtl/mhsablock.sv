// mhsablock: the attention block that replaces the last ODEBlock.
//
// Like an ODEBlock it is iterated C times with forward-Euler updates and
// shared parameters (z <- z + h f(z, t), t = j*h, h = 1/C), with
//   x = BN(Conv1x1([z, t]))                 CH+1 -> DM channels
//   m = MHSA(x)                             Q, K, V projections + mhsa_core
//   f = ReLU(Conv1x1([m, t]))               DM+1 -> CH channels
// The layer list (Add time, 1x1 conv, BatchNorm, MHSA, Add time, 1x1 conv,
// ReLU) follows the paper's MHSABlock figure and table; BN_RELU = 1 inserts
// the ReLU after BatchNorm that another of its figures draws. The C-fold
// iteration with an Euler step is read from the loop drawn around the block.
// All convolutions and the W_q, W_k, W_v projections are LLT-quantized
// (NBITS-bit weights, per-layer I-LUTs), as in the implemented model.
//
// Operation per iteration: conv_engine passes conv1 -> xbuf, W_q -> qbuf,
// W_k -> kbuf, W_v -> vbuf, then mhsa_core -> obuf, then conv2 with the Euler
// update in place in z. The block copies its input into z first and z to the
// output buffer at the end.
//
// Interface: start/done pulses, iters = C and h_step = 1/C stable while
// busy; shared buffers channel-major. Parameter load port ld_sel:
// 0 = weights (flat index row * LANES + lane; rows of conv1, W_q, W_k, W_v,
// conv2), 1 = BatchNorm words, 2 = I-LUTs (conv1, W_q, W_k, W_v, conv2,
// 2^n K entries each), 3 = scales (words 0..4 = 2^n K / s_a, 5..9 = output
// scales, same layer order), 4 = R_h (HH x DM), 5 = R_w (WD x DM),
// 6 = LayerNorm {gamma, beta} per output value.
module mhsablock import tt_pkg::*; #(
  parameter int unsigned CH      = 256,
  parameter int unsigned DM      = 64,
  parameter int unsigned HH      = 6,
  parameter int unsigned WD      = 6,
  parameter int unsigned HEADS   = 4,
  parameter int unsigned LANES   = 16,
  parameter int unsigned NBITS   = 8,
  parameter bit          BN_RELU = 1'b0,
  localparam int unsigned LW     = (LANES > 1) ? $clog2(LANES) : 1
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
  localparam int unsigned N     = HH * WD;
  localparam int unsigned NZ    = CH * N;
  localparam int unsigned NX    = DM * N;
  localparam int unsigned G1    = ceil_div(DM, LANES);
  localparam int unsigned G2    = ceil_div(CH, LANES);
  localparam int unsigned R1    = G1 * (CH + 1);
  localparam int unsigned RQ    = G1 * DM;
  localparam int unsigned R2    = G2 * (DM + 1);
  localparam int unsigned WROWS = R1 + 3 * RQ + R2;
  localparam int unsigned LUTN  = (1 << NBITS) * LUT_K;

  typedef enum logic [2:0] {S_IDLE, S_COPYIN, S_START, S_RUN, S_COPYOUT, S_DONE} state_t;
  state_t state;
  logic [2:0]  pass;   // 0 conv1, 1 W_q, 2 W_k, 3 W_v, 4 attention, 5 conv2
  logic [15:0] j;
  logic [FA_W-1:0] cnt;
  logic [31:0] scale [10];

  conv_cfg_t cfg;
  logic eng_busy, eng_done, eng_ov, att_busy, att_done;
  logic [FA_W-1:0] eng_in_addr, eng_oaddr;
  act_t eng_in_data, eng_odata;
  logic [WA_W-1:0] w_addr;
  logic [LANES*NBITS-1:0] w_data;
  logic [15:0] bn_addr, lut_addr;
  logic [31:0] bn_data;
  logic [NBITS-1:0] lut_data;

  always_comb begin
    logic signed [79:0] tp;
    tp = 80'(signed'({1'b0, j})) * 80'(h_step);
    cfg = '0;
    cfg.t_val = sat_act(tp);
    cfg.hin = 6'(HH); cfg.win = 6'(WD);
    cfg.lut_base = 16'(32'(pass == 3'd5 ? 4 : pass) * LUTN);
    cfg.sa_inv   = scale[(pass == 3'd5) ? 4 : 32'(pass) % 5];
    cfg.oscale   = scale[(pass == 3'd5) ? 9 : 5 + 32'(pass) % 5];
    case (pass)
      3'd0: begin cfg.cin = 10'(CH); cfg.add_time = 1'b1; cfg.cout = 10'(DM);
                  cfg.bn = 1'b1; cfg.relu = BN_RELU; cfg.w_base = '0; end
      3'd5: begin cfg.cin = 10'(DM); cfg.add_time = 1'b1; cfg.cout = 10'(CH);
                  cfg.relu = 1'b1; cfg.w_base = WA_W'(R1 + 3 * RQ); end
      default: begin cfg.cin = 10'(DM); cfg.cout = 10'(DM);
                  cfg.w_base = WA_W'(R1 + (32'(pass) - 1) * RQ); end
    endcase
  end

  conv_engine #(.LANES(LANES), .QUANT(1'b1), .NBITS(NBITS)) u_eng (
    .clk, .rst_n, .start(state == S_START && pass != 3'd4), .cfg, .busy(eng_busy), .done(eng_done),
    .in_addr(eng_in_addr), .in_data(eng_in_data),
    .w_addr, .w_data, .bn_addr, .bn_data, .lut_addr, .lut_data,
    .o_valid(eng_ov), .o_addr(eng_oaddr), .o_data(eng_odata));

  // buffers
  act_t z_rd, x_rd, q_rd, k_rd, v_rd, o_rd;
  logic [FA_W-1:0] z_raddr, q_addr, k_addr, v_addr, o_raddr, att_oraddr, o_waddr, ln_addr;
  logic o_we;
  act_t o_wdata;
  logic [11:0] rh_addr, rw_addr;
  logic [PAR_W-1:0] rh_data, rw_data;
  logic [31:0] ln_data;
  logic z_we;

  always_comb begin
    case (pass)
      3'd0:    eng_in_data = z_rd;
      3'd5:    eng_in_data = o_rd;
      default: eng_in_data = x_rd;
    endcase
    if (state == S_COPYOUT)     z_raddr = cnt;
    else if (pass == 3'd5)      z_raddr = eng_oaddr;
    else                        z_raddr = eng_in_addr;
    o_raddr  = (pass == 3'd4) ? att_oraddr : eng_in_addr;
    z_we     = (state == S_COPYIN) || (state == S_RUN && pass == 3'd5 && eng_ov);
    in_addr  = cnt;
    out_we   = (state == S_COPYOUT);
    out_addr = cnt;
    out_data = z_rd;
  end

  lane_ram #(.LANES(1), .DW(ACT_W), .DEPTH(NZ)) u_z (
    .clk, .we(z_we), .wlane(1'b0),
    .waddr($clog2(NZ)'((state == S_COPYIN) ? cnt : eng_oaddr)),
    .wdata((state == S_COPYIN) ? in_data : euler(z_rd, h_step, eng_odata)),
    .raddr($clog2(NZ)'(z_raddr)), .rdata(z_rd));
  lane_ram #(.LANES(1), .DW(ACT_W), .DEPTH(NX)) u_x (
    .clk, .we(state == S_RUN && pass == 3'd0 && eng_ov), .wlane(1'b0),
    .waddr($clog2(NX)'(eng_oaddr)), .wdata(eng_odata), .raddr($clog2(NX)'(eng_in_addr)), .rdata(x_rd));
  lane_ram #(.LANES(1), .DW(ACT_W), .DEPTH(NX)) u_q (
    .clk, .we(state == S_RUN && pass == 3'd1 && eng_ov), .wlane(1'b0),
    .waddr($clog2(NX)'(eng_oaddr)), .wdata(eng_odata), .raddr($clog2(NX)'(q_addr)), .rdata(q_rd));
  lane_ram #(.LANES(1), .DW(ACT_W), .DEPTH(NX)) u_k (
    .clk, .we(state == S_RUN && pass == 3'd2 && eng_ov), .wlane(1'b0),
    .waddr($clog2(NX)'(eng_oaddr)), .wdata(eng_odata), .raddr($clog2(NX)'(k_addr)), .rdata(k_rd));
  lane_ram #(.LANES(1), .DW(ACT_W), .DEPTH(NX)) u_v (
    .clk, .we(state == S_RUN && pass == 3'd3 && eng_ov), .wlane(1'b0),
    .waddr($clog2(NX)'(eng_oaddr)), .wdata(eng_odata), .raddr($clog2(NX)'(v_addr)), .rdata(v_rd));
  lane_ram #(.LANES(1), .DW(ACT_W), .DEPTH(NX)) u_o (
    .clk, .we(o_we), .wlane(1'b0),
    .waddr($clog2(NX)'(o_waddr)), .wdata(o_wdata), .raddr($clog2(NX)'(o_raddr)), .rdata(o_rd));

  lane_ram #(.LANES(LANES), .DW(NBITS), .DEPTH(WROWS)) u_w (
    .clk, .we(ld_we && ld_sel == 3'd0), .wlane(LW'(ld_addr)),
    .waddr($clog2(WROWS)'(ld_addr >> LW)), .wdata(ld_data[NBITS-1:0]),
    .raddr($clog2(WROWS)'(w_addr)), .rdata(w_data));
  lane_ram #(.LANES(1), .DW(32), .DEPTH(DM)) u_bn (
    .clk, .we(ld_we && ld_sel == 3'd1), .wlane(1'b0),
    .waddr($clog2(DM)'(ld_addr)), .wdata(ld_data), .raddr($clog2(DM)'(bn_addr)), .rdata(bn_data));
  lane_ram #(.LANES(1), .DW(NBITS), .DEPTH(5 * LUTN)) u_lut (
    .clk, .we(ld_we && ld_sel == 3'd2), .wlane(1'b0),
    .waddr($clog2(5 * LUTN)'(ld_addr)), .wdata(ld_data[NBITS-1:0]),
    .raddr($clog2(5 * LUTN)'(lut_addr)), .rdata(lut_data));
  lane_ram #(.LANES(1), .DW(PAR_W), .DEPTH(HH * DM)) u_rh (
    .clk, .we(ld_we && ld_sel == 3'd4), .wlane(1'b0),
    .waddr($clog2(HH * DM)'(ld_addr)), .wdata(ld_data[PAR_W-1:0]),
    .raddr($clog2(HH * DM)'(rh_addr)), .rdata(rh_data));
  lane_ram #(.LANES(1), .DW(PAR_W), .DEPTH(WD * DM)) u_rw (
    .clk, .we(ld_we && ld_sel == 3'd5), .wlane(1'b0),
    .waddr($clog2(WD * DM)'(ld_addr)), .wdata(ld_data[PAR_W-1:0]),
    .raddr($clog2(WD * DM)'(rw_addr)), .rdata(rw_data));
  lane_ram #(.LANES(1), .DW(32), .DEPTH(NX)) u_ln (
    .clk, .we(ld_we && ld_sel == 3'd6), .wlane(1'b0),
    .waddr($clog2(NX)'(ld_addr)), .wdata(ld_data), .raddr($clog2(NX)'(ln_addr)), .rdata(ln_data));

  mhsa_core #(.DM(DM), .HH(HH), .WD(WD), .HEADS(HEADS)) u_att (
    .clk, .rst_n, .start(state == S_START && pass == 3'd4), .busy(att_busy), .done(att_done),
    .q_addr, .q_data(q_rd), .k_addr, .k_data(k_rd), .v_addr, .v_data(v_rd),
    .rh_addr, .rh_data(par_t'(rh_data)), .rw_addr, .rw_data(par_t'(rw_data)),
    .ln_addr, .ln_data, .o_raddr(att_oraddr), .o_rdata(o_rd),
    .o_we, .o_waddr, .o_wdata);

  always_ff @(posedge clk) begin
    if (ld_we && ld_sel == 3'd3 && ld_addr < LD_AW'(10)) scale[ld_addr[3:0]] <= ld_data;
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; pass <= '0; j <= '0; cnt <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin cnt <= '0; j <= '0; pass <= '0; state <= S_COPYIN; end
        S_COPYIN: begin
          cnt <= cnt + 1'b1;
          if (cnt == FA_W'(NZ - 1)) begin
            cnt <= '0;
            state <= (iters == 0) ? S_COPYOUT : S_START;
          end
        end
        S_START: state <= S_RUN;
        S_RUN: if (eng_done || att_done) begin
          if (pass == 3'd5) begin
            pass <= '0;
            if (j == iters - 1) state <= S_COPYOUT;
            else begin j <= j + 1'b1; state <= S_START; end
          end else begin
            pass <= pass + 1'b1; state <= S_START;
          end
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
