// conv_engine: the layer unit shared by ODEBlock, DSBlock and MHSABlock.
//
// Runs one convolution layer described by a conv_cfg_t: a 3x3 (padding 1) or
// 1x1 kernel, stride 1 or 2, optionally depth-wise, optionally with an extra
// input channel that holds the ODE time t ("Add time"), followed by the
// layer's BatchNorm (per-channel scale and bias) and optional ReLU.
// As in the paper, the work is parallelized along the output-channel
// dimension: LANES output channels share each input value and each lane has its
// own weight, so one weight-buffer row (LANES weights) is read per tap.
//
// Loop order: output-channel group, output row, output column, input channel,
// kernel row, kernel column; one tap per cycle. When a pixel's taps are done
// the LANES accumulators are copied into a shadow bank and drained one word
// per cycle (BatchNorm and ReLU are applied here) while the next pixel is
// being accumulated; the engine waits only if a drain is still running.
// Depth-wise mode computes one channel at a time on lane 0.
//
// QUANT = 0: inputs Q10.10 times weights Q4.12 (16-bit), result >>> 12.
// QUANT = 1: inputs pass through the LLT quantizer to NBITS-bit codes, weights
// are signed NBITS-bit integers, result = acc * oscale >>> 16 (Q10.10).
// Memories are external and read combinationally: in_addr/in_data (feature
// map, address = channel * H * W + row * W + column), w_addr/w_data
// (weight rows), bn_addr/bn_data, lut_addr/lut_data. Results leave on
// o_valid/o_addr/o_data with the same channel-major addressing.
// start is a one-cycle pulse; done is a one-cycle pulse after the last write.
// The fused BatchNorm/ReLU drain and single-lane depth-wise mode are this
// design's choices (the paper lists BNReLU as a separate layer).
module conv_engine import tt_pkg::*; #(
  parameter int unsigned LANES = 16,
  parameter bit          QUANT = 1'b0,
  parameter int unsigned NBITS = 8,
  localparam int unsigned WW = QUANT ? NBITS : PAR_W,
  localparam int unsigned LW = (LANES > 1) ? $clog2(LANES) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  conv_cfg_t               cfg,
  output logic                    busy,
  output logic                    done,
  output logic [FA_W-1:0]         in_addr,
  input  act_t                    in_data,
  output logic [WA_W-1:0]         w_addr,
  input  logic [LANES*WW-1:0]     w_data,
  output logic [15:0]             bn_addr,
  input  logic [31:0]             bn_data,
  output logic [15:0]             lut_addr,
  input  logic [NBITS-1:0]        lut_data,
  output logic                    o_valid,
  output logic [FA_W-1:0]         o_addr,
  output act_t                    o_data
);
  typedef enum logic [1:0] {S_IDLE, S_MAC, S_EMIT, S_FLUSH} state_t;
  state_t state;

  localparam int unsigned ACC_W = 48;

  // loop counters
  logic [9:0] g, ic;
  logic [5:0] oy, ox;
  logic [1:0] ky, kx;

  // derived layer sizes
  logic [9:0] cin_eff, cout_eff, ngroups;
  logic [5:0] hout, wout;
  logic [1:0] kk;
  always_comb begin
    cin_eff  = cfg.cin + 10'(cfg.add_time);
    cout_eff = cfg.dw ? cin_eff : cfg.cout;
    ngroups  = cfg.dw ? cin_eff : 10'((32'(cfg.cout) + LANES - 1) >> LW);
    hout     = cfg.stride2 ? (cfg.hin >> 1) : cfg.hin;
    wout     = cfg.stride2 ? (cfg.win >> 1) : cfg.win;
    kk       = cfg.k3 ? 2'd3 : 2'd1;
  end

  // tap address generation
  logic signed [7:0] iy, ix;
  logic [9:0]        ch;
  logic              in_img, is_time;
  act_t              x;
  logic [NBITS-1:0]  code;
  logic [3:0]        tap;
  always_comb begin
    iy      = 8'(signed'({2'b0, oy}) * (cfg.stride2 ? 8'sd2 : 8'sd1)) + 8'(ky) - (cfg.k3 ? 8'sd1 : 8'sd0);
    ix      = 8'(signed'({2'b0, ox}) * (cfg.stride2 ? 8'sd2 : 8'sd1)) + 8'(kx) - (cfg.k3 ? 8'sd1 : 8'sd0);
    ch      = cfg.dw ? g : ic;
    in_img  = (iy >= 0) && (iy < signed'({2'b0, cfg.hin})) && (ix >= 0) && (ix < signed'({2'b0, cfg.win}));
    is_time = cfg.add_time && (ch == cfg.cin);
    in_addr = FA_W'((32'(ch) * cfg.hin + 32'(iy[5:0])) * cfg.win + 32'(ix[5:0]));
    x       = !in_img ? '0 : (is_time ? cfg.t_val : in_data);
    tap     = 4'(ky * kk + kx);
    if (cfg.dw) w_addr = cfg.w_base + WA_W'((32'(g) >> LW) * kk * kk + tap);
    else        w_addr = cfg.w_base + WA_W'((32'(g) * cin_eff + 32'(ic)) * kk * kk + tap);
  end

  llt_quant #(.NBITS(NBITS)) u_llt (
    .a(x), .sa_inv(cfg.sa_inv), .lut_base(cfg.lut_base),
    .lut_addr(lut_addr), .lut_data(lut_data), .code(code));

  // multiplier operand: Q10.10 value or unsigned LLT code
  logic signed [ACT_W:0] mop;
  always_comb begin
    if (QUANT) mop = in_img ? (ACT_W+1)'($signed({1'b0, code})) : '0;
    else       mop = (ACT_W+1)'(x);
  end

  logic signed [ACC_W-1:0] acc [LANES];
  logic signed [ACC_W-1:0] shadow [LANES];
  logic [9:0]  dg;          // group (or channel) being drained
  logic [11:0] dpix;        // pixel being drained
  logic [LW:0] dcnt;        // words left to drain
  logic        ddw;
  logic [LW-1:0] dlane;

  logic last_tap, last_pix;
  assign last_tap = (kx == kk - 1) && (ky == kk - 1) && (cfg.dw || (ic == cin_eff - 1));
  assign last_pix = (ox == wout - 1) && (oy == hout - 1);

  // drain side: BatchNorm, ReLU, output
  logic [9:0]          och;
  logic signed [ACC_W-1:0] sacc;
  logic signed [79:0]  raw;
  act_t                y;
  always_comb begin
    och  = ddw ? dg : 10'(32'(dg) * LANES + 32'(dlane));
    sacc = shadow[ddw ? 0 : dlane];
    if (QUANT) raw = (80'(sacc) * $signed({48'd0, cfg.oscale})) >>> 16;
    else       raw = 80'(sacc) >>> PAR_FRAC;
    bn_addr = cfg.bn_base + 16'(och);
    y = cfg.bn ? bn_apply(sat_act(raw), bn_data) : sat_act(raw);
    if (cfg.relu && y < 0) y = '0;
    o_valid = (dcnt != 0) && (och < cout_eff);
    o_addr  = FA_W'(32'(och) * hout * wout + 32'(dpix));
    o_data  = y;
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      g <= '0; ic <= '0; oy <= '0; ox <= '0; ky <= '0; kx <= '0;
      dg <= '0; dpix <= '0; dcnt <= '0; ddw <= 1'b0; dlane <= '0;
      done <= 1'b0;
      for (int l = 0; l < LANES; l++) begin acc[l] <= '0; shadow[l] <= '0; end
    end else begin
      done <= 1'b0;
      // drain one word per cycle
      if (dcnt != 0) begin
        dcnt  <= dcnt - 1'b1;
        dlane <= dlane + 1'b1;
      end
      case (state)
        S_IDLE: if (start) begin
          g <= '0; ic <= '0; oy <= '0; ox <= '0; ky <= '0; kx <= '0;
          for (int l = 0; l < LANES; l++) acc[l] <= '0;
          state <= S_MAC;
        end
        S_MAC: begin
          if (cfg.dw) begin
            acc[0] <= acc[0] + ACC_W'(mop * $signed(w_data[(32'(g) % LANES)*WW +: WW]));
          end else begin
            for (int l = 0; l < LANES; l++)
              acc[l] <= acc[l] + ACC_W'(mop * $signed(w_data[l*WW +: WW]));
          end
          if (last_tap) state <= S_EMIT;
          if (kx == kk - 1) begin
            kx <= '0;
            if (ky == kk - 1) begin
              ky <= '0;
              if (!cfg.dw) ic <= (ic == cin_eff - 1) ? '0 : ic + 1'b1;
            end else ky <= ky + 1'b1;
          end else kx <= kx + 1'b1;
        end
        S_EMIT: if (dcnt == 0 || (dcnt == 1)) begin
          // the last word of the previous drain leaves this cycle
          for (int l = 0; l < LANES; l++) begin shadow[l] <= acc[l]; acc[l] <= '0; end
          dg    <= g;
          dpix  <= 12'(32'(oy) * wout + 32'(ox));
          ddw   <= cfg.dw;
          dcnt  <= cfg.dw ? (LW+1)'(1) : (LW+1)'(LANES);
          dlane <= '0;
          if (last_pix) begin
            ox <= '0; oy <= '0;
            if (g == ngroups - 1) state <= S_FLUSH;
            else begin g <= g + 1'b1; state <= S_MAC; end
          end else begin
            state <= S_MAC;
            if (ox == wout - 1) begin ox <= '0; oy <= oy + 1'b1; end
            else ox <= ox + 1'b1;
          end
        end
        S_FLUSH: if (dcnt == 0) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  if ((LANES & (LANES - 1)) != 0) begin : g_lanes_chk
    $error("LANES must be a power of two");
  end
endmodule
