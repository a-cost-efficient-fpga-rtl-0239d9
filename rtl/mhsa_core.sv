// mhsa_core: the modified multi-head self-attention of the MHSABlock.
//
// For every head (D_h = DM / HEADS channels) and query position i of the
// N = HH*WD positions:
//   logit_ij = q_i . (k_j + r_j),    r_j = R_h[row of j] + R_w[column of j]
//   a_ij     = ReLU(logit_ij / sqrt(D_h))          (ReLU instead of softmax)
//   o_i      = sum_j a_ij v_j
// then the concatenated heads pass through LayerNorm taken over all
// DM x HH x WD values, with one scale and bias per value. This is the paper's
// MHSA: relative position encoding from R_h and R_w added together,
// content-content plus content-position logits, ReLU attention and a final
// LayerNorm. The number of heads is not given by the paper (4 assumed).
//
// Operation: one multiply-accumulate per cycle. For each (head, i) the N
// attention weights are computed into a register row (N*D_h cycles), then the
// D_h outputs (N*D_h cycles); outputs go to the output buffer while their
// sum and sum of squares are accumulated. The LayerNorm statistics
// (mean, variance, 1/std via an integer square root and one divide) are
// formed in one step and a final pass rewrites the buffer in place.
// Total about 2*HEADS*N*N*D_h + DM*N cycles.
//
// Interface: start/done pulses. q/k/v and the output buffer are
// channel-major (address = channel*N + position), Q10.10. R_h is HH x DM and
// R_w is WD x DM, Q4.12 (address = row*DM + channel). ln_data is
// {gamma, beta}, Q4.12, one word per output value. The output buffer is read
// on o_raddr/o_rdata and written on o_we/o_waddr/o_wdata.
module mhsa_core import tt_pkg::*; #(
  parameter int unsigned DM    = 64,
  parameter int unsigned HH    = 6,
  parameter int unsigned WD    = 6,
  parameter int unsigned HEADS = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              busy,
  output logic              done,
  output logic [FA_W-1:0]   q_addr,
  input  act_t              q_data,
  output logic [FA_W-1:0]   k_addr,
  input  act_t              k_data,
  output logic [FA_W-1:0]   v_addr,
  input  act_t              v_data,
  output logic [11:0]       rh_addr,
  input  par_t              rh_data,
  output logic [11:0]       rw_addr,
  input  par_t              rw_data,
  output logic [FA_W-1:0]   ln_addr,
  input  logic [31:0]       ln_data,
  output logic [FA_W-1:0]   o_raddr,
  input  act_t              o_rdata,
  output logic              o_we,
  output logic [FA_W-1:0]   o_waddr,
  output act_t              o_wdata
);
  localparam int unsigned N   = HH * WD;
  localparam int unsigned DH  = DM / HEADS;
  localparam int unsigned TOT = DM * N;

  // integer square root, bit by bit (32 result bits)
  function automatic logic [63:0] isqrt(input logic [63:0] v);
    logic [63:0] r, rem, t;
    r = '0; rem = v;
    for (int b = 31; b >= 0; b--) begin
      t = (r << (b + 1)) + (64'd1 << (2 * b));
      if (rem >= t) begin rem = rem - t; r = r | (64'd1 << b); end
    end
    return r;
  endfunction

  // 1/sqrt(D_h) in Q4.12
  localparam logic [63:0] ISQ = (64'd1 << 24) / isqrt(64'(DH) << 24);

  typedef enum logic [2:0] {S_IDLE, S_LOGIT, S_AV, S_STATS, S_NORM, S_DONE} state_t;
  state_t state;

  logic [7:0]  hd;
  logic [11:0] i, j;
  logic [9:0]  d;
  logic [FA_W-1:0] idx;
  logic signed [63:0] acc, sum, sumsq;
  act_t a_row [N];
  act_t mean;
  logic [31:0] inv_std;

  logic [9:0]  c;
  logic signed [63:0] prod, acc_n;
  logic signed [63:0] kr, scaled;
  act_t av_out;
  always_comb begin
    c       = 10'(32'(hd) * DH + 32'(d));
    q_addr  = FA_W'(32'(c) * N + 32'(i));
    k_addr  = FA_W'(32'(c) * N + 32'(j));
    v_addr  = FA_W'(32'(c) * N + 32'(j));
    rh_addr = 12'((32'(j) / WD) * DM + 32'(c));
    rw_addr = 12'((32'(j) % WD) * DM + 32'(c));
    kr      = 64'(k_data) + ((64'(rh_data) + 64'(rw_data)) >>> (PAR_FRAC - ACT_FRAC));
    if (state == S_LOGIT) prod = 64'(q_data) * kr;
    else                  prod = 64'(a_row[j]) * 64'(v_data);
    acc_n   = acc + prod;
    scaled  = ((acc_n >>> ACT_FRAC) * $signed(ISQ)) >>> PAR_FRAC;
    av_out  = sat_act(80'(acc_n >>> ACT_FRAC));
  end

  // LayerNorm statistics
  logic signed [63:0] mean_w, var_w;
  logic [63:0] std_w;
  always_comb begin
    mean_w = sum / $signed(64'(TOT));
    var_w  = sumsq / $signed(64'(TOT)) - mean_w * mean_w;
    if (var_w < 1) var_w = 1;
    std_w  = isqrt(64'(var_w));
    if (std_w == 0) std_w = 1;
  end

  // normalization pass
  logic signed [63:0] nrm;
  always_comb begin
    o_raddr = (state == S_NORM) ? idx : '0;
    ln_addr = idx;
    nrm     = ((64'(o_rdata) - 64'(mean)) * $signed({32'd0, inv_std})) >>> 16;
    o_we    = 1'b0;
    o_waddr = FA_W'(32'(c) * N + 32'(i));
    o_wdata = av_out;
    if (state == S_AV && j == 12'(N - 1)) o_we = 1'b1;
    if (state == S_NORM) begin
      o_we    = 1'b1;
      o_waddr = idx;
      o_wdata = bn_apply(sat_act(80'(nrm)), ln_data);
    end
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; hd <= '0; i <= '0; j <= '0; d <= '0; idx <= '0;
      acc <= '0; sum <= '0; sumsq <= '0; mean <= '0; inv_std <= '0; done <= 1'b0;
      for (int n = 0; n < N; n++) a_row[n] <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          hd <= '0; i <= '0; j <= '0; d <= '0; acc <= '0; sum <= '0; sumsq <= '0;
          state <= S_LOGIT;
        end
        S_LOGIT: begin
          if (d == 10'(DH - 1)) begin
            a_row[j] <= (scaled < 0) ? '0 : sat_act(80'(scaled));
            acc <= '0; d <= '0;
            if (j == 12'(N - 1)) begin j <= '0; state <= S_AV; end
            else j <= j + 1'b1;
          end else begin
            acc <= acc_n; d <= d + 1'b1;
          end
        end
        S_AV: begin
          if (j == 12'(N - 1)) begin
            acc   <= '0; j <= '0;
            sum   <= sum + 64'(av_out);
            sumsq <= sumsq + 64'(av_out) * 64'(av_out);
            if (d == 10'(DH - 1)) begin
              d <= '0;
              state <= S_LOGIT;
              if (i == 12'(N - 1)) begin
                i <= '0;
                if (hd == 8'(HEADS - 1)) state <= S_STATS;
                else hd <= hd + 1'b1;
              end else i <= i + 1'b1;
            end else d <= d + 1'b1;
          end else begin
            acc <= acc_n; j <= j + 1'b1;
          end
        end
        S_STATS: begin
          mean    <= sat_act(80'(mean_w));
          inv_std <= 32'((64'd1 << 26) / std_w);
          idx     <= '0;
          state   <= S_NORM;
        end
        S_NORM: begin
          idx <= idx + 1'b1;
          if (idx == FA_W'(TOT - 1)) state <= S_DONE;
        end
        S_DONE: begin done <= 1'b1; state <= S_IDLE; end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
