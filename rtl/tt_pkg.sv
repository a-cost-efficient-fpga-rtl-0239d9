// tt_pkg: number formats, layer-configuration type and fixed-point helpers
// shared by every module of the Neural-ODE CNN-Transformer feature extractor.
//
// Formats (from the paper's FPGA implementation): activations are signed
// 20-bit fixed point with 10 fractional bits (Q10.10); parameters that are not
// quantized are signed 16-bit with 12 fractional bits (Q4.12). LLT-quantized
// activations and weights are NBITS-bit integers (8 by default, 4 also used).
// The layer configuration record and the packing of a BatchNorm parameter
// pair into one 32-bit word ({scale, bias}) are this design's own choices.
package tt_pkg;

  localparam int unsigned ACT_W    = 20;
  localparam int unsigned ACT_FRAC = 10;
  localparam int unsigned PAR_W    = 16;
  localparam int unsigned PAR_FRAC = 12;
  localparam int unsigned FA_W     = 18;   // feature-buffer word address
  localparam int unsigned WA_W     = 20;   // weight-buffer row address
  localparam int unsigned LUT_K    = 9;    // LLT granularity K
  localparam int unsigned LD_AW    = 23;   // parameter word address inside one block memory

  typedef logic signed [ACT_W-1:0] act_t;
  typedef logic signed [PAR_W-1:0] par_t;

  localparam act_t ACT_MAX = act_t'({1'b0, {(ACT_W-1){1'b1}}});
  localparam act_t ACT_MIN = act_t'({1'b1, {(ACT_W-1){1'b0}}});

  // One convolution layer as run by conv_engine.
  typedef struct packed {
    logic [9:0]      cin;       // input channels read from the feature buffer
    logic            add_time;  // append one channel holding t (Add time)
    act_t            t_val;     // value of the time channel, Q10.10
    logic [9:0]      cout;      // output channels (ignored in depth-wise mode)
    logic [5:0]      hin;       // input height
    logic [5:0]      win;       // input width
    logic            k3;        // 1: 3x3 kernel with padding 1, 0: 1x1 kernel
    logic            stride2;   // 1: stride 2, 0: stride 1
    logic            dw;        // depth-wise: output channel c uses input channel c only
    logic            bn;        // apply per-channel scale and bias
    logic            relu;      // apply ReLU after BatchNorm
    logic [WA_W-1:0] w_base;    // first weight row of this layer
    logic [15:0]     bn_base;   // first BatchNorm word of this layer
    logic [15:0]     lut_base;  // first I-LUT entry of this layer (quantized engines)
    logic [31:0]     sa_inv;    // 2^n K / s_a, Q16.16 (quantized engines)
    logic [31:0]     oscale;    // s_a s_w / 2^(2n), scaled by 2^26 (quantized engines)
  } conv_cfg_t;

  // Saturate a wide signed value to the activation format.
  function automatic act_t sat_act(input logic signed [79:0] v);
    if (v > 80'(signed'(ACT_MAX)))      return ACT_MAX;
    else if (v < 80'(signed'(ACT_MIN))) return ACT_MIN;
    else                                return act_t'(v);
  endfunction

  // BatchNorm with precomputed parameters: y = x * g + b (g, b in Q4.12).
  function automatic act_t bn_apply(input act_t x, input logic [31:0] gb);
    logic signed [79:0] p;
    p = (80'(x) * 80'(signed'(gb[31:16]))) >>> PAR_FRAC;
    p = p + (80'(signed'(gb[15:0])) >>> (PAR_FRAC - ACT_FRAC));
    return sat_act(p);
  endfunction

  // Euler step z + h * f, all in Q10.10.
  function automatic act_t euler(input act_t z, input act_t h, input act_t f);
    logic signed [79:0] p;
    p = (80'(h) * 80'(f)) >>> ACT_FRAC;
    return sat_act(80'(z) + p);
  endfunction

  // Number of LANES-wide weight rows a layer needs.
  function automatic int unsigned ceil_div(input int unsigned a, input int unsigned b);
    return (a + b - 1) / b;
  endfunction

endpackage
