// tt_ref_pkg: reference arithmetic for the testbenches.
//
// Plain nested-loop models of one convolution layer, BatchNorm, the Euler
// step, the LLT quantizer and the attention core with its LayerNorm, written directly from the number formats
// (activations Q10.10, parameters Q4.12, quantized codes and weights as
// integers) without reference to the RTL's loop order or memory layout.
// Weights are indexed naturally: w[(oc * cin_eff + ic) * k*k + tap], or
// w[c * k*k + tap] for a depth-wise layer.
package tt_ref_pkg;

  function automatic int sat20(input longint v);
    if (v > 524287) return 524287;
    if (v < -524288) return -524288;
    return int'(v);
  endfunction

  function automatic int bn_ref(input int x, input int g, input int b);
    longint p;
    p = (longint'(x) * g) >>> 12;
    p = p + (longint'(b) >>> 2);
    return sat20(p);
  endfunction

  function automatic int euler_ref(input int z, input int h, input int f);
    return sat20(longint'(z) + ((longint'(h) * f) >>> 10));
  endfunction

  function automatic int quant_idx(input int a, input longint sa_inv, input int lutn);
    longint i;
    i = (longint'(a) * sa_inv + (64'sd1 <<< 25)) >>> 26;
    if (i < 0) i = 0;
    if (i > lutn - 1) i = lutn - 1;
    return int'(i);
  endfunction

  typedef struct {
    int cin; bit add_time; int t; int cout; int h; int w; bit k3; bit s2; bit dw;
    bit bn; bit relu; bit quant; longint sa_inv; longint oscale; int lutn;
  } layer_t;

  // in[c*h*w + y*w + x]; returns out[oc*ho*wo + y*wo + x]
  function automatic void conv_ref(input layer_t L, input int in_map[], input int wt[],
                                   input int bng[], input int bnb[], input int lut[],
                                   output int out_map[]);
    int k, ce, co, ho, wo, acc_i;
    longint acc, raw;
    k  = L.k3 ? 3 : 1;
    ce = L.cin + (L.add_time ? 1 : 0);
    co = L.dw ? ce : L.cout;
    ho = L.s2 ? L.h / 2 : L.h;
    wo = L.s2 ? L.w / 2 : L.w;
    out_map = new[co * ho * wo];
    for (int oc = 0; oc < co; oc++)
      for (int oy = 0; oy < ho; oy++)
        for (int ox = 0; ox < wo; ox++) begin
          acc = 0;
          for (int ic = 0; ic < ce; ic++) begin
            if (L.dw && ic != oc) continue;
            for (int ky = 0; ky < k; ky++)
              for (int kx = 0; kx < k; kx++) begin
                int iy, ix, a, wv;
                iy = oy * (L.s2 ? 2 : 1) + ky - (L.k3 ? 1 : 0);
                ix = ox * (L.s2 ? 2 : 1) + kx - (L.k3 ? 1 : 0);
                if (iy < 0 || iy >= L.h || ix < 0 || ix >= L.w) continue;
                a = (L.add_time && ic == L.cin) ? L.t : in_map[(ic * L.h + iy) * L.w + ix];
                if (L.quant) a = lut[quant_idx(a, L.sa_inv, L.lutn)];
                wv = L.dw ? wt[oc * k * k + ky * k + kx] : wt[(oc * ce + ic) * k * k + ky * k + kx];
                acc += longint'(a) * wv;
              end
          end
          if (L.quant) raw = (acc * L.oscale) >>> 16;
          else         raw = acc >>> 12;
          acc_i = sat20(raw);
          if (L.bn) acc_i = bn_ref(acc_i, bng[oc], bnb[oc]);
          if (L.relu && acc_i < 0) acc_i = 0;
          out_map[(oc * ho + oy) * wo + ox] = acc_i;
        end
  endfunction

  function automatic longint isqrt_ref(input longint v);
    longint r;
    r = longint'($floor($sqrt(real'(v))));
    while (r * r > v) r--;
    while ((r + 1) * (r + 1) <= v) r++;
    return r;
  endfunction

  // attention core: q, k, v, out channel-major [c*n + pos]; rh[row*dm + c],
  // rw[col*dm + c]; per-value LayerNorm gamma lg[] and beta lb[]
  function automatic void mhsa_ref(input int dm, input int hh, input int wd, input int heads,
                                   input int qm[], input int km[], input int vm[],
                                   input int rh[], input int rw[], input int lg[], input int lb[],
                                   output int om[]);
    int n, dh, tot, c;
    int a[];
    longint acc, sum, sumsq, mean, vr, sd, inv, isq, nrm;
    n = hh * wd; dh = dm / heads; tot = dm * n;
    om = new[tot]; a = new[n];
    isq = (longint'(1) << 24) / isqrt_ref(longint'(dh) << 24);
    sum = 0; sumsq = 0;
    for (int hd = 0; hd < heads; hd++)
      for (int i = 0; i < n; i++) begin
        for (int j = 0; j < n; j++) begin
          acc = 0;
          for (int d = 0; d < dh; d++) begin
            c = hd * dh + d;
            acc += longint'(qm[c*n+i]) * (longint'(km[c*n+j]) +
                   ((longint'(rh[(j / wd)*dm + c]) + rw[(j % wd)*dm + c]) >>> 2));
          end
          acc = ((acc >>> 10) * isq) >>> 12;
          a[j] = (acc < 0) ? 0 : sat20(acc);
        end
        for (int d = 0; d < dh; d++) begin
          c = hd * dh + d;
          acc = 0;
          for (int j = 0; j < n; j++) acc += longint'(a[j]) * vm[c*n+j];
          om[c*n+i] = sat20(acc >>> 10);
          sum += om[c*n+i];
          sumsq += longint'(om[c*n+i]) * om[c*n+i];
        end
      end
    mean = sum / tot;
    vr = sumsq / tot - mean * mean;
    if (vr < 1) vr = 1;
    sd = isqrt_ref(vr);
    inv = ((longint'(1) << 26) / sd) & 64'hffffffff;
    mean = sat20(mean);
    for (int x = 0; x < tot; x++) begin
      nrm = ((longint'(om[x]) - mean) * inv) >>> 16;
      om[x] = bn_ref(sat20(nrm), lg[x], lb[x]);
    end
  endfunction

endpackage
