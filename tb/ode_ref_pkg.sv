// ode_ref_pkg: bit-exact reference model of the ODEBlock arithmetic, used by
// the testbenches. Written directly from the arithmetic described in the
// RTL headers (Q20, 64-bit sums, truncating shifts, saturation), with plain
// integer operators and loops instead of the hardware's pipelines, serial
// divider and serial square root. Feature maps are flat arrays indexed
// c*H*W + y*W + x; weights conv*C*C*9 + oc*C*9 + ic*9 + ky*3 + kx.
package ode_ref_pkg;

  function automatic int ref_sat(input longint v);
    if (v > 64'sh7fff_ffff) return 32'sh7fff_ffff;
    if (v < -64'sh8000_0000) return 32'sh8000_0000;
    return int'(v);
  endfunction

  // floor(sqrt(v)) by bisection
  function automatic longint unsigned ref_isqrt(input longint unsigned v);
    longint unsigned lo, hi, mid;
    lo = 0; hi = 64'd4294967296;
    while (hi - lo > 1) begin
      mid = (lo + hi) / 2;
      if (mid * mid <= v) lo = mid; else hi = mid;
    end
    return lo;
  endfunction

  // Signed quotient truncated towards zero, saturated; zero divisor saturates.
  function automatic int ref_div(input longint num, input longint den);
    if (den == 0) return (num < 0) ? 32'sh8000_0000 : 32'sh7fff_ffff;
    return ref_sat(num / den);
  endfunction

  // 3x3 convolution, stride 1, zero padding 1.
  function automatic void ref_conv(input int C, input int H, input int W,
                                   input int conv, ref int x[], ref int w[],
                                   ref int y[]);
    for (int oc = 0; oc < C; oc++)
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++) begin
          longint acc = 0;
          for (int ic = 0; ic < C; ic++)
            for (int ky = 0; ky < 3; ky++)
              for (int kx = 0; kx < 3; kx++) begin
                int rr = r + ky - 1, cc = c + kx - 1;
                if (rr >= 0 && rr < H && cc >= 0 && cc < W)
                  acc += longint'(x[ic*H*W + rr*W + cc]) *
                         longint'(w[conv*C*C*9 + oc*C*9 + ic*9 + ky*3 + kx]);
              end
          y[oc*H*W + r*W + c] = ref_sat(acc >>> 20);
        end
  endfunction

  // Batch normalisation on the map's own per-channel statistics, then ReLU
  // (relu = 1) or Euler update y := z + h*y (euler = 1). gb holds gamma[C]
  // followed by beta[C]. Returns how many values ReLU clamped.
  function automatic int ref_bn(input int C, input int HW, ref int x[],
                                ref int gb[], input bit relu, input bit euler,
                                ref int z[], input int h, ref int y[]);
    int clamps = 0;
    for (int c = 0; c < C; c++) begin
      longint s1 = 0, s2 = 0, v;
      int mean, ex2, sigma, scale;
      for (int i = 0; i < HW; i++) begin
        s1 += longint'(x[c*HW+i]);
        s2 += longint'(x[c*HW+i]) * longint'(x[c*HW+i]);
      end
      mean = ref_div(s1, HW);
      ex2  = ref_div(s2 >>> 20, HW);
      v = longint'(ex2) - ((longint'(mean) * longint'(mean)) >>> 20);
      if (v < 0) v = 0;
      v += 10;
      sigma = int'(ref_isqrt(longint'(unsigned'(v)) << 20));
      scale = ref_div(longint'(gb[c]) <<< 20, sigma);
      for (int i = 0; i < HW; i++) begin
        int o;
        o = ref_sat((((longint'(x[c*HW+i]) - mean) * scale) >>> 20) + gb[C+c]);
        if (relu && o < 0) begin o = 0; clamps++; end
        if (euler) o = ref_sat(longint'(z[c*HW+i]) + ((longint'(h) * o) >>> 20));
        y[c*HW+i] = o;
      end
    end
    return clamps;
  endfunction

endpackage
