// nqe_ref_pkg: behavioural reference model of the encoder arithmetic, used by
// the testbenches to compute expected results independently of the RTL.
//
// Tensors are flat int queues, activation index (y*W + x)*C + c. Values are
// plain signed integers: a pixel is 0..255, a Sign output +1/-1, an HWMSB
// output 0..3, a Heaviside output 0/1. Weights are integers -2..2 (quinary),
// -1..1 (ternary) or -1/+1 (binary). The HWMSB reference uses threshold
// comparisons (x >= 0.5, 0.25, 0.125 of the normalised value) rather than a
// leading-one search.
package nqe_ref_pkg;

  localparam int K_SIGN = 0, K_HWMSB = 1, K_HEAV = 2;

  function automatic int hwmsb_ref(longint acc, int refp);
    // normalised x = acc * 0.125 / 2^refp: thresholds x >= 0.5, 0.25, 0.125
    if (acc <= 0) return 0;
    if (acc >= (longint'(1) << (refp + 2))) return 3;
    if (acc >= (longint'(1) << (refp + 1))) return 2;
    if (acc >= (longint'(1) << refp))       return 1;
    return 0;
  endfunction

  function automatic int activate(longint acc, int kind, int refp);
    case (kind)
      K_HWMSB: return hwmsb_ref(acc, refp);
      K_HEAV:  return (acc > 0) ? 1 : 0;
      default: return (acc >= 0) ? 1 : -1;
    endcase
  endfunction

  // 3x3 'same' convolution (group conv with shuffle when g > 1), activation,
  // optional 2x2 max pooling. w index: ((co*9 + tap) * cin_g + ci).
  // Sign outputs are returned as +1/-1 (pooling compares the values).
  function automatic void conv_ref(
      input int act[$], input int h, input int cin, input int cout, input int g,
      input int w[$], input int bias[$], input int kind, input int pool,
      input int refp, output int res[$]);
    int cin_g, cout_g, ho;
    int pre[$];
    cin_g = cin / g; cout_g = cout / g;
    pre = {};
    for (int i = 0; i < h * h * cout; i++) pre.push_back(0);
    for (int y = 0; y < h; y++)
      for (int x = 0; x < h; x++)
        for (int co = 0; co < cout; co++) begin
          longint acc;
          int grp, oc;
          grp = co / cout_g;
          oc  = (g > 1) ? (co % cout_g) * g + grp : co;
          acc = (bias.size() > 0) ? bias[co] : 0;
          for (int ky = 0; ky < 3; ky++)
            for (int kx = 0; kx < 3; kx++) begin
              int iy, ix;
              iy = y + ky - 1; ix = x + kx - 1;
              if (iy < 0 || iy >= h || ix < 0 || ix >= h) continue;
              for (int ci = 0; ci < cin_g; ci++)
                acc += w[(co * 9 + ky * 3 + kx) * cin_g + ci]
                       * act[(iy * h + ix) * cin + grp * cin_g + ci];
            end
          pre[(y * h + x) * cout + oc] = activate(acc, kind, refp);
        end
    if (!pool) begin
      res = pre;
      return;
    end
    ho = h / 2;
    res = {};
    for (int y = 0; y < ho; y++)
      for (int x = 0; x < ho; x++)
        for (int c = 0; c < cout; c++) begin
          int m;
          m = pre[((2*y) * h + 2*x) * cout + c];
          for (int s = 1; s < 4; s++) begin
            int v;
            v = pre[((2*y + s/2) * h + 2*x + s%2) * cout + c];
            if (v > m) m = v;
          end
          res.push_back(m);
        end
  endfunction

  // depthwise 4x4 (+-1 weights dw[p*c_n + c]) then c_n x c_n FC
  // (fc[j*c_n + c]), then Sign -> bits (1 for >= 0)
  function automatic void bottleneck_ref(input int act[$], input int c_n,
      input int dw[$], input int fc[$], output int code[$]);
    int d[$];
    d = {};
    for (int c = 0; c < c_n; c++) begin
      int s;
      s = 0;
      for (int p = 0; p < 16; p++) s += dw[p * c_n + c] * act[p * c_n + c];
      d.push_back(s);
    end
    code = {};
    for (int j = 0; j < c_n; j++) begin
      int s;
      s = 0;
      for (int c = 0; c < c_n; c++) s += fc[j * c_n + c] * d[c];
      code.push_back(s >= 0 ? 1 : 0);
    end
  endfunction

  // +-1 code (bits), +-1 weights wc[k*c_n + c]; returns arg-max (first on tie)
  function automatic int classify_ref(input int code[$], input int c_n,
      input int ncls, input int wc[$], output int best);
    int idx;
    idx = 0; best = 0;
    for (int k = 0; k < ncls; k++) begin
      int s;
      s = 0;
      for (int c = 0; c < c_n; c++) s += wc[k * c_n + c] * (code[c] ? 1 : -1);
      if (k == 0 || s > best) begin best = s; idx = k; end
    end
    return idx;
  endfunction

  // random weight of the given bit width (integer value)
  function automatic int rand_w(int wbits);
    case (wbits)
      3: return int'($urandom_range(0, 4)) - 2;
      2: return int'($urandom_range(0, 2)) - 1;
      default: return ($urandom_range(0, 1) != 0) ? 1 : -1;
    endcase
  endfunction

  // weight integer -> RTL code
  function automatic logic [2:0] w_code(int v, int wbits);
    if (wbits == 1) return (v > 0) ? 3'b001 : 3'b000;
    return 3'(v);
  endfunction

  // activation integer -> RTL code (Sign: +1 -> 1, -1 -> 0)
  function automatic logic [7:0] a_code(int v, bit is_sign);
    if (is_sign) return (v > 0) ? 8'd1 : 8'd0;
    return 8'(v);
  endfunction

endpackage
