// tb_ref_pkg: reference arithmetic for the testbenches.
//
// Written independently of the RTL: power-of-two weights are applied by
// integer multiplication, sigmoid and tanh are computed with $exp, and
// saturation by comparison, so that a mistake in the RTL's shifts, tables or
// pipelines shows up as a mismatch.
package tb_ref_pkg;

  // weight code -> integer factor (weight * 64)
  function automatic int ref_wfactor(logic [3:0] w);
    int e = int'(w[2:0]);
    int f;
    if (e == 7) return 0;
    f = 64 / (1 << e);
    return w[3] ? -f : f;
  endfunction

  function automatic int ref_sat(int v, int lo, int hi);
    return (v < lo) ? lo : (v > hi) ? hi : v;
  endfunction

  // floor(v + 0.5) for reals
  function automatic int ref_round(real v);
    int i = int'($floor(v + 0.5));
    return i;
  endfunction

  function automatic int ref_sigmoid(int x8);
    real x = real'(x8) / 16.0;
    return ref_sat(ref_round(128.0 / (1.0 + $exp(-x))), -128, 127);
  endfunction

  function automatic int ref_tanh(int x8);
    real x = real'(x8) / 16.0;
    real t = ($exp(x) - $exp(-x)) / ($exp(x) + $exp(-x));
    return ref_sat(ref_round(128.0 * t), -128, 127);
  endfunction

  // arithmetic shift right that rounds toward minus infinity
  function automatic longint ref_asr(longint v, int s);
    longint p = longint'(1) << s;
    if (v >= 0) return v / p;
    return -((-v + p - 1) / p);
  endfunction

  // act: 0 none, 1 relu, 2 sigmoid, 3 tanh
  function automatic int ref_outfn(longint acc, int bias, int shift, int act);
    int t = ref_sat(int'(ref_asr(acc, shift) + bias), -128, 127);
    case (act)
      1: return (t < 0) ? 0 : t;
      2: return ref_sigmoid(t);
      3: return ref_tanh(t);
      default: return t;
    endcase
  endfunction

  // LSTM cell: returns {c_new, h} packed as c_new * 256 + (h & 255)
  function automatic void ref_cell(int gi, int gf, int gg, int go, int c_old,
                                   output int c_new, output int h);
    int idx;
    c_new = ref_sat(int'(ref_asr(longint'(gf) * c_old, 7) + ref_asr(longint'(gi) * gg, 7)),
                    -32768, 32767);
    idx   = ref_sat(int'(ref_asr(c_new, 3)), -128, 127);
    h     = ref_sat(int'(ref_asr(longint'(go) * ref_tanh(idx), 7)), -128, 127);
  endfunction

endpackage
