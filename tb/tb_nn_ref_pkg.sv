// tb_nn_ref_pkg: software reference for the fixed-point network layers.
//
// Integer arithmetic only, written from the layer definition: 64-bit
// accumulation of W*x plus the bias shifted up by 10 bits, floor shift back,
// saturation to 16 bits, optional per-channel scale and offset, then the
// activation. tanh and sigmoid are evaluated in floating point (not from a
// table); callers compare those outputs with a tolerance.
package tb_nn_ref_pkg;

  function automatic longint sat16(input longint v);
    if (v > 32767)  return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  // act: 0 linear, 1 relu, 2 tanh, 3 sigmoid
  function automatic int act_ref(input int v, input int act);
    real r;
    r = real'(v) / 1024.0;
    case (act)
      1: return (v < 0) ? 0 : v;
      2: begin
        r = (1.0 - $exp(-2.0 * r)) / (1.0 + $exp(-2.0 * r));
        return $rtoi(r * 1024.0 + ((r >= 0.0) ? 0.5 : -0.5));
      end
      3: begin
        r = 1.0 / (1.0 + $exp(-r));
        return $rtoi(r * 1024.0 + 0.5);
      end
      default: return v;
    endcase
  endfunction

  // y[o] = act(bn(sum_i w[o*nin+i]*x[i] + b[o]))
  function automatic void dense_ref(input int nin, input int nout,
                                    input int x[$], input int w[$], input int b[$],
                                    input bit bn, input int bs[$], input int bb[$],
                                    input int act, output int y[$]);
    y = {};
    for (int o = 0; o < nout; o++) begin
      longint acc;
      longint s;
      acc = longint'(b[o]) * 1024;
      for (int i = 0; i < nin; i++) acc += longint'(w[o*nin + i]) * longint'(x[i]);
      s = sat16(acc >>> 10);
      if (bn) s = sat16(((s * longint'(bs[o])) >>> 10) + longint'(bb[o]));
      y.push_back(act_ref(int'(s), act));
    end
  endfunction

  function automatic int iabs(input int v);
    return (v < 0) ? -v : v;
  endfunction

endpackage
