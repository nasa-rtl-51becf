// nasa_ref_pkg: integer reference model of the accelerator's arithmetic,
// used by the testbenches to compute expected results independently of the RTL.
//   conv  term = x * w                  (8-bit signed x and w)
//   shift term = s * x * 2^(15-p)        (w = {zero, sign, p[3:0]}, psum in Q.15)
//   adder term = -|x - w|                (6-bit signed x and w)
// Shift and adder layers see their input saturated to 6 bits. An output is
// floor(psum / 2^sh), clipped at zero under ReLU, then saturated to bits.
package nasa_ref_pkg;
  import nasa_pkg::*;

  function automatic int s8(input int v);
    return ((v & 32'h80) != 0) ? (v & 32'hff) - 256 : (v & 32'hff);
  endfunction

  function automatic int s6(input int v);
    return ((v & 32'h20) != 0) ? (v & 32'h3f) - 64 : (v & 32'h3f);
  endfunction

  function automatic int clip(input int v, input int bits);
    int hi, lo;
    hi = (1 << (bits - 1)) - 1;
    lo = -(1 << (bits - 1));
    return (v > hi) ? hi : (v < lo) ? lo : v;
  endfunction

  function automatic int in_act(input layer_type_e t, input int x);
    return (t == LT_CONV) ? s8(x) : clip(s8(x), 6);
  endfunction

  function automatic int term(input layer_type_e t, input int x, input int w);
    int v, p;
    case (t)
      LT_CONV:  return x * s8(w);
      LT_SHIFT: begin
        if ((w & 32) != 0) return 0;
        p = w & 15;
        v = (x * 32768) / (1 << p);   // exact: x * 2^15 is divisible by 2^p
        return ((w & 16) != 0) ? -v : v;
      end
      default: begin
        v = x - s6(w);
        return (v < 0) ? v : -v;
      end
    endcase
  endfunction

  // floor division by 2^sh for a signed value
  function automatic int asr(input int v, input int sh);
    longint q;
    q = longint'(v);
    if (q >= 0) return int'(q / (longint'(1) << sh));
    return int'(-((-q + (longint'(1) << sh) - 1) / (longint'(1) << sh)));
  endfunction

  function automatic int requant(input int psum, input int sh, input int bits, input bit relu);
    int v;
    v = asr(psum, sh);
    if (relu && v < 0) v = 0;
    return clip(v, bits);
  endfunction
endpackage
