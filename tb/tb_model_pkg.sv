// tb_model_pkg: bit-accurate reference arithmetic for the LSiDNN testbenches.
//
// Written independently of the RTL from the number format of the design:
// (DW, DW-FRAC) two's-complement fixed point, exact products, a neuron result
// of floor((sum x*w + bias*2^FRAC) / 2^FRAC) saturated to DW bits, and an LS
// estimate that is either +/-Y (BPSK reference) or the complex quotient Y/X
// truncated toward zero.
package tb_model_pkg;

  function automatic longint sat(input longint v, input int dw);
    longint mx = (64'sd1 <<< (dw-1)) - 1;
    longint mn = -(64'sd1 <<< (dw-1));
    if (v > mx) return mx;
    if (v < mn) return mn;
    return v;
  endfunction

  // floor division by 2^s for signed values
  function automatic longint floor_shift(input longint v, input int s);
    longint d = 64'sd1 <<< s;
    longint q = v / d;
    if ((v % d != 0) && (v < 0)) q = q - 1;
    return q;
  endfunction

  function automatic longint neuron(input longint x[], input longint w[], input longint b,
                                    input int dw, input int frac, input bit relu_on);
    longint acc = 0;
    longint r;
    foreach (x[i]) acc += x[i] * w[i];
    r = sat(floor_shift(acc + b * (64'sd1 <<< frac), frac), dw);
    if (relu_on && r < 0) r = 0;
    return r;
  endfunction

  // sign-extend a dw-bit field
  function automatic longint sx(input longint v, input int dw);
    longint m = (64'sd1 <<< dw) - 1;
    v = v & m;
    if (v >= (64'sd1 <<< (dw-1))) v -= (64'sd1 <<< dw);
    return v;
  endfunction

  // complex quotient component: trunc(num * 2^frac / den), saturated
  function automatic longint cdiv(input longint num, input longint den, input int dw, input int frac);
    logic signed [127:0] n, q;
    if (den == 0) return 0;
    n = 128'(num) <<< frac;
    q = n / 128'(den);
    if (q > 128'((64'sd1 <<< (dw-1)) - 1)) return (64'sd1 <<< (dw-1)) - 1;
    if (q < -128'(64'sd1 <<< (dw-1)))      return -(64'sd1 <<< (dw-1));
    return longint'(q);
  endfunction

endpackage
