// cordic_ref_pkg: bit-accurate reference model of the processing element's
// arithmetic, written independently of the RTL for the testbenches.
//
// Fixed point: 8-bit operands with 6 fractional bits, 20-bit internal words
// with 12 fractional bits. The hyperbolic constants are computed here from
// $atanh and $sqrt rather than copied from the design.
package cordic_ref_pkg;

  function automatic longint w20(input longint v);
    longint r;
    r = v & 64'hFFFFF;
    if (r >= 64'sd524288) r = r - 64'sd1048576;
    return r;
  endfunction

  function automatic longint sra(input longint v, input int s);
    return v >>> s;
  endfunction

  // x8, z8: 8-bit operands (as signed ints), y: 20-bit addend
  function automatic longint mac_ref(input int x8, input int z8, input longint y);
    longint x, z, yy;
    x = longint'(x8) * 64; z = longint'(z8) * 64; yy = y;
    for (int i = 0; i < 5; i++) begin
      if (z >= 0) begin yy = w20(yy + sra(x, i)); z = w20(z - (64'sd4096 >>> i)); end
      else        begin yy = w20(yy - sra(x, i)); z = w20(z + (64'sd4096 >>> i)); end
    end
    return yy;
  endfunction

  function automatic longint hyp_x0();
    real k;
    k = 1.0;
    for (int i = 1; i <= 5; i++) k = k * $sqrt(1.0 - 2.0 ** (-2 * i));
    return longint'($rtoi(4096.0 / k + 0.5));
  endfunction

  function automatic longint hyp_ang(input int i);
    return longint'($rtoi($atanh(2.0 ** (-i)) * 4096.0 + 0.5));
  endfunction

  // returns cosh (c) and sinh (s) of a (20-bit, 12 fractional bits)
  function automatic void hyp_ref(input longint a, output longint c, output longint s);
    longint x, y, z, xn, yn;
    x = hyp_x0(); y = 0; z = a;
    for (int i = 1; i <= 5; i++) begin
      if (z >= 0) begin
        xn = w20(x + sra(y, i)); yn = w20(y + sra(x, i)); z = w20(z - hyp_ang(i));
      end else begin
        xn = w20(x - sra(y, i)); yn = w20(y - sra(x, i)); z = w20(z + hyp_ang(i));
      end
      x = xn; y = yn;
    end
    c = x; s = y;
  endfunction

  // num/den by 4 iterations of linear vectoring (shifts 0..3)
  function automatic longint div_ref(input longint num, input longint den);
    longint x, y, z;
    x = den; y = num; z = 0;
    for (int i = 0; i < 4; i++) begin
      if ((x < 0) != (y < 0)) begin y = w20(y + sra(x, i)); z = w20(z - (64'sd4096 >>> i)); end
      else                    begin y = w20(y - sra(x, i)); z = w20(z + (64'sd4096 >>> i)); end
    end
    return z;
  endfunction

  function automatic int to_data(input longint a);
    longint s;
    s = sra(a, 6);
    if (s > 127) return 127;
    if (s < -128) return -128;
    return int'(s);
  endfunction

  // af: 0 relu, 1 tanh, 2 sigmoid
  function automatic int af_ref(input int af, input longint a);
    longint c, s, e;
    if (af == 0) return to_data(a < 0 ? 0 : a);
    hyp_ref(a, c, s);
    if (af == 1) return to_data(div_ref(s, c));
    e = w20(c + s);
    return to_data(div_ref(e, w20(e + 4096)));
  endfunction

  function automatic longint exp_ref(input longint a);
    longint c, s;
    hyp_ref(a, c, s);
    return w20(c + s);
  endfunction

  // dot product as the RPE forms it: bias enters with the first element
  function automatic longint dot_ref(input int xs[$], input int ws[$], input int bias8);
    longint acc;
    acc = 0;
    for (int k = 0; k < xs.size(); k++)
      acc = w20(acc + mac_ref(xs[k], ws[k], (k == 0) ? longint'(bias8) * 64 : 0));
    return acc;
  endfunction

  function automatic real to_real(input longint a, input int frac);
    return real'(a) / (2.0 ** frac);
  endfunction

endpackage
