// tb_fp16_pkg: independent FP16 reference for the testbenches.
//
// Works with real (double) arithmetic: converts FP16 to real exactly, and a
// real back to FP16 with round-to-nearest-even, flush-to-zero below the
// smallest normal and saturation at +/-65504, matching the number format the
// RTL uses.  A product of two FP16 values plus a third is exact in double
// for the ranges the testbenches use, so rounding the real result once
// models a fused multiply-add.
package tb_fp16_pkg;
  function automatic real h2r(input logic [15:0] h);
    real m;
    int  e;
    e = int'(h[14:10]);
    if (e == 0) return 0.0;
    m = (1024.0 + real'(h[9:0])) / 1024.0;
    m = m * (2.0 ** (e - 15));
    return h[15] ? -m : m;
  endfunction

  function automatic logic [15:0] r2h(input real r);
    logic s;
    real  a, f, q;
    int   e;
    longint mi;
    s = (r < 0.0);
    a = s ? -r : r;
    if (a < 2.0 ** -14) return {s, 15'd0} & 16'h0000;
    if (a >= 65520.0) return {s, 15'h7BFF};
    e = 0;
    f = a;
    while (f >= 2.0) begin f = f / 2.0; e++; end
    while (f < 1.0) begin f = f * 2.0; e--; end
    q  = f * 1024.0;
    mi = longint'($floor(q));
    if (q - real'(mi) > 0.5 || (q - real'(mi) == 0.5 && mi[0])) mi++;
    if (mi == 2048) begin mi = 1024; e++; end
    if (e + 15 > 30) return {s, 15'h7BFF};
    return {s, 5'(e + 15), 10'(mi - 1024)};
  endfunction

  function automatic logic [15:0] fma_ref(input logic [15:0] a, b, c);
    return r2h(h2r(a) * h2r(b) + h2r(c));
  endfunction

  function automatic int f2i_ref(input logic [15:0] h);
    real r, fl;
    int  i;
    r  = h2r(h);
    fl = $floor(r);
    i  = int'(fl);
    if (r - fl > 0.5 || (r - fl == 0.5 && (i % 2 != 0))) i++;
    if (i > 127) i = 127;
    if (i < -128) i = -128;
    return i;
  endfunction
endpackage
