// bitsys_ref_pkg: reference model of BitSys arithmetic for the testbenches.
//
// Computes channel by channel with plain integer arithmetic, independently of the bit-level
// structure of the RTL: channel c of width w multiplies a[w*c +: w] by b[w*c +: w] (signed or
// unsigned; XNOR in 1-bit mode, negated when signed) and places the product modulo 2^(2w) at
// bit 2*w*c of a 16-bit word. chan_sum adds the channel values as signed integers.
package bitsys_ref_pkg;

  function automatic int chan_val(logic [7:0] a, logic [7:0] b, int p, bit sgn, int c);
    int w, av, bv, x;
    w  = 1 << p;
    av = (int'(a) >> (w * c)) & ((1 << w) - 1);
    bv = (int'(b) >> (w * c)) & ((1 << w) - 1);
    if (w == 1) begin
      x = (av == bv) ? 1 : 0;
      return sgn ? -x : x;
    end
    if (sgn) begin
      if (av >= (1 << (w - 1))) av -= (1 << w);
      if (bv >= (1 << (w - 1))) bv -= (1 << w);
    end
    return av * bv;
  endfunction

  function automatic logic [15:0] mul_ref(logic [7:0] a, logic [7:0] b, int p, bit sgn);
    int w;
    logic [15:0] r;
    w = 1 << p;
    r = '0;
    for (int c = 0; c < 8 / w; c++) begin
      int v;
      logic [15:0] m;
      v = chan_val(a, b, p, sgn, c);
      m = 16'(v) & 16'((32'd1 << (2 * w)) - 1);
      r |= m << (2 * w * c);
    end
    return r;
  endfunction

  function automatic int chan_sum(logic [7:0] a, logic [7:0] b, int p, bit sgn);
    int s;
    s = 0;
    for (int c = 0; c < 8 / (1 << p); c++) s += chan_val(a, b, p, sgn, c);
    return s;
  endfunction

endpackage
