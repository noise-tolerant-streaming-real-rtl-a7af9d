// rs_ref_pkg: testbench reference model of the Reed-Solomon (19,11) code.
//
// Independent of the RTL: GF(2^8) arithmetic uses exp/log tables built at
// time zero, and the parity bytes come from long division of m(x)*x^8 by the
// generator polynomial, written directly rather than as a shift register.
package rs_ref_pkg;
  int unsigned gexp [512];
  int unsigned glog [256];
  bit          ready = 0;

  function automatic void init();
    int unsigned v;
    v = 1;
    for (int i = 0; i < 255; i++) begin
      gexp[i] = v;
      gexp[i+255] = v;
      glog[v] = i;
      v = v << 1;
      if (v & 'h100) v ^= 'h11D;
    end
    ready = 1;
  endfunction

  function automatic byte unsigned mul(byte unsigned a, byte unsigned b);
    if (!ready) init();
    if (a == 0 || b == 0) return 0;
    return byte'(gexp[glog[a] + glog[b]]);
  endfunction

  // codeword c[0..18]; c[0] is the x^18 coefficient
  function automatic void encode(input byte unsigned d [11], output byte unsigned c [19]);
    byte unsigned g [9];
    byte unsigned w [19];
    if (!ready) init();
    g = '{default: 0};
    g[0] = 1;   // g[i] = coefficient of x^i
    for (int r = 0; r < 8; r++) begin
      for (int i = 8; i > 0; i--) g[i] = g[i-1] ^ mul(g[i], byte'(gexp[r]));
      g[0] = mul(g[0], byte'(gexp[r]));
    end
    for (int i = 0; i < 19; i++) w[i] = (i < 11) ? d[i] : 0;
    // long division: w holds coefficients from x^18 down to x^0
    for (int i = 0; i < 11; i++) begin
      byte unsigned q;
      q = w[i];
      if (q != 0) for (int j = 0; j <= 8; j++) w[i+j] ^= mul(q, g[8-j]);
    end
    for (int i = 0; i < 19; i++) c[i] = (i < 11) ? d[i] : w[i];
  endfunction
endpackage
