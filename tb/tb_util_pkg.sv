// tb_util_pkg -- helpers shared by the testbenches.
//
// pgen(i) is the deterministic pseudo-random parameter word number i of the
// parameter buffer (a hashed index, values in about +-0.125 in Q4.12), so
// that the DDR model and the reference models agree without a data file.
// rmul/radd/rprelu are an independent integer restatement of the Q4.12
// arithmetic: product floored to 12 fraction bits, everything wrapped to 16
// bits.
package tb_util_pkg;
  function automatic shortint pgen(int unsigned i);
    int unsigned h;
    h = i * 32'h9E3779B1 + 32'h7F4A7C15;
    h = h ^ (h >> 15);
    h = h * 32'h2C1B3C6D;
    h = h ^ (h >> 12);
    return shortint'(int'((h >> 8) & 32'h3FF) - 512);
  endfunction

  function automatic shortint rmul(shortint a, shortint b);
    longint p;
    p = longint'(a) * longint'(b);
    p = p >>> 12;
    return shortint'(p);
  endfunction

  function automatic shortint rprelu(shortint x, shortint a);
    return (x < 0) ? rmul(a, x) : x;
  endfunction

  function automatic shortint rrelu(shortint x);
    return (x < 0) ? shortint'(0) : x;
  endfunction

  function automatic shortint rsmp(int n);     // test audio sample n
    return shortint'(pgen(32'h00100000 + n) * 8);
  endfunction
endpackage
