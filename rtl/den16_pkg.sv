// den16_pkg -- types, arithmetic and parameter-buffer layout shared by the
// DEN16 speech-denoising accelerator.
//
// Arithmetic: every value is a signed 16-bit fixed-point number with 4 integer
// bits and 12 fraction bits (Q4.12).  A product keeps the full 32-bit result,
// shifts right by 12 (floor, i.e. truncation toward minus infinity) and keeps
// the low 16 bits; a sum simply wraps modulo 2^16.  This is the truncating,
// wrapping fixed-point arithmetic of the published design.  Because wrapped
// addition is associative, the order of accumulation never changes a result.
//
// Parameter buffer: the model's parameters sit in one flat array of 16-bit
// words in DDR (all_w[]).  The order of the groups inside it is this design's
// own choice; the functions below give the word offset of every group so that
// the loader, the caches and any host-side packer agree.  The Wmask rows come
// last so that the rows that are never cached on chip (the "tail") lie past
// the range that the preload copies.
package den16_pkg;

  localparam int FIX_W    = 16;
  localparam int FIX_FRAC = 12;

  typedef logic signed [FIX_W-1:0] fix_t;

  // One word of the parameter-write bus that the preload broadcasts to all
  // on-chip caches.  addr is the word index inside all_w[].
  typedef struct packed {
    logic        valid;
    logic [31:0] addr;
    fix_t        data;
  } pwr_t;

  // Truncating Q4.12 multiply with wrap-around.
  function automatic fix_t fmul(fix_t a, fix_t b);
    logic signed [2*FIX_W-1:0] p;
    p = 32'(a) * 32'(b);
    return fix_t'(p >>> FIX_FRAC);
  endfunction

  function automatic fix_t prelu(fix_t x, fix_t slope);
    return (x < 0) ? fmul(slope, x) : x;
  endfunction

  function automatic fix_t relu(fix_t x);
    return (x < 0) ? fix_t'(0) : x;
  endfunction

  // ---------------------------------------------------------------- layout
  // Sizes in words of each parameter group.
  function automatic int enc_words(int c, int k);            // W[c][k], b[c]
    return c * k + c;
  endfunction
  function automatic int pw_words(int cin, int cout, bit pre, bit post); // W[o][i], b[o], slopes
    return cout * cin + cout + (pre ? cin : 0) + (post ? cout : 0);
  endfunction
  function automatic int dw_words(int c, int levels, int taps); // W[l][c][k], b[l][c]
    return levels * c * taps + levels * c;
  endfunction
  function automatic int uconv_words(int cb, int ch, int levels, int taps);
    return pw_words(cb, ch, 1'b0, 1'b1) + dw_words(ch, levels, taps) + pw_words(ch, cb, 1'b1, 1'b0);
  endfunction
  function automatic int dec_words(int c, int k);            // W[c][k], one bias
    return c * k + 1;
  endfunction

  // Offsets of the groups for a model with encoder width ce, bottleneck width
  // cb, nu UConv blocks of hidden width ch, kernel sizes ke (encoder), kd
  // (decoder), and depthwise pyramid levels/taps.
  function automatic int off_btnk(int ce, int ke);
    return enc_words(ce, ke);
  endfunction
  function automatic int off_uconv(int ce, int ke, int cb, int ch, int lv, int tp, int u);
    return off_btnk(ce, ke) + pw_words(ce, cb, 1'b0, 1'b0) + u * uconv_words(cb, ch, lv, tp);
  endfunction
  function automatic int off_fprelu(int ce, int ke, int cb, int ch, int lv, int tp, int nu);
    return off_uconv(ce, ke, cb, ch, lv, tp, nu);
  endfunction
  function automatic int off_dec(int ce, int ke, int cb, int ch, int lv, int tp, int nu);
    return off_fprelu(ce, ke, cb, ch, lv, tp, nu) + ce;
  endfunction
  // Mask head: bias[ce], slopes[cb], then rows W[r][cb] for r = 0 .. ce-1.
  function automatic int off_mask(int ce, int ke, int cb, int ch, int lv, int tp, int nu, int kd);
    return off_dec(ce, ke, cb, ch, lv, tp, nu) + dec_words(ce, kd);
  endfunction

endpackage
