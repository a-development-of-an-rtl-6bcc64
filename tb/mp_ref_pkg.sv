// mp_ref_pkg: reference arithmetic for the testbenches, MP4 format
// (1 sign, 19 exponent, 112 mantissa bits).
//
// The reference works differently from the hardware: operands are turned into
// exact wide integers, combined exactly, and only then rounded to
// nearest-even by a generic integer-to-float routine.  It also converts words
// to `real` for sanity checks and builds random operands.
package mp_ref_pkg;

  localparam int EW   = 19;
  localparam int MW   = 112;
  localparam int W    = 1 + EW + MW;
  localparam int BIAS = (1 << (EW - 1)) - 1;
  localparam int BW   = 512;             // exact integer width
  localparam int EMAXF = (1 << EW) - 1;

  typedef logic [W-1:0] word_t;

  function automatic word_t pack(logic s, int e, logic [MW-1:0] f);
    return {s, EW'(e), f};
  endfunction

  function automatic int msb(logic [BW-1:0] m);
    for (int i = BW - 1; i >= 0; i--) if (m[i]) return i;
    return -1;
  endfunction

  // Round sign * M * 2^(e0 - BIAS - MW) to the format.
  function automatic word_t round_pack(logic s, logic [BW-1:0] m, int e0);
    int p, sh, e;
    logic [BW-1:0] kept, rem, half;
    p = msb(m);
    if (p < 0) return '0;
    if (p > MW) begin
      sh   = p - MW;
      kept = m >> sh;
      rem  = m - (kept << sh);
      half = BW'(1) << (sh - 1);
      if (rem > half || (rem == half && kept[0])) kept = kept + 1;
      if (kept[MW+1]) begin kept = kept >> 1; sh = sh + 1; end
      e = e0 + sh;
    end else begin
      kept = m << (MW - p);
      e    = e0 - (MW - p);
    end
    if (e <= 0) return '0;
    if (e > EMAXF) return {s, {EW{1'b1}}, {MW{1'b1}}};
    return pack(s, e, kept[MW-1:0]);
  endfunction

  function automatic logic [BW-1:0] sig(word_t v);
    return (v[W-2 -: EW] == '0) ? '0 : BW'({1'b1, v[MW-1:0]});
  endfunction

  function automatic int expo(word_t v);
    return int'(v[W-2 -: EW]);
  endfunction

  function automatic word_t ref_mul(word_t a, word_t b);
    if (expo(a) == 0 || expo(b) == 0) return '0;
    return round_pack(a[W-1] ^ b[W-1], sig(a) * sig(b), expo(a) + expo(b) - BIAS - MW);
  endfunction

  // Exact add; exponents must differ by less than ~350.
  function automatic word_t ref_add(word_t a, word_t b, logic sub);
    word_t bb;
    int emin;
    logic [BW-1:0] ma, mb;
    bb = {b[W-1] ^ sub, b[W-2:0]};
    if (expo(a) == 0 && expo(bb) == 0) return '0;
    if (expo(a) == 0) return bb;
    if (expo(bb) == 0) return a;
    emin = (expo(a) < expo(bb)) ? expo(a) : expo(bb);
    ma = sig(a)  << (expo(a)  - emin);
    mb = sig(bb) << (expo(bb) - emin);
    if (a[W-1] == bb[W-1]) return round_pack(a[W-1], ma + mb, emin);
    if (ma == mb) return '0;
    if (ma > mb) return round_pack(a[W-1], ma - mb, emin);
    return round_pack(bb[W-1], mb - ma, emin);
  endfunction

  function automatic real to_real(word_t v);
    real m;
    if (expo(v) == 0) return 0.0;
    m = 1.0 + real'(v[MW-1 -: 52]) / (2.0 ** 52);
    m = m * (2.0 ** (expo(v) - BIAS));
    return v[W-1] ? -m : m;
  endfunction

  // Exact conversion of an integer.
  function automatic word_t from_int(longint v);
    logic s;
    logic [BW-1:0] m;
    if (v == 0) return '0;
    s = v < 0;
    m = BW'(s ? -v : v);
    return round_pack(s, m, BIAS + MW);
  endfunction

  // Random operand with an exponent within +-span of 2^0.
  function automatic word_t rand_word(int span);
    logic [127:0] r;
    int e;
    r = {$urandom(), $urandom(), $urandom(), $urandom()};
    e = BIAS + int'($urandom_range(2 * span)) - span;
    return pack(r[127], e, r[MW-1:0]);
  endfunction

endpackage
