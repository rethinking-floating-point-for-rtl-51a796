// elma_ref_pkg: behavioural reference model of the (8,1,5,5,7) log ELMA
// arithmetic for the testbenches.
//
// Written independently of the RTL: words are decoded by walking the bit
// string, the two tables are computed with real-valued 2^x and log2, the
// product is aligned with integer multiplication by powers of two, the
// accumulator fraction is rounded with integer division and remainders, and
// encoding picks the nearest of all 127 positive words in the log domain
// (ties to the even word). Values are kept as integers in units of 1/16
// (decoded logs) or 1/128 (logs with gamma = 7 fraction bits).
package elma_ref_pkg;

  typedef struct {
    bit zero;
    bit inf;
    bit sign;
    int m;
    int f;
  } ref_num_t;

  function automatic ref_num_t ref_decode(input bit [7:0] w);
    ref_num_t r;
    bit [7:0] x;
    int pos, run, reg_v, e;
    bit lead;
    r.zero = (w == 8'h00);
    r.inf  = (w == 8'h80);
    r.sign = w[7] && !r.zero && !r.inf;
    r.m = 0; r.f = 0;
    if (r.zero || r.inf) return r;
    x = w[7] ? 8'(-w) : w;
    pos  = 6;
    lead = x[6];
    run  = 0;
    while (pos >= 0 && x[pos] == lead) begin run++; pos--; end
    pos--;                                   // skip terminator
    reg_v = lead ? run - 1 : -run;
    e = 0;
    if (pos >= 0) begin e = int'(x[pos]); pos--; end
    r.m = 2 * reg_v + e;
    for (int i = 0; i < 4; i++) begin
      r.f = r.f * 2;
      if (pos >= 0) begin r.f += int'(x[pos]); pos--; end
    end
    return r;
  endfunction

  function automatic int ref_round(input real v);
    return $rtoi($floor(v + 0.5));
  endfunction

  function automatic int ref_plut(input int f);
    return ref_round(32.0 * ($pow(2.0, f / 16.0) - 1.0));
  endfunction

  function automatic int ref_qlut(input int g);
    return ref_round(128.0 * $ln(1.0 + g / 32.0) / $ln(2.0));
  endfunction

  // log value of a positive word in 1/128 units
  function automatic int ref_word_log128(input bit [7:0] w);
    ref_num_t r = ref_decode(w);
    return (r.m * 16 + r.f) * 8;
  endfunction

  // nearest positive word to log value t (1/128 units), ties to even word
  function automatic bit [7:0] ref_nearest(input int t);
    int best_d, d;
    bit [7:0] best;
    best = 8'h01;
    best_d = 1 << 30;
    for (int c = 1; c < 128; c++) begin
      d = t - ref_word_log128(8'(c));
      if (d < 0) d = -d;
      if (d < best_d || (d == best_d && c[0] == 1'b0)) begin
        best_d = d;
        best = 8'(c);
      end
    end
    return best;
  endfunction

  function automatic bit [7:0] ref_encode(input bit sign, input int t);
    bit [7:0] p = ref_nearest(t);
    return sign ? 8'(-p) : p;
  endfunction

  // aligned Kulisch addend of a*b (LSB = 2^-24); inf set for infinity/overflow
  function automatic longint ref_term(input bit [7:0] a, input bit [7:0] b,
                                      input int bias, output bit inf, output bit uf);
    ref_num_t ra = ref_decode(a), rb = ref_decode(b);
    int l, m, f, e;
    longint mag;
    inf = 0; uf = 0;
    if (ra.inf || rb.inf) begin inf = 1; return 0; end
    if (ra.zero || rb.zero) return 0;
    l = (ra.m * 16 + ra.f) + (rb.m * 16 + rb.f);
    m = (l >= 0) ? l / 16 : -((-l + 15) / 16);
    f = l - m * 16;
    e = m + bias;
    if (e > 12) begin inf = 1; return 0; end
    if (e < -24) begin uf = 1; return 0; end
    mag = 64'(32 + ref_plut(f));
    if (e + 19 >= 0) mag = mag * (64'sd1 <<< (e + 19));
    else             mag = mag / (64'sd1 <<< (-(e + 19)));
    return (ra.sign ^ rb.sign) ? -mag : mag;
  endfunction

  localparam longint ACC_MAX = (64'sd1 <<< 37) - 1;
  localparam longint ACC_MIN = -(64'sd1 <<< 37);

  // converts an accumulator value to a word, with output bias n
  function automatic bit [7:0] ref_convert(input longint acc, input bit inf, input int bias);
    longint mag, rem, pw, num, g5, r2;
    int p, e, t;
    if (inf) return 8'h80;
    if (acc == 0) return 8'h00;
    mag = acc < 0 ? -acc : acc;
    p = 0;
    while ((64'sd1 <<< (p + 1)) <= mag) p++;
    pw  = 64'sd1 <<< p;
    rem = mag - pw;                          // fraction g = rem / pw
    num = rem * 32;
    g5  = num / pw;
    r2  = num - g5 * pw;
    if (2 * r2 > pw || (2 * r2 == pw && g5[0])) g5++;
    e = p - 24;
    if (g5 == 32) begin g5 = 0; e++; end
    t = (e + bias) * 128 + ref_qlut(int'(g5));
    return ref_encode(acc < 0, t);
  endfunction

  // random normal sample (Box-Muller)
  function automatic real ref_gauss();
    real u1, u2;
    u1 = ($urandom % 1000000 + 1) / 1000001.0;
    u2 = ($urandom % 1000000) / 1000000.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  // round-to-nearest word of a real value (log-domain nearest)
  function automatic bit [7:0] ref_from_real(input real x);
    real ax;
    if (x == 0.0) return 8'h00;
    ax = x < 0.0 ? -x : x;
    return ref_encode(x < 0.0, ref_round(128.0 * $ln(ax) / $ln(2.0)));
  endfunction

endpackage
