// tf_pkg: number formats, configuration-bus sizing and lookup-table generators
// shared by every layer of the streaming transformer.
//
// Number format. All activations, weights and layer outputs use one signed
// fixed-point format, data_t = 16 bits with 6 integer bits (sign included) and
// 10 fractional bits. The 6 integer bits follow the precision the evaluation
// settled on for the gravitational-wave model; the 10 fractional bits are this
// design's choice inside the range where the accuracy curve is flat. Products
// and sums are kept at full width inside a layer and reduced once at its output
// by flooring (drop low bits) and saturating to data_t.
//
// Lookup tables (exponent, reciprocal, reciprocal square root, sigmoid) are
// built at elaboration time by the integer-only constant functions below, so
// no table file is needed and every tool computes identical contents.
//
// Configuration bus. Weights, biases, gamma and beta live in register files
// inside each layer and are written word by word through cfg_we/cfg_addr/
// cfg_data. Each layer owns a contiguous address range starting at a BASE
// parameter; the *_words functions give the size of each range so parents can
// lay them out back to back.
package tf_pkg;

  // ---------------- numeric formats ----------------
  localparam int DATA_W = 16;
  localparam int DATA_I = 6;                 // integer bits including sign
  localparam int DATA_F = DATA_W - DATA_I;   // 10 fractional bits
  typedef logic signed [DATA_W-1:0] data_t;

  localparam longint DATA_MAX = (longint'(1) <<< (DATA_W-1)) - 1;
  localparam longint DATA_MIN = -(longint'(1) <<< (DATA_W-1));

  // exponent values produced by the softmax exp table: unsigned, 12.8
  localparam int EXP_W = 20;
  localparam int EXP_F = 8;
  typedef logic [EXP_W-1:0] exp_t;

  // lookup tables are addressed with TABLE_BITS bits; the exp and sigmoid tables
  // cover inputs in [-TABLE_RANGE/2, +TABLE_RANGE/2)
  localparam int TABLE_BITS  = 10;
  localparam int TABLE_SIZE  = 1 << TABLE_BITS;
  localparam int TABLE_RANGE = 16;

  // configuration bus
  localparam int CFG_AW = 24;
  typedef logic [CFG_AW-1:0] cfg_addr_t;

  // ---------------- arithmetic helpers ----------------
  // saturate a wide signed value (already at DATA_F fractional bits) to data_t
  function automatic data_t sat_data(input longint v);
    if (v > DATA_MAX) return data_t'(DATA_MAX);
    if (v < DATA_MIN) return data_t'(DATA_MIN);
    return data_t'(v);
  endfunction

  // floor-shift right by sh bits, then saturate
  function automatic data_t shr_sat(input longint v, input int sh);
    return sat_data(v >>> sh);
  endfunction

  // does a configuration address fall in the range [base, base+words)?
  function automatic logic cfg_hit(input cfg_addr_t a, input int base, input int words);
    return (longint'(a) >= longint'(base)) && (longint'(a) < longint'(base) + longint'(words));
  endfunction

  // word offset inside that range, sized for an array of 'words' entries
  function automatic int cfg_local(input cfg_addr_t a, input int base, input int words);
    int off;
    off = int'(longint'(a) - longint'(base));
    return (off >= 0 && off < words) ? off : 0;
  endfunction

  // ---------------- configuration address map sizes ----------------
  function automatic int dense_words(input int n_in, input int n_out);
    return n_in * n_out + n_out;
  endfunction

  function automatic int mha_words(input int d, input int heads, input int dk);
    return 3 * heads * dense_words(d, dk) + dense_words(heads * dk, d);
  endfunction

  function automatic int ln_words(input int d);
    return 2 * d;
  endfunction

  function automatic int ffn_words(input int d, input int ff);
    return dense_words(d, ff) + dense_words(ff, d);
  endfunction

  function automatic int block_words(input int d, input int heads, input int dk, input int ff);
    return mha_words(d, heads, dk) + 2 * ln_words(d) + ffn_words(d, ff);
  endfunction

  function automatic int head_words(input int d, input int hid, input int n_out);
    return dense_words(d, hid) + dense_words(hid, n_out);
  endfunction

  // ---------------- constant functions for lookup tables ----------------
  // round(e^(x_num / 2^xf) * 2^of), computed with 2^x = 2^int * 2^frac and a
  // Taylor series for the fractional part in Q30 arithmetic.
  function automatic longint exp_fixed(input longint x_num, input int xf, input int of);
    longint t, ip, fp, z, term, sum;
    int sh;
    // log2(e) and ln(2) in Q30
    t  = (x_num * 64'sd1549082005) >>> xf;
    ip = t >>> 30;
    fp = t - (ip <<< 30);
    z  = (fp * 64'sd744261118) >>> 30;
    sum  = 64'sd1 <<< 30;
    term = 64'sd1 <<< 30;
    for (int k = 1; k <= 12; k++) begin
      term = ((term * z) >>> 30) / longint'(k);
      sum  = sum + term;
    end
    sh = of + int'(ip) - 30;
    if (sh >= 0) return sum <<< sh;
    return (sum + (64'sd1 <<< (-sh - 1))) >>> (-sh);
  endfunction

  // floor(sqrt(v)) for v >= 0
  function automatic longint isqrt(input longint v);
    longint lo, hi, mid;
    lo = 0;
    hi = 64'sd3037000499;
    while (lo < hi) begin
      mid = (lo + hi + 1) >>> 1;
      if (mid * mid <= v) lo = mid;
      else hi = mid - 1;
    end
    return lo;
  endfunction

  // exp table entry: input = lower edge of bin idx in [-8, 8), output in exp_t
  function automatic exp_t exp_table_entry(input int idx);
    longint x_num, v;
    x_num = longint'(idx) * (longint'(TABLE_RANGE) <<< DATA_F) / longint'(TABLE_SIZE)
            - (longint'(TABLE_RANGE) / 2 <<< DATA_F);
    v = exp_fixed(x_num, DATA_F, EXP_F);
    if (v > (longint'(1) <<< EXP_W) - 1) v = (longint'(1) <<< EXP_W) - 1;
    return exp_t'(v);
  endfunction

  // reciprocal table: entry for mantissa m in [2^(TABLE_BITS-1), 2^TABLE_BITS)
  // is round(2^(2*TABLE_BITS) / m)
  function automatic longint recip_table_entry(input int m);
    return ((longint'(1) <<< (2 * TABLE_BITS)) + longint'(m) / 2) / longint'(m);
  endfunction

  // reciprocal square root table: entry for mantissa m in [1, 2^TABLE_BITS)
  // is round(2^(2*TABLE_BITS) / sqrt(m)), computed as isqrt of a scaled square
  function automatic longint rsqrt_table_entry(input int m);
    longint s;
    if (m == 0) return (longint'(1) <<< (2 * TABLE_BITS));
    // 2^(2T)/sqrt(m) = sqrt(2^(4T)/m)
    s = isqrt((longint'(1) <<< (4 * TABLE_BITS + 8)) / longint'(m));   // 16x the wanted value
    return (s + 8) >>> 4;
  endfunction

  // sigmoid table: input = centre of bin idx in [-8, 8), output in data_t
  function automatic data_t sigmoid_table_entry(input int idx);
    longint x_num, e, v;
    x_num = longint'(idx) * (longint'(TABLE_RANGE) <<< DATA_F) / longint'(TABLE_SIZE)
            - (longint'(TABLE_RANGE) / 2 <<< DATA_F)
            + ((longint'(TABLE_RANGE) <<< DATA_F) / (2 * longint'(TABLE_SIZE)));
    e = exp_fixed(-x_num, DATA_F, 20);                 // e^-x in Q20
    v = ((longint'(1) <<< (20 + DATA_F)) + ((longint'(1) <<< 20) + e) / 2)
        / ((longint'(1) <<< 20) + e);
    return data_t'(v);
  endfunction

  // index of the table bin holding x, clipped to the table range; each bin is
  // 2^TABLE_SHIFT steps of data_t wide (16 steps = 1/64 with the defaults)
  localparam int TABLE_SHIFT = $clog2((TABLE_RANGE << DATA_F) / TABLE_SIZE);

  function automatic logic [TABLE_BITS-1:0] table_index(input data_t x);
    logic signed [DATA_W:0] s;
    s = ($signed({x[DATA_W-1], x}) + $signed((DATA_W+1)'(TABLE_RANGE / 2) << DATA_F)) >>> TABLE_SHIFT;
    if (s < 0) return '0;
    if (s > (DATA_W+1)'(TABLE_SIZE - 1)) return '1;
    return s[TABLE_BITS-1:0];
  endfunction

endpackage
