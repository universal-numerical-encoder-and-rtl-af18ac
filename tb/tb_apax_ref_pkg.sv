// tb_apax_ref_pkg: reference models for the APAX encoder testbenches.
//
// Written independently of the RTL, in plain integer and real arithmetic:
//   ref_att      - attenuation of one sample (real arithmetic, exact for the
//                  values the testbenches use)
//   ref_bits     - two's-complement bit count of a value
//   ref_streams  - the redundancy remover's three streams for one block
//   ref_cost     - block floating point mantissa cost of a stream
//   decode_block - a complete decoder for one encoded block: header, joint
//                  exponent tokens, mantissas and the inverse filter
//   ref_unatt    - value a decoder should return for an attenuated sample
//   dec_to_real  - a decoded 64-bit bus word read as a number of its type
package tb_apax_ref_pkg;

  localparam int ATT_BITS = 29;
  localparam longint ATT_MAX = (longint'(1) << (ATT_BITS - 1)) - 1;

  typedef longint lq_t[$];

  typedef struct {
    int     sel;
    int     fc;
    int     dtype;
    int     mode;
    int     gain_m;
    int     gain_e;
    int     hdr_bits;
    int     n_pair;
    int     n_single;
    int     n_abs;
    lq_t    stream;   // decoded stream values
    lq_t    x;        // reconstructed attenuated samples
    int     bits_used;
    bit     ok;
  } dec_t;

  // Round-to-nearest (ties away from zero) and saturate to ATT_BITS.
  function automatic longint round_sat(real r);
    real a, fl, fr;
    longint n;
    a = (r < 0.0) ? -r : r;
    if (a >= real'(ATT_MAX) + 1.0) n = ATT_MAX;
    else begin
      fl = $floor(a);
      fr = a - fl;
      n  = longint'(fl) + ((fr >= 0.5) ? 1 : 0);
      if (n > ATT_MAX) n = ATT_MAX;
    end
    return (r < 0.0) ? -n : n;
  endfunction

  // IEEE single <-> real without shortreal (bit manipulation only).
  function automatic real f32_to_real(logic [31:0] f);
    real v;
    if (f[30:23] == 8'd0) v = real'(f[22:0]) * (2.0 ** -149);
    else v = $bitstoreal({f[31] ? 1'b1 : 1'b0, 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0});
    return (f[30:23] == 8'd0 && f[31]) ? -v : v;
  endfunction

  // Truncating conversion; values too small for a normal single become 0.
  function automatic logic [31:0] real_to_f32(real v);
    logic [63:0] b;
    int e;
    b = $realtobits(v);
    e = int'(b[62:52]) - 1023 + 127;
    if (e <= 0) return {b[63], 31'd0};
    if (e >= 255) return {b[63], 8'hFF, 23'd0};
    return {b[63], 8'(e), b[51:29]};
  endfunction

  // dtype: 0 int8, 1 int16, 2 int32, 3 float32, 4 float64
  function automatic longint ref_att(logic [63:0] d, int dtype, int gm, int ge);
    real v;
    real g;
    g = real'(gm) * (2.0 ** (ge - 15));
    case (dtype)
      0: v = real'(longint'(signed'(d[7:0])));
      1: v = real'(longint'(signed'(d[15:0])));
      2: v = real'(longint'(signed'(d[31:0])));
      3: begin
        if (d[30:23] == 8'hFF) return d[31] ? -ATT_MAX : ATT_MAX;
        v = f32_to_real(d[31:0]);
      end
      default: begin
        if (d[62:52] == 11'h7FF) return d[63] ? -ATT_MAX : ATT_MAX;
        v = $bitstoreal(d);
      end
    endcase
    return round_sat(v * g);
  endfunction

  function automatic int ref_bits(longint v);
    int n;
    if (v == 0) return 0;
    n = 1;
    while (!((v >= -(longint'(1) << (n - 1))) && (v < (longint'(1) << (n - 1))))) n++;
    return n;
  endfunction

  // Streams of one block: s[0] = x, s[1], s[2] as the remover defines them.
  function automatic void ref_streams(input lq_t x, input int fc,
                                      output lq_t s0, output lq_t s1, output lq_t s2);
    int dd, sg;
    dd = (fc == 1) ? 2 : 1;
    sg = (fc == 0) ? -1 : 1;
    s0 = {}; s1 = {}; s2 = {};
    foreach (x[n]) begin
      longint xp, yp, y;
      xp = (n >= dd) ? x[n-dd] : 0;
      y  = x[n] + sg * xp;
      s0.push_back(x[n]);
      s1.push_back(y);
    end
    foreach (s1[n]) begin
      longint yp;
      yp = (n >= dd) ? s1[n-dd] : 0;
      s2.push_back(s1[n] + sg * yp);
    end
  endfunction

  function automatic int ref_cost(lq_t s);
    int c, g;
    c = 0;
    for (int i = 0; i < s.size(); i += 4) begin
      g = 0;
      for (int j = 0; j < 4; j++) if (ref_bits(s[i+j]) > g) g = ref_bits(s[i+j]);
      c += 4 * g;
    end
    return c;
  endfunction

  // Bit reader over 32-bit words, least significant bit first.
  function automatic longint get_bits(ref logic [31:0] w[$], ref int pos, input int n);
    longint v;
    v = 0;
    for (int i = 0; i < n; i++) begin
      int wi, bi;
      wi = pos / 32;
      bi = pos % 32;
      if (wi < w.size() && w[wi][bi]) v |= (longint'(1) << i);
      pos++;
    end
    return v;
  endfunction

  function automatic longint sext(longint v, int n);
    if (n == 0) return 0;
    if (v[n-1]) return v - (longint'(1) << n);
    return v;
  endfunction

  // Decode one encoded block of nsmp samples.
  function automatic dec_t decode_block(ref logic [31:0] w[$], input int nsmp);
    dec_t r;
    int pos, e, prev, pend, nib;
    bit covered;
    longint h, he;
    pos = 0;
    r.ok = 1;
    r.n_pair = 0; r.n_single = 0; r.n_abs = 0;
    h = get_bits(w, pos, 32);
    r.sel    = int'(h[1:0]);
    r.fc     = int'(h[3:2]);
    r.dtype  = int'(h[6:4]);
    r.mode   = int'(h[7]);
    r.gain_m = int'(h[23:8]);
    r.gain_e = int'(sext(longint'(h[31:24]), 8));
    r.hdr_bits = 32;
    if (r.dtype >= 3) begin
      he = get_bits(w, pos, 16);
      r.gain_e = int'(sext((he[7:0] << 8) | longint'(h[31:24]), 16));
      if (he[15:8] != 0) r.ok = 0;
      r.hdr_bits = 48;
    end
    prev = 0; pend = 0; covered = 0;
    r.stream = {};
    for (int g = 0; g < nsmp / 4; g++) begin
      if (covered) begin
        e = pend;
        covered = 0;
      end else begin
        nib = int'(get_bits(w, pos, 4));
        if (nib >= 14) begin
          e = ((nib & 1) << 4) | int'(get_bits(w, pos, 4));
          r.n_abs++;
        end else if (nib >= 9) begin
          if (g == 0) r.ok = 0;
          e = prev + nib - 11;
          r.n_single++;
        end else begin
          if (g == 0) r.ok = 0;
          e = prev + nib / 3 - 1;
          pend = e + nib % 3 - 1;
          covered = 1;
          r.n_pair++;
        end
      end
      if (e < 0 || e > 31) begin
        r.ok = 0;
        e = 0;
      end
      for (int j = 0; j < 4; j++) r.stream.push_back(sext(get_bits(w, pos, e), e));
      prev = e;
    end
    r.bits_used = pos;
    if ((pos + 31) / 32 != w.size()) r.ok = 0;
    // Inverse filter.
    begin
      int dd, sg;
      lq_t y;
      dd = (r.fc == 1) ? 2 : 1;
      sg = (r.fc == 0) ? -1 : 1;
      y = {};
      r.x = {};
      if (r.sel == 2) begin
        foreach (r.stream[n]) y.push_back(r.stream[n] - sg * ((n >= dd) ? y[n-dd] : 0));
      end else begin
        y = r.stream;
      end
      if (r.sel == 0) r.x = y;
      else foreach (y[n]) r.x.push_back(y[n] - sg * ((n >= dd) ? r.x[n-dd] : 0));
    end
    return r;
  endfunction

  // x / g, with integers saturated to the type's range.
  function automatic real ref_unatt(longint x, int dtype, int gm, int ge);
    real v, lim;
    if (gm == 0) return 0.0;
    v = real'(x) / (real'(gm) * (2.0 ** (ge - 15)));
    if (dtype <= 2) begin
      lim = (2.0 ** ((dtype == 0) ? 7 : (dtype == 1) ? 15 : 31)) - 1.0;
      if (v > lim) v = lim;
      if (v < -lim) v = -lim;
    end
    return v;
  endfunction

  function automatic real dec_to_real(logic [63:0] d, int dtype);
    case (dtype)
      0: return real'(longint'(signed'(d[7:0])));
      1: return real'(longint'(signed'(d[15:0])));
      2: return real'(longint'(signed'(d[31:0])));
      3: return f32_to_real(d[31:0]);
      default: return $bitstoreal(d);
    endcase
  endfunction

  // Does a decoded value match the expected x / g? Integers within 1 (exact
  // when the gain mantissa is a power of two), floats within 2^-20 relative,
  // or zero where the value is below the type's smallest normal.
  function automatic bit dec_match(logic [63:0] d, int dtype, real v, bit exact);
    real got, err, tiny;
    got = dec_to_real(d, dtype);
    err = (got > v) ? got - v : v - got;
    if (dtype <= 2) begin
      if (exact) return got == ((v < 0.0) ? -$floor(-v + 0.5) : $floor(v + 0.5));
      return err <= 1.0;
    end
    tiny = (dtype == 3) ? 2.0 ** -126 : 2.0 ** -1022;
    if (((v < 0.0) ? -v : v) < tiny) return got == 0.0;
    return err <= ((v < 0.0) ? -v : v) * (2.0 ** -20);
  endfunction

endpackage
