// bposit_ref_pkg: bit-serial reference model of b-posits for the testbenches.
//
// Works the way the format is defined rather than the way the hardware
// does it: a negative word is first negated (2's complement), the regime run
// is then counted bit by bit up to the bound rs, and the exponent and
// fraction are read from what follows. Values are kept as a scale S (the
// power of two of the magnitude) and a fraction F left-aligned in 64 bits,
// so |x| = (1 + F/2^64) * 2^S. Words are up to 64 bits.
package bposit_ref_pkg;

  typedef struct {
    bit          sign;
    bit          zero;   // word is 0
    bit          nar;    // word is NaR (1 followed by zeros)
    int          scale;  // S
    int          rsize;  // regime size of the magnitude's word, 2 .. rs
    int          run;    // regime run length k, 1 .. rs
    bit          maxrun; // run ended by reaching rs
    longint unsigned frac; // F, left-aligned
  } ref_val_t;

  function automatic longint unsigned mask_n(int n);
    return (n >= 64) ? '1 : ((64'd1 << n) - 64'd1);
  endfunction

  function automatic bit bit_at(longint unsigned w, int i);
    return (i < 0) ? 1'b0 : 1'(w >> i);
  endfunction

  function automatic ref_val_t decode(longint unsigned w, int n, int rs, int es);
    ref_val_t        v;
    longint unsigned p;
    bit              rmsb;
    int              k, size, r, e, fw, pos;
    w      &= mask_n(n);
    v.sign  = bit_at(w, n - 1);
    v.zero  = (w == 0);
    v.nar   = (w == (64'd1 << (n - 1)));
    v.scale = 0; v.frac = 0; v.rsize = 0; v.run = 0; v.maxrun = 0;
    if (v.zero || v.nar) return v;
    p    = v.sign ? ((~w + 64'd1) & mask_n(n)) : w;
    rmsb = bit_at(p, n - 2);
    k    = 1;
    while (k < rs && bit_at(p, n - 2 - k) == rmsb) k++;
    size     = (k < rs) ? k + 1 : rs;
    v.maxrun = (k == rs);
    r        = rmsb ? k - 1 : -k;
    pos      = n - 2 - size;            // first bit below the regime
    e        = 0;
    for (int i = 0; i < es; i++) e = (e << 1) | int'(bit_at(p, pos - i));
    fw       = n - 1 - size - es;
    v.frac   = (fw > 0) ? ((p & mask_n(fw)) << (64 - fw)) : 64'd0;
    v.scale  = r * (1 << es) + e;
    v.rsize  = size;
    v.run    = k;
    return v;
  endfunction

  // Word for |x| = (1 + F) * 2^S, F truncated to the room left; negated if
  // sign. S must be representable: -rs*2^es <= S < rs*2^es.
  function automatic longint unsigned encode(bit sign, int s, longint unsigned f,
                                            int n, int rs, int es);
    longint unsigned w;
    int r, e, k, pos, fw;
    r   = (s >= 0) ? s / (1 << es) : -((-s + (1 << es) - 1) / (1 << es));
    e   = s - r * (1 << es);
    w   = 0;
    pos = n - 2;
    k   = (r >= 0) ? r + 1 : -r;
    for (int i = 0; i < k; i++) begin
      if (r >= 0) w |= (64'd1 << pos);
      pos--;
    end
    if (k < rs) begin                    // terminating opposite bit
      if (r < 0) w |= (64'd1 << pos);
      pos--;
    end
    for (int i = es - 1; i >= 0; i--) begin
      if (((e >> i) & 1) != 0) w |= (64'd1 << pos);
      pos--;
    end
    fw = pos + 1;
    if (fw > 0) w |= (f >> (64 - fw));
    if (sign) w = (~w + 64'd1) & mask_n(n);
    return w & mask_n(n);
  endfunction

endpackage
