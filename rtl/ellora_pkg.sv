// ellora_pkg: types, constants and index arithmetic shared by the IFFT core.
//
// The core works on 16-bit signed complex samples, following the 16-bit
// signed arithmetic of the radar pipeline it serves. Twiddle factors are
// 16-bit signed values in Q1.14 (16384 represents 1.0), so that +1 and -1
// are both exact; this format is a choice of this design.
//
// The index functions describe a radix-2 decimation-in-time transform whose
// input is loaded in bit-reversed order and whose output comes out in
// natural order. In stage s (0 .. log2(N)-1) butterfly j combines the
// positions ia = (j >> s)*2^(s+1) + (j mod 2^s) and ib = ia + 2^s of the
// working vector, using twiddle index (j mod 2^s) << (log2(N)-1-s).
// After a stage, position p of the working vector is held by output Ya or
// Yb of one butterfly; ya_yb_loc() names it as an index into the
// concatenation {Yb[N/2-1:0], Ya[N/2-1:0]} (Ya[j] at j, Yb[j] at N/2+j).
package ellora_pkg;

  parameter int unsigned DATA_W = 16;   // real and imaginary part width
  parameter int unsigned TW_FRAC = 14;  // fraction bits of a twiddle factor

  typedef logic signed [DATA_W-1:0] sample_t;

  typedef struct packed {
    sample_t re;
    sample_t im;
  } cplx_t;

  // Position of the first input of butterfly j in stage s.
  function automatic int unsigned bfly_a_pos(int unsigned j, int unsigned s);
    return ((j >> s) << (s + 1)) + (j & ((1 << s) - 1));
  endfunction

  // Position of the second input of butterfly j in stage s.
  function automatic int unsigned bfly_b_pos(int unsigned j, int unsigned s);
    return bfly_a_pos(j, s) + (1 << s);
  endfunction

  // Twiddle index of butterfly j in stage s of a 2^log_n point transform.
  function automatic int unsigned tw_index(int unsigned j, int unsigned s, int unsigned log_n);
    return (j & ((1 << s) - 1)) << (log_n - 1 - s);
  endfunction

  // Where position p sits after stage st, as an index into {Yb, Ya}.
  function automatic int unsigned ya_yb_loc(int unsigned p, int unsigned st, int unsigned n);
    int unsigned h, blk, off;
    h   = 1 << st;
    blk = p >> (st + 1);
    off = p & ((h << 1) - 1);
    if (off < h) return blk * h + off;
    else         return n / 2 + blk * h + (off - h);
  endfunction

  // Saturate a DATA_W+1 bit adder result to DATA_W bits.
  function automatic sample_t sat1(logic signed [DATA_W:0] v);
    if (v[DATA_W] != v[DATA_W-1]) return v[DATA_W] ? {1'b1, {(DATA_W-1){1'b0}}}
                                                   : {1'b0, {(DATA_W-1){1'b1}}};
    return v[DATA_W-1:0];
  endfunction

  // Bit reversal of the low log_n bits of v.
  function automatic int unsigned bit_rev(int unsigned v, int unsigned log_n);
    int unsigned r;
    r = 0;
    for (int unsigned b = 0; b < log_n; b++)
      if (v[b]) r |= 1 << (log_n - 1 - b);
    return r;
  endfunction

endpackage
