// prng_pkg: constants and the tap-selection function shared by the PRNG blocks.
//
// The default sizes are those of the presented implementation: a 32-bit LFSR,
// 8-bit pseudo-random numbers, an 8-bit threshold and one output sequence.
// The number of taps per XOR gate (5), the tap sets, the LFSR polynomial and
// the seed are this design's own choices; the source only asks that the
// polynomial be primitive and that no two XOR gates use tap sets with the same
// intervals.
//
// tap_mask(n, k, g) returns the tap set of XOR gate g as an n-bit mask over
// the LFSR state (bit 0 = first flip-flop). The k taps are drawn from a small
// integer hash of g: x = g * 0x9E3779B9, then repeatedly
// x = x * 1664525 + 1013904223 (mod 2^32), tap = (x >> 16) mod n, skipping
// taps already chosen. Sparse, regularly spaced tap sets (for example all sets
// sharing two taps) make the bits of one number, and of one number and the
// next, linearly related, which correlates the thresholded outputs; spreading
// the taps pseudo-randomly avoids that. stream_rank and taps_distinct check
// the two properties the generator relies on.
package prng_pkg;

  localparam int unsigned PRNG_N       = 32;  // LFSR length
  localparam int unsigned PRNG_M       = 8;   // random-number / threshold width
  localparam int unsigned PRNG_K       = 5;   // taps per XOR gate
  localparam int unsigned PRNG_NUM_SEQ = 1;   // output sequences

  // x^32 + x^22 + x^2 + x + 1 : bit i-1 set means flip-flop i feeds the XOR.
  localparam logic [31:0] PRNG_POLY32 = 32'h8020_0003;
  localparam logic [31:0] PRNG_SEED32 = 32'h0000_0001;

  localparam int unsigned TAP_MAX_N = 64;     // widest LFSR tap_mask supports
  localparam int unsigned TAP_MAX_K = 8;      // most taps per XOR gate
  localparam int unsigned TAP_MAX_M = 64;     // widest number stream_rank supports

  // Tap set of XOR gate g (see header).
  function automatic logic [TAP_MAX_N-1:0] tap_mask(int unsigned n, int unsigned k,
                                                     int unsigned g);
    logic [TAP_MAX_N-1:0] m = '0;
    logic [31:0]          x = 32'(g) * 32'h9E37_79B9;
    int unsigned          c = 0;
    logic [$clog2(TAP_MAX_N)-1:0] p;
    while (c < k) begin
      x = x * 32'd1664525 + 32'd1013904223;
      p = $clog2(TAP_MAX_N)'(int'(x >> 16) % n);
      if (!m[p]) begin
        m[p] = 1'b1;
        c++;
      end
    end
    return m;
  endfunction

  // Tap mask shifted down so that its lowest tap is at bit 0: two gates with
  // equal normalised masks have the same tap spacing, and their outputs are
  // the same sequence shifted in time.
  function automatic logic [TAP_MAX_N-1:0] tap_pattern(logic [TAP_MAX_N-1:0] m);
    logic [TAP_MAX_N-1:0] r = m;
    for (int unsigned i = 0; i < TAP_MAX_N; i++)
      if (r != '0 && !r[0]) r = r >> 1;
    return r;
  endfunction

  // True if no two of the first 'gates' XOR gates share a tap spacing.
  function automatic bit taps_distinct(int unsigned n, int unsigned k, int unsigned gates);
    for (int unsigned i = 0; i < gates; i++)
      for (int unsigned j = i + 1; j < gates; j++)
        if (tap_pattern(tap_mask(n, k, i)) == tap_pattern(tap_mask(n, k, j))) return 1'b0;
    return 1'b1;
  endfunction

  // Rank over GF(2) of the m tap masks of stream seq. The stream's number is
  // uniformly distributed only if the rank is m, i.e. no XOR of some of its
  // bits is constant. Gaussian elimination on the masks.
  function automatic int unsigned stream_rank(int unsigned n, int unsigned k,
                                              int unsigned m, int unsigned seq);
    logic [TAP_MAX_N-1:0] v [TAP_MAX_M];
    logic [TAP_MAX_N-1:0] t;
    int unsigned          r = 0;
    int                   p;
    for (int unsigned j = 0; j < TAP_MAX_M; j++)
      v[j] = (j < m) ? tap_mask(n, k, seq * m + j) : '0;
    for (int unsigned b = 0; b < n && r < m; b++) begin
      p = -1;
      for (int unsigned j = r; j < m; j++)
        if (p < 0 && v[j][b]) p = int'(j);
      if (p >= 0) begin
        t = v[p]; v[p] = v[r]; v[r] = t;
        for (int unsigned j = 0; j < m; j++)
          if (j != r && v[j][b]) v[j] ^= v[r];
        r++;
      end
    end
    return r;
  endfunction

endpackage
