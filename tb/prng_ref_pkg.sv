// prng_ref_pkg: reference model of the PRNG for the testbenches.
//
// Written independently of the RTL: the LFSR step uses the explicit exponents
// of x^32 + x^22 + x^2 + x + 1, and the five-tap XOR sets are recomputed from
// their defining hash with 64-bit arithmetic, gate s*M + b feeding bit b of
// sequence s. Also holds the Pearson
// correlation used for the cross- and auto-correlation checks.
package prng_ref_pkg;

  localparam int REF_N = 32;
  localparam int REF_M = 8;

  function automatic logic [31:0] lfsr_next(logic [31:0] s);
    return {s[30:0], s[31] ^ s[21] ^ s[1] ^ s[0]};
  endfunction

  // Tap mask of gate g: five distinct taps from the hash
  // x0 = g * 2654435769, x(i+1) = x(i) * 1664525 + 1013904223 mod 2^32,
  // tap = floor(x / 65536) mod 32, repeated taps skipped.
  function automatic logic [31:0] gate_mask(int g);
    longint unsigned x = (longint'(g) * 64'd2654435769) % 64'h1_0000_0000;
    logic [31:0]     m = '0;
    int              taps = 0;
    while (taps < 5) begin
      x = (x * 64'd1664525 + 64'd1013904223) % 64'h1_0000_0000;
      if (m[(x / 65536) % 32] == 1'b0) begin
        m[(x / 65536) % 32] = 1'b1;
        taps++;
      end
    end
    return m;
  endfunction

  // Expected M-bit number of sequence seq for LFSR state s.
  function automatic logic [REF_M-1:0] rnd_of(logic [31:0] s, int seq);
    logic [REF_M-1:0] r;
    for (int b = 0; b < REF_M; b++) r[b] = ^(s & gate_mask(seq * REF_M + b));
    return r;
  endfunction

  // P(1) of Eq. (2) for an M-bit threshold.
  function automatic real p_one(int thr);
    return real'((2 ** REF_M - 1) - thr) / real'(2 ** REF_M);
  endfunction

  // Pearson correlation of x(n) and y(n+lag) over the overlapping indices,
  // normalised by the full-length deviations of x and y.
  function automatic real xcorr(const ref bit x[], const ref bit y[], input int lag);
    int    len = x.size();
    real   mx = 0.0, my = 0.0, sxy = 0.0, sxx = 0.0, syy = 0.0;
    foreach (x[i]) begin mx += real'(x[i]); my += real'(y[i]); end
    mx /= real'(len); my /= real'(len);
    foreach (x[i]) begin
      sxx += (real'(x[i]) - mx) ** 2;
      syy += (real'(y[i]) - my) ** 2;
    end
    for (int i = 0; i < len; i++)
      if (i + lag >= 0 && i + lag < len)
        sxy += (real'(x[i]) - mx) * (real'(y[i + lag]) - my);
    if (sxx == 0.0 || syy == 0.0) return 0.0;
    return sxy / ($sqrt(sxx) * $sqrt(syy));
  endfunction

endpackage
