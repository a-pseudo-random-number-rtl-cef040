// prng_top: pseudo-random bit generator with programmable statistics.
//
// One N-bit LFSR and one threshold controller are shared by NUM_SEQ output
// sequences. Each sequence has its own M XOR gates, which form an M-bit
// uniformly distributed number A from the LFSR state, and its own comparator,
// which outputs A > threshold. The probability of a 1 on every output is
// ((2^M - 1) - threshold) / 2^M, so the threshold sets the statistics: a
// fixed threshold gives a fixed bias, and a counting threshold lowers the
// density of 1s step by step until, at the maximum threshold, the outputs
// stay 0. Adding a sequence costs M XOR gates and one comparator.
//
// Interface: thr_set / thr_init load the threshold; thr_step advances it by
// one (tie high to count every clock, low for a fixed threshold); prng_out
// holds one bit per sequence. Timing: one new output bit per sequence per
// clock. After reset (synchronous, active low) the LFSR holds its seed and the
// threshold is 0; prng_out is valid in every cycle, derived combinationally
// from the LFSR and counter flip-flops.
//
// From the source: the block structure, N = 32, M = 8 and one sequence in the
// presented implementation. This design's choice: the polynomial, the seed,
// five taps per XOR gate and their assignment, and the step strobe. With the
// default N, M and K, up to 23 sequences keep every gate's spacing distinct.
module prng_top
  import prng_pkg::*;
#(
  parameter int unsigned N       = PRNG_N,
  parameter int unsigned M       = PRNG_M,
  parameter int unsigned K       = PRNG_K,
  parameter int unsigned NUM_SEQ = PRNG_NUM_SEQ,
  parameter logic [N-1:0] POLY   = N'(PRNG_POLY32),   // LFSR polynomial, see lfsr
  parameter logic [N-1:0] SEED   = N'(PRNG_SEED32)    // LFSR reset value, non-zero
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               thr_set,
  input  logic [M-1:0]       thr_init,
  input  logic               thr_step,
  output logic [M-1:0]       threshold,
  output logic               thr_saturated,
  output logic [NUM_SEQ-1:0] prng_out
);

  // No two XOR gates of the whole generator may share a tap spacing.
  if (!taps_distinct(N, K, NUM_SEQ * M)) begin : g_bad_taps
    $error("prng_top: two XOR gates share a tap spacing; reduce NUM_SEQ or change K");
  end

  logic [N-1:0] state;

  lfsr #(.N(N), .POLY(POLY), .SEED(SEED)) u_lfsr (
    .clk   (clk),
    .rst_n (rst_n),
    .state (state)
  );

  threshold_controller #(.M(M)) u_thr (
    .clk        (clk),
    .rst_n      (rst_n),
    .set        (thr_set),
    .init_value (thr_init),
    .step       (thr_step),
    .threshold  (threshold),
    .saturated  (thr_saturated)
  );

  for (genvar s = 0; s < int'(NUM_SEQ); s++) begin : g_seq
    logic [M-1:0] rnd;

    xor_taps #(.N(N), .M(M), .K(K), .SEQ(s)) u_xor (
      .state (state),
      .rnd   (rnd)
    );

    digital_comparator #(.M(M)) u_cmp (
      .a  (rnd),
      .b  (threshold),
      .gt (prng_out[s])
    );
  end

endmodule
