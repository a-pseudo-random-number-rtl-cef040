// xor_taps: the M XOR gates that turn the LFSR state into one M-bit number.
//
// Bit i of rnd is the XOR of the K flip-flops selected by
// prng_pkg::tap_mask(N, K, SEQ*M + i), a tap set drawn from an integer hash
// of the gate number. Every gate of every sequence has its own tap set, so
// the M bits, and the numbers of different sequences, are different phases of
// the LFSR sequence. Each bit is uniform. The number is uniform only if the M
// tap masks are linearly independent over GF(2) (no XOR of some of its bits
// is constant); elaboration stops with an error for a SEQ whose masks are
// not. That no two gates share a tap spacing is checked in prng_top, which
// sees all sequences.
//
// Interface: state is the LFSR state (bit 0 = flip-flop 1); rnd is the
// pseudo-random number A handed to the comparator. Purely combinational.
//
// From the source: one XOR gate per bit, multi-tap XORs, distinct intervals.
// This design's choice: K = 5, the hashed tap assignment and the rank check.
module xor_taps
  import prng_pkg::*;
#(
  parameter int unsigned N   = PRNG_N,
  parameter int unsigned M   = PRNG_M,
  parameter int unsigned K   = PRNG_K,
  parameter int unsigned SEQ = 0
) (
  input  logic [N-1:0] state,
  output logic [M-1:0] rnd
);

  if (N > TAP_MAX_N || K > TAP_MAX_K || K < 2 || K > N || M > TAP_MAX_M) begin : g_bad_param
    $error("xor_taps: N, K or M out of range");
  end else if (stream_rank(N, K, M, SEQ) != M) begin : g_dependent_taps
    $error("xor_taps: the tap sets of this SEQ are linearly dependent; A would not be uniform");
  end

  for (genvar i = 0; i < int'(M); i++) begin : g_bit
    localparam logic [TAP_MAX_N-1:0] MASK_FULL = tap_mask(N, K, SEQ * M + i);
    localparam logic [N-1:0]         MASK      = MASK_FULL[N-1:0];
    always_comb rnd[i] = ^(state & MASK);
  end

endmodule
