// lfsr: Fibonacci linear feedback shift register.
//
// N flip-flops form a shift chain: on each clock flip-flop i+1 takes the value
// of flip-flop i, and flip-flop 1 takes the XOR of every flip-flop whose
// polynomial coefficient is 1. With a primitive polynomial the register steps
// through all 2^N - 1 non-zero states. This is the structure of the three-bit
// example x^3 + x^2 + 1 (feedback = flip-flop 2 XOR flip-flop 3), widened to N.
//
// Interface: state[i-1] is the output of flip-flop i; state[N-1] is the serial
// output. POLY bit i-1 is the coefficient a_i of x^i, with bit N-1 (x^N) set.
// Timing: one shift per rising clock edge; rst_n is synchronous, active low,
// and loads SEED.
//
// From the source: the Fibonacci form and the 32-bit length. This design's
// choice: the polynomial x^32 + x^22 + x^2 + x + 1, the seed and the reset.
module lfsr
  import prng_pkg::*;
#(
  parameter int unsigned  N    = PRNG_N,
  parameter logic [N-1:0] POLY = N'(PRNG_POLY32),
  parameter logic [N-1:0] SEED = N'(PRNG_SEED32)
) (
  input  logic         clk,
  input  logic         rst_n,
  output logic [N-1:0] state
);

  if (N < 2 || !POLY[N-1] || SEED == '0) begin : g_bad_param
    $error("lfsr: need N >= 2, POLY[N-1] = 1 and a non-zero SEED");
  end

  logic feedback;

  always_comb feedback = ^(state & POLY);

  always_ff @(posedge clk) begin
    if (!rst_n) state <= SEED;
    else        state <= {state[N-2:0], feedback};
  end

  // The all-zero state is a lock-up state that a maximal LFSR never enters.
  a_never_zero: assert property (@(posedge clk) disable iff (!rst_n) state != '0);

endmodule
