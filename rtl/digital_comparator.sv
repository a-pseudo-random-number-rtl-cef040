// digital_comparator: M-bit magnitude comparator reduced to its A > B output.
//
// A full comparator has three one-hot outputs (A > B, A = B, A < B). Only
// A > B is kept: gt is 1 when the pseudo-random number a exceeds the threshold
// b and 0 when a <= b. With a uniform over 0..2^M-1 the output is 1 with
// probability ((2^M - 1) - b) / 2^M.
//
// The comparison is written as a most-significant-bit-first scan, the usual
// structure of a ripple magnitude comparator: the first bit position where a
// and b differ decides the result. Purely combinational; the source gives no
// output register, and both inputs come from flip-flops.
module digital_comparator
  import prng_pkg::*;
#(
  parameter int unsigned M = PRNG_M
) (
  input  logic [M-1:0] a,
  input  logic [M-1:0] b,
  output logic         gt
);

  always_comb begin
    logic decided;
    gt      = 1'b0;
    decided = 1'b0;
    for (int i = int'(M) - 1; i >= 0; i--) begin
      if (!decided && (a[i] != b[i])) begin
        gt      = a[i];
        decided = 1'b1;
      end
    end
  end

endmodule
