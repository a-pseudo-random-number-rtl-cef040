// threshold_controller: counter-based dynamic threshold.
//
// An M-bit up-counter holds the comparator threshold. It is loaded with an
// initial value and counts up while stepping is enabled, until all its bits
// are 1; then it holds at the maximum. In the original circuit a NAND of all
// counter bits, a NAND with the clock and an inverter cut the counter's clock
// off at the maximum. Here the same condition disables a synchronous count
// enable instead of gating the clock: step & ~(&count).
//
// Interface: set loads init_value (priority over counting); step advances the
// counter by one on this clock edge (held high, it counts every clock; held
// low, the threshold is fixed); threshold is the counter; saturated is high at
// the all-ones value. Timing: all changes on the rising clock edge; rst_n is
// synchronous, active low, and clears the count.
//
// From the source: the loadable up-counter, its value as the threshold and
// the stop at the maximum. This design's choice: the clock enable in place of
// the gated clock, the step strobe as the counter's clock, synchronous SET,
// and reset to 0.
module threshold_controller
  import prng_pkg::*;
#(
  parameter int unsigned M = PRNG_M
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         set,
  input  logic [M-1:0] init_value,
  input  logic         step,
  output logic [M-1:0] threshold,
  output logic         saturated
);

  logic [M-1:0] count;

  always_comb saturated = &count;   // NAND1 output low
  always_comb threshold = count;

  always_ff @(posedge clk) begin
    if (!rst_n)                  count <= '0;
    else if (set)                count <= init_value;
    else if (step && !saturated) count <= count + 1'b1;
  end

  // Once at the maximum, the count only changes through set or reset.
  a_hold_max: assert property (@(posedge clk) disable iff (!rst_n)
                               saturated && !set |=> saturated);

endmodule
