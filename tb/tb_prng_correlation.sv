// tb_prng_correlation: randomness of the output streams across thresholds.
//
// Two streams (NUM_SEQ = 2) are recorded for 16384 clocks at each fixed
// threshold 7, 27, 47, ..., 247. For each threshold the testbench computes
// the largest |cross-correlation| between the two streams over lags
// -16..16 and the largest |auto-correlation| of each stream over lags 1..16
// (Pearson correlation, normalised by the full-length deviations). Both must
// stay below 0.06; one standard deviation of an estimate from 16384 samples
// is about 0.008. The density of 1s is checked against
// P(1) = (255 - T) / 256 as well.
module tb_prng_correlation;
  import prng_ref_pkg::*;

  localparam int S = 2, L = 16384;

  logic       clk = 1'b0, rst_n = 1'b0;
  logic       thr_set = 1'b0, thr_step = 1'b0;
  logic [7:0] thr_init = '0;
  logic [7:0] threshold;
  logic       thr_saturated;
  logic [S-1:0] prng_out;

  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  prng_top #(.NUM_SEQ(S)) dut (.clk, .rst_n, .thr_set, .thr_init, .thr_step,
                               .threshold, .thr_saturated, .prng_out);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic real absr(real x);
    return x < 0.0 ? -x : x;
  endfunction

  initial begin : watchdog
    repeat (13 * L + 1000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit  x [], y [];
    real rx, ra, r, p;
    int  ones;
    x = new[L];
    y = new[L];
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int t = 7; t <= 247; t += 20) begin
      thr_set = 1'b1; thr_init = 8'(t);
      @(posedge clk); #1;
      thr_set = 1'b0;
      ones = 0;
      for (int i = 0; i < L; i++) begin
        @(negedge clk);
        x[i] = prng_out[0];
        y[i] = prng_out[1];
        ones += int'(prng_out[0]);
      end
      rx = 0.0; ra = 0.0;
      for (int lag = -16; lag <= 16; lag++) begin
        r = xcorr(x, y, lag);
        if (absr(r) > rx) rx = absr(r);
      end
      for (int lag = 1; lag <= 16; lag++) begin
        r = xcorr(x, x, lag);
        if (absr(r) > ra) ra = absr(r);
        r = xcorr(y, y, lag);
        if (absr(r) > ra) ra = absr(r);
      end
      p = real'(ones) / real'(L);
      $display("threshold %3d: P(1) = %.4f (Eq.2 %.4f), max |Rxy| = %.4f, max |Rxx| = %.4f",
               t, p, p_one(t), rx, ra);
      check(rx < 0.06, "cross-correlation near zero");
      check(ra < 0.06, "auto-correlation near zero");
      check(absr(p - p_one(t)) < 0.02, "P(1) matches Eq. 2");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
