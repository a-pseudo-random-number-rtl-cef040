// tb_prng_full: the PRNG at its default size (32-bit LFSR, 8-bit threshold,
// one output sequence), swept over fixed thresholds and then annealed.
//
// Part 1 measures the probability of a 1 at the thresholds 0, 7, 27, 47, ...,
// 247 and 255 (8192 clocks each) and compares it with
// P(1) = ((2^8 - 1) - T) / 2^8; at T = 255 the output must never be 1.
// Part 2 loads 0 and counts the threshold up every clock until it saturates
// (255 clocks), then checks that the output stays 0. Every output bit is also
// compared with the reference model in every cycle.
module tb_prng_full;
  import prng_ref_pkg::*;

  logic       clk = 1'b0, rst_n = 1'b0;
  logic       thr_set = 1'b0, thr_step = 1'b0;
  logic [7:0] thr_init = '0;
  logic [7:0] threshold;
  logic       thr_saturated;
  logic [0:0] prng_out;

  int          checks = 0, failures = 0, model_errors = 0, n_points = 0;
  logic [31:0] ref_state;

  always #5 clk = ~clk;

  prng_top dut (.clk, .rst_n, .thr_set, .thr_init, .thr_step,
                .threshold, .thr_saturated, .prng_out);

  always @(negedge clk) if (rst_n)
    if (prng_out[0] != (rnd_of(ref_state, 0) > threshold)) model_errors++;
  always @(posedge clk) ref_state <= rst_n ? lfsr_next(ref_state) : 32'h1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int  ones, cyc, t;
    real p, e;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    t = 0;
    while (t <= 255) begin
      thr_set = 1'b1; thr_init = 8'(t);
      @(posedge clk); #1;
      thr_set = 1'b0;
      ones = 0;
      repeat (8192) begin @(negedge clk); ones += int'(prng_out[0]); end
      p = real'(ones) / 8192.0;
      e = p_one(t);
      $display("threshold %3d: P(1) = %.4f, Eq.2 = %.4f", t, p, e);
      check(int'(threshold) == t, "threshold held");
      if (t == 255) check(ones == 0, "never 1 at threshold 255");
      else          check(p > e - 0.025 && p < e + 0.025, "P(1) matches Eq. 2");
      n_points++;
      t = (t == 0) ? 7 : (t == 247) ? 255 : (t == 255) ? 256 : t + 20;
    end
    // anneal from 0, stepping every clock
    thr_set = 1'b1; thr_init = 8'd0;
    @(posedge clk); #1;
    thr_set = 1'b0; thr_step = 1'b1;
    cyc = 0;
    while (!thr_saturated && cyc < 1000) begin @(posedge clk); #1; cyc++; end
    check(cyc == 255, "saturates after 255 clocks");
    ones = 0;
    repeat (1000) begin @(negedge clk); ones += int'(prng_out[0]); end
    check(ones == 0 && threshold == 8'hFF, "output 0 once saturated");
    check(model_errors == 0, "every output bit matches the reference model");
    check(n_points == 15, "all sweep points run");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
