// tb_prng_top: end-to-end testbench of the PRNG with four output sequences.
//
// Runs the design at N = 32, M = 8 and NUM_SEQ = 4 through every mechanism:
//   1. reset: seed loaded, threshold 0;
//   2. fixed thresholds 27, 127, 227 (the sample waveforms of the source) and
//      the end points 0 and 255: the density of 1s on each output must match
//      P(1) = (255 - T) / 256, and at T = 255 no 1 may appear at all;
//   3. randomness at T = 127: cross-correlation between the four sequences at
//      lags -8..8 and auto-correlation at lags 1..16 must stay near zero;
//   4. dynamic threshold, counting every clock: saturation after exactly
//      255 cycles, then the outputs stay 0;
//   5. dynamic threshold, one step every 64 clocks, run for 255*64/0.8
//      clocks: the normalised cumulative count of 1s must follow the fitted
//      curve CC = -1.5396 t^2 + 2.4658 t + 0.0055 until saturation and stay
//      at 1 afterwards.
// In every cycle each output bit is compared with a reference model. The
// testbench counts how often each mechanism (load, fixed hold, step,
// hold at maximum, distinct sequences) occurred and fails if one never did.
module tb_prng_top;
  import prng_ref_pkg::*;

  localparam int M = 8, S = 4;

  logic         clk = 1'b0, rst_n = 1'b0;
  logic         thr_set = 1'b0, thr_step = 1'b0;
  logic [M-1:0] thr_init = '0;
  logic [M-1:0] threshold;
  logic         thr_saturated;
  logic [S-1:0] prng_out;

  int checks = 0, failures = 0, model_errors = 0;
  int n_load = 0, n_fixed = 0, n_step = 0, n_hold_max = 0, n_distinct = 0;

  logic [31:0] ref_state;

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

  // Per-cycle comparison with the reference model (sampled before the edge).
  always @(negedge clk) if (rst_n) begin
    for (int s = 0; s < S; s++)
      if (prng_out[s] != (rnd_of(ref_state, s) > threshold)) model_errors++;
    if (prng_out[0] != prng_out[1]) n_distinct++;
    if (thr_step && !thr_set) begin
      if (thr_saturated) n_hold_max++;
      else               n_step++;
    end
    if (!thr_step && !thr_set) n_fixed++;
    if (thr_set) n_load++;
  end
  always @(posedge clk) ref_state <= rst_n ? lfsr_next(ref_state) : 32'h1;

  task automatic load(input int t);
    thr_set = 1'b1; thr_init = M'(t);
    @(posedge clk); #1;
    thr_set = 1'b0;
    check(int'(threshold) == t, "threshold loaded");
  endtask

  initial begin : watchdog
    repeat (300000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int  thr_list [5];
    real p, e, tn, cc, fit;
    thr_list = '{27, 127, 227, 0, 255};
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    check(threshold == 0 && !thr_saturated, "reset threshold 0");

    // ---- 2. fixed thresholds -------------------------------------------
    foreach (thr_list[k]) begin
      automatic int L = 16384;
      automatic int ones [S] = '{default: 0};
      load(thr_list[k]);
      repeat (L) begin
        @(negedge clk);
        for (int s = 0; s < S; s++) ones[s] += int'(prng_out[s]);
      end
      check(int'(threshold) == thr_list[k], "fixed threshold held");
      for (int s = 0; s < S; s++) begin
        p = real'(ones[s]) / real'(L);
        e = p_one(thr_list[k]);
        $display("T=%3d seq %0d: P(1) = %.4f, Eq.2 = %.4f", thr_list[k], s, p, e);
        if (thr_list[k] == 255) check(ones[s] == 0, "no 1 at threshold 255");
        else                    check(p > e - 0.02 && p < e + 0.02, "P(1) matches Eq. 2");
      end
    end

    // ---- 3. correlation at T = 127 -------------------------------------
    begin
      automatic int L = 8192;
      bit seq [S][];
      real r, rmax_x, rmax_a;
      for (int s = 0; s < S; s++) seq[s] = new[L];
      load(127);
      for (int i = 0; i < L; i++) begin
        @(negedge clk);
        for (int s = 0; s < S; s++) seq[s][i] = prng_out[s];
      end
      rmax_x = 0.0; rmax_a = 0.0;
      for (int s = 0; s < S; s++)
        for (int u = s + 1; u < S; u++)
          for (int lag = -8; lag <= 8; lag++) begin
            r = xcorr(seq[s], seq[u], lag);
            if ((r < 0 ? -r : r) > rmax_x) rmax_x = (r < 0 ? -r : r);
          end
      for (int s = 0; s < S; s++)
        for (int lag = 1; lag <= 16; lag++) begin
          r = xcorr(seq[s], seq[s], lag);
          if ((r < 0 ? -r : r) > rmax_a) rmax_a = (r < 0 ? -r : r);
        end
      $display("max |cross-correlation| = %.4f, max |auto-correlation| = %.4f", rmax_x, rmax_a);
      check(rmax_x < 0.06, "cross-correlation near zero");
      check(rmax_a < 0.06, "auto-correlation near zero");
    end

    // ---- 4. count every clock ------------------------------------------
    begin
      automatic int cyc = 0;
      load(0);
      thr_step = 1'b1;
      while (!thr_saturated && cyc < 1000) begin @(posedge clk); #1; cyc++; end
      check(cyc == 255, "saturates after 255 clocks");
      $display("stepping every clock: saturated after %0d clocks", cyc);
      repeat (200) begin
        @(negedge clk);
        check(prng_out == '0 && threshold == 8'hFF, "outputs 0 at maximum");
      end
      thr_step = 1'b0;
    end

    // ---- 5. slow anneal: cumulative count of 1s ------------------------
    begin
      localparam int D = 64;
      localparam int T_SAT = 255 * D;
      automatic int T_TOT = int'(real'(T_SAT) / 0.8);
      automatic int cum [] = new[T_TOT];
      automatic int total = 0, sat_at = -1;
      load(0);
      for (int t = 0; t < T_TOT; t++) begin
        thr_step = (t % D == D - 1);
        @(negedge clk);
        for (int s = 0; s < S; s++) total += int'(prng_out[s]);
        cum[t] = total;
        if (thr_saturated && sat_at < 0) sat_at = t;
        @(posedge clk); #1;
      end
      thr_step = 1'b0;
      $display("slow anneal: saturated at %0d of %0d clocks", sat_at, T_TOT);
      check(sat_at == T_SAT, "saturation time = 255 steps");
      for (int k = 1; k <= 9; k++) begin
        tn  = real'(k) / 10.0;
        cc  = real'(cum[(k * T_TOT) / 10 - 1]) / real'(total);
        fit = (tn < 0.8) ? (-1.5396 * tn * tn + 2.4658 * tn + 0.0055) : 1.0;
        $display("t_N = %.1f: CC_N = %.4f, fit = %.4f", tn, cc, fit);
        check(cc > fit - 0.03 && cc < fit + 0.03, "cumulative count follows Eq. 3");
      end
      check(cum[T_TOT-1] == cum[T_SAT + 1], "no 1s after saturation");
    end

    // ---- reference model and mechanism coverage -------------------------
    check(model_errors == 0, "every output bit matches the reference model");
    $display("mechanisms: load=%0d fixed=%0d step=%0d hold_at_max=%0d distinct=%0d model_errors=%0d",
             n_load, n_fixed, n_step, n_hold_max, n_distinct, model_errors);
    check(n_load > 0,     "load happened");
    check(n_fixed > 0,    "fixed threshold happened");
    check(n_step > 0,     "counting happened");
    check(n_hold_max > 0, "hold at maximum happened");
    check(n_distinct > 0, "sequences differ");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
