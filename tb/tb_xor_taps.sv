// tb_xor_taps: self-checking testbench for the XOR tap network.
//
// Four instances (sequences 0..3) at N = 32, M = 8, K = 5. The expected tap
// sets come from the reference model, which recomputes them from their
// defining hash. The testbench checks that every set has exactly five taps,
// that no two of the 32 sets have the same spacing (one is not a shifted copy
// of another), that each output bit equals the XOR of its taps for random
// LFSR states, and that over 65536 consecutive states of a real 32-bit LFSR
// every value 0..255 of each number occurs roughly equally often.
module tb_xor_taps;
  import prng_ref_pkg::*;

  localparam int N = 32, M = 8, K = 5, S = 4;
  logic [N-1:0] state;
  logic [M-1:0] rnd [S];
  int           checks = 0, failures = 0;

  for (genvar s = 0; s < S; s++) begin : g_dut
    xor_taps #(.N(N), .M(M), .K(K), .SEQ(s)) dut (.state, .rnd(rnd[s]));
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s state=%h", what, state);
    end
  endtask

  // lowest tap moved to bit 0
  function automatic logic [31:0] norm(logic [31:0] m);
    while (m[0] == 1'b0) m = m >> 1;
    return m;
  endfunction

  initial begin : watchdog
    #100ms;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < S*M; i++) begin
      check($countones(gate_mask(i)) == K, "five taps");
      for (int j = i + 1; j < S*M; j++)
        check(norm(gate_mask(i)) != norm(gate_mask(j)), "tap spacings distinct");
    end
    for (int t = 0; t < 2000; t++) begin
      state = N'({$urandom, $urandom} >> (64 - N));
      if (t == 0) state = '0;
      if (t == 1) state = '1;
      #1;
      for (int s = 0; s < S; s++)
        for (int b = 0; b < M; b++)
          check(rnd[s][b] == ^(state & gate_mask(s*M + b)), "bit = XOR of taps");
    end
    // uniformity over a run of the 32-bit LFSR
    begin
      int hist [S][256];
      automatic int lo = 1 << 30, hi = 0;
      for (int s = 0; s < S; s++) foreach (hist[s][v]) hist[s][v] = 0;
      state = 32'h1;
      for (int t = 0; t < 65536; t++) begin
        state = lfsr_next(state);
        #1;
        for (int s = 0; s < S; s++) hist[s][rnd[s]]++;
      end
      for (int s = 0; s < S; s++)
        foreach (hist[s][v]) begin
          if (hist[s][v] < lo) lo = hist[s][v];
          if (hist[s][v] > hi) hi = hist[s][v];
        end
      // mean 256 per bin; 5 sigma is about 80
      check(lo > 176 && hi < 336, "histogram roughly flat");
      $display("histogram min=%0d max=%0d (mean 256)", lo, hi);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
