// tb_lfsr: self-checking testbench for lfsr.
//
// Three instances run side by side from one clock:
//   - the three-bit example x^3 + x^2 + 1, checked against a flip-flop level
//     model (DFF1 <= DFF2 ^ DFF3, DFF2 <= DFF1, DFF3 <= DFF2) and for its
//     period of 7;
//   - a 16-bit register with the primitive x^16 + x^15 + x^13 + x^4 + 1,
//     whose period must be exactly 2^16 - 1 with no repeated state before;
//   - the default 32-bit register, checked step by step against a model that
//     computes the feedback from the polynomial's exponents.
module tb_lfsr;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  int   checks = 0, failures = 0;

  always #5 clk = ~clk;

  logic [2:0]  s3;
  logic [15:0] s16;
  logic [31:0] s32;

  lfsr #(.N(3),  .POLY(3'b110),        .SEED(3'b001))        u3  (.clk, .rst_n, .state(s3));
  lfsr #(.N(16), .POLY(16'hD008),      .SEED(16'h0001))      u16 (.clk, .rst_n, .state(s16));
  lfsr                                                       u32 (.clk, .rst_n, .state(s32));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // Reference models
  logic [2:0]  m3;      // m3[0] = DFF1
  logic [31:0] m32;
  int unsigned period16;
  bit          seen16 [65536];

  function automatic logic fb32(logic [31:0] s);
    // x^32 + x^22 + x^2 + x + 1: flip-flops 32, 22, 2 and 1 feed the XOR
    return s[31] ^ s[21] ^ s[1] ^ s[0];
  endfunction

  initial begin : watchdog
    repeat (70000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    check(s3 == 3'b001 && s16 == 16'h0001 && s32 == 32'h1, "reset loads seed");
    m3  = 3'b001;
    m32 = 32'h1;
    // 3-bit example, 14 steps (two periods)
    for (int t = 1; t <= 14; t++) begin
      @(posedge clk); #1;
      m3  = {m3[1], m3[0], m3[1] ^ m3[2]};
      m32 = {m32[30:0], fb32(m32)};
      check(s3 == m3, "3-bit model");
      check(s32 == m32, "32-bit model");
      check((s3 == 3'b001) == (t % 7 == 0), "3-bit period 7");
    end
    // 16-bit period: walk one full period from wherever it is now
    begin
      automatic logic [15:0] start = s16;
      automatic int unsigned repeats = 0;
      m32 = s32;
      period16 = 0;
      foreach (seen16[i]) seen16[i] = 1'b0;
      seen16[start] = 1'b1;
      do begin
        @(posedge clk); #1;
        period16++;
        if (s16 != start && seen16[s16]) repeats++;
        seen16[s16] = 1'b1;
        m32 = {m32[30:0], fb32(m32)};
        if (period16 % 64 == 0) check(s32 == m32, "32-bit model, long run");
      end while (s16 != start && period16 < 70000);
      check(period16 == 65535, "16-bit maximal period");
      check(repeats == 0, "16-bit no early repeat");
      check(!seen16[0], "16-bit never zero");
      $display("16-bit period = %0d", period16);
    end
    // synchronous reset reloads the seed
    rst_n = 1'b0;
    @(posedge clk); #1;
    check(s3 == 3'b001 && s16 == 16'h1 && s32 == 32'h1, "reset reloads seed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
