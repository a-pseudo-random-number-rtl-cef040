// tb_digital_comparator: exhaustive check of the A > B comparator at M = 8.
//
// For every pair (a, b) the expected result is taken from the borrow of the
// 9-bit subtraction b - a, not from a relational operator. The testbench also
// counts, for each threshold b, how many of the 256 values of a give 1 and
// compares that count with (2^M - 1) - b, the numerator of P(1).
module tb_digital_comparator;
  localparam int M = 8;
  logic [M-1:0] a, b;
  logic         gt;
  int           checks = 0, failures = 0;

  digital_comparator #(.M(M)) dut (.a, .b, .gt);

  initial begin : watchdog
    #10ms;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int bi = 0; bi < 2 ** M; bi++) begin
      automatic int ones = 0;
      for (int ai = 0; ai < 2 ** M; ai++) begin
        logic [M:0] diff;
        a = M'(ai);
        b = M'(bi);
        #1;
        diff = {1'b0, b} - {1'b0, a};   // borrow set iff a > b
        checks++;
        if (gt !== diff[M]) begin
          failures++;
          if (failures < 10) $display("FAIL a=%0d b=%0d gt=%0b", ai, bi, gt);
        end
        ones += int'(gt);
      end
      checks++;
      if (ones != (2 ** M - 1) - bi) begin
        failures++;
        $display("FAIL b=%0d ones=%0d", bi, ones);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
