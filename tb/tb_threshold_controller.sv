// tb_threshold_controller: self-checking testbench for the threshold counter.
//
// Checks reset to 0, loading an initial value, counting one per step, holding
// when step is low (fixed threshold), the stop at the all-ones maximum after
// exactly 255 - init steps, that set overrides counting and reloads after
// saturation, and a randomised run against a reference model.
module tb_threshold_controller;
  localparam int M = 8;
  logic         clk = 1'b0, rst_n = 1'b0, set = 1'b0, step = 1'b0;
  logic [M-1:0] init_value = '0;
  logic [M-1:0] threshold;
  logic         saturated;
  int           checks = 0, failures = 0;
  int           model;

  always #5 clk = ~clk;

  threshold_controller #(.M(M)) dut (.clk, .rst_n, .set, .init_value, .step,
                                     .threshold, .saturated);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s: thr=%0d sat=%0b model=%0d at %0t",
                                  what, threshold, saturated, model, $time);
    end
  endtask

  task automatic tick(input logic s, input logic st, input logic [M-1:0] iv);
    set = s; step = st; init_value = iv;
    @(posedge clk); #1;
    if (!rst_n)    model = 0;
    else if (s)    model = int'(iv);
    else if (st && model < 2 ** M - 1) model++;
    set = 1'b0; step = 1'b0;
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    model = 0;
    @(posedge clk); #1;
    check(threshold == 0 && !saturated, "reset clears");
    rst_n = 1'b1;
    // load 0 and count to the maximum: must take exactly 255 steps
    tick(1'b1, 1'b0, 8'd0);
    check(threshold == 0, "set 0");
    begin
      automatic int steps = 0;
      while (!saturated && steps < 1000) begin
        tick(1'b0, 1'b1, '0);
        steps++;
        check(threshold == M'(steps), "counts one per step");
      end
      check(steps == 255, "255 steps from 0 to max");
      $display("steps to saturation = %0d", steps);
    end
    // holds at the maximum
    repeat (10) begin
      tick(1'b0, 1'b1, '0);
      check(threshold == 8'hFF && saturated, "holds at max");
    end
    // fixed threshold: load 127, no stepping
    tick(1'b1, 1'b0, 8'd127);
    repeat (20) begin
      tick(1'b0, 1'b0, '0);
      check(threshold == 127 && !saturated, "fixed threshold holds");
    end
    // set has priority over step
    tick(1'b1, 1'b1, 8'd200);
    check(threshold == 200, "set beats step");
    // from 200: 55 steps to saturate
    begin
      automatic int steps = 0;
      while (!saturated && steps < 1000) begin tick(1'b0, 1'b1, '0); steps++; end
      check(steps == 55, "55 steps from 200");
    end
    // random run against the model
    for (int i = 0; i < 5000; i++) begin
      automatic logic s = ($urandom_range(0, 49) == 0);
      automatic logic st = $urandom_range(0, 1) == 1;
      tick(s, st, M'($urandom));
      check(int'(threshold) == model && saturated == (model == 2 ** M - 1), "random vs model");
    end
    // reset in mid-count
    rst_n = 1'b0;
    tick(1'b0, 1'b1, '0);
    check(threshold == 0, "sync reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
