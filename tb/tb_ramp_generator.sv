// tb_ramp_generator: self-checking test of the ramp-generator model.
// After a clear the ramp must equal t*step in the t-th run cycle, hold while not running,
// and stop at full scale instead of wrapping.
`timescale 1ns / 1ps
module tb_ramp_generator;
  import target_pkg::*;

  logic clk = 0, rst_n = 0, clear = 0, run = 0;
  volt_t step, ramp;
  int checks = 0, failures = 0;

  ramp_generator dut (.clk, .rst_n, .clear, .run, .step, .ramp);

  always #1 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    foreach (step_list[i]) begin
      step = step_list[i];
      clear = 1;
      @(negedge clk);
      clear = 0;
      check("cleared", int'(ramp), 0);
      run = 1;
      for (int t = 1; t <= 300; t++) begin
        @(negedge clk);
        check("ramp", int'(ramp), (t * step > 65535) ? 65535 : t * step);
        if (t == 100) begin
          run = 0;
          repeat (3) @(negedge clk);
          check("hold", int'(ramp), 100 * step);
          run = 1;
        end
      end
      run = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int step_list [3] = '{5, 17, 300};
endmodule
