// tb_wilkinson_clock_monitor: self-checking test of the clock-rate monitor.
// With a 10 ns reference clock and several digitisation-clock periods, each reported count
// must equal window * T_ref / T_wilk to within one cycle. Windows of 64 and 100 reference
// cycles are tried. Reports must arrive once per two windows.
`timescale 1ns / 1ps
module tb_wilkinson_clock_monitor;
  logic clk_ref = 0, clk_wilk = 0, rst_n = 0;
  logic [15:0] window = 64;
  logic [19:0] count;
  logic valid;
  realtime half_wilk = 2.4;   // 208 MHz
  int checks = 0, failures = 0;

  wilkinson_clock_monitor dut (.clk_ref, .clk_wilk, .rst_n, .window, .count, .valid);

  always #5 clk_ref = ~clk_ref;
  always #(half_wilk) clk_wilk = ~clk_wilk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic measure(input realtime hw, input int win);
    real expected;
    int n = 0;
    half_wilk = hw;
    window = 16'(win);
    // let the monitor settle on the new settings
    repeat (2) @(posedge valid);
    expected = win * 10.0 / (2.0 * hw);
    while (n < 4) begin
      @(posedge clk_wilk);
      if (valid) begin
        checks++;
        if (real'(count) < expected - 1.01 || real'(count) > expected + 1.01) begin
          failures++;
          $display("FAIL period %0.2f window %0d: count %0d expected %0.1f", 2*hw, win, count, expected);
        end
        n++;
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk_ref);
    rst_n = 1;
    measure(2.4, 64);
    measure(1.0, 64);
    measure(1.43, 100);
    measure(3.7, 100);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
