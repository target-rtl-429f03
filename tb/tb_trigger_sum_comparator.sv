// tb_trigger_sum_comparator: self-checking test of the trigger sum-and-threshold model.
// Random amplitudes on four channels and random thresholds are checked against
// fire = en && (sum > thr). Corner cases cover a sum equal to the threshold and sums that
// exceed 16 bits.
`timescale 1ns / 1ps
module tb_trigger_sum_comparator;
  import target_pkg::*;

  volt_t [3:0] vin;
  volt_t thr;
  logic en, fire;
  int checks = 0, failures = 0, n_fire = 0;

  trigger_sum_comparator dut (.vin, .thr, .en, .fire);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic try(input volt_t a, b, c, d, t, input logic e);
    int s = int'(a) + int'(b) + int'(c) + int'(d);
    vin = {d, c, b, a};
    thr = t;
    en = e;
    #1;
    checks++;
    if (fire !== (e && s > int'(t))) begin
      failures++;
      if (failures < 10) $display("FAIL sum %0d thr %0d en %0d fire %0d", s, t, e, fire);
    end
    if (fire) n_fire++;
  endtask

  initial begin
    for (int i = 0; i < 2000; i++)
      try(volt_t'($urandom_range(600)), volt_t'($urandom_range(600)), volt_t'($urandom_range(600)),
          volt_t'($urandom_range(600)), volt_t'($urandom_range(1500)), 1'($urandom_range(7) != 0));
    try(100, 100, 100, 200, 500, 1);        // equal: no fire
    try(100, 100, 100, 201, 500, 1);        // just above
    try(65535, 65535, 65535, 65535, 65535, 1);  // wide sum
    try(16'd50, 0, 0, 0, 16'd45, 1);        // 5 mV above a 4.5 mV threshold
    checks++;
    if (n_fire == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
