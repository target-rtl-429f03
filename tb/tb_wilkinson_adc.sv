// tb_wilkinson_adc: self-checking test of the 32 x 16 Wilkinson ADC.
// The testbench drives the ramp itself (t*step after the load) and enables the counters
// from cycle D. For each of several rounds of random voltages, including some above the
// range of 4096 counts, it checks every code against min(max(ceil(v/step) - D, 0), 4095).
// It checks that Done rises exactly one cycle after the ramp passes the largest voltage,
// or stays low when a cell saturates.
`timescale 1ns / 1ps
module tb_wilkinson_adc;
  import target_pkg::*;

  logic clk = 0, rst_n = 0, load = 0, cnt_en = 0, done;
  volt_t ramp;
  block_volts_t vin_block;
  block_codes_t codes;
  int checks = 0, failures = 0;

  wilkinson_adc dut (.clk, .rst_n, .load, .vin_block, .cnt_en, .ramp, .codes, .done);

  always #1 clk = ~clk;

  initial begin
    #2000000;
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

  int n_saturated = 0, n_done = 0;

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 6; round++) begin
      automatic int step = (round % 3 == 0) ? 5 : (round % 3 == 1) ? 3 : 9;
      automatic int d = (round < 3) ? 0 : 7;
      automatic int tmax = 0, t_done = -1;
      automatic bit sat = (round == 2 || round == 5);
      automatic int lim = sat ? 65535 : 4000 * step;
      for (int ch = 0; ch < NUM_CH; ch++)
        for (int c = 0; c < BLOCK_CELLS; c++) begin
          vin_block[ch][c] = volt_t'($urandom_range(lim));
          if ((int'(vin_block[ch][c]) + step - 1) / step > tmax) tmax = (int'(vin_block[ch][c]) + step - 1) / step;
        end
      if (round == 0) vin_block[0][0] = 0;  // zero input gives code 0
      load = 1;
      ramp = 0;
      @(negedge clk);
      load = 0;
      for (int t = 0; t < d + 4096 + 4; t++) begin
        ramp = volt_t'((t * step > 65535) ? 65535 : t * step);
        cnt_en = (t >= d);
        @(negedge clk);
        if (done && t_done < 0) t_done = t + 1;
      end
      cnt_en = 0;
      for (int ch = 0; ch < NUM_CH; ch++)
        for (int c = 0; c < BLOCK_CELLS; c++) begin
          automatic int tt = (int'(vin_block[ch][c]) + step - 1) / step;
          automatic int e = tt - d;
          if (e < 0) e = 0;
          if (e > 4095) e = 4095;
          if (e == 4095) n_saturated++;
          check($sformatf("code r%0d ch%0d c%0d", round, ch, c), int'(codes[ch][c]), e);
        end
      if (tmax < d + 4096 + 4) begin
        // Done appears in the cycle after the ramp reached the largest voltage (and counting ran).
        check("done cycle", t_done, (tmax < d ? d : tmax) + 1);
        n_done++;
      end else begin
        check("no done while saturating", t_done, -1);
      end
    end
    check("saturation seen", int'(n_saturated > 0), 1);
    check("done seen", int'(n_done > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
