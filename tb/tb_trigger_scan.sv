// tb_trigger_scan: trigger-efficiency scan of the whole chip, one curve per threshold.
// For thresholds of 4.5 mV, 20 mV and 50 mV on the four-channel sum, square pulses of
// rising amplitude are sent to all four channels of one group, 8 pulses per amplitude. The
// efficiency (triggers per pulse) must be 0 while four times the amplitude is at or below
// the threshold, and 1 above it. The model has no analog noise, so the curve is a sharp
// step at the threshold. Every group is scanned.
`timescale 1ns / 1ps
module tb_trigger_scan;
  import target_pkg::*;

  logic clk_sample = 0, clk_wilk = 0, sclk = 0, rst_n = 0;
  volt_t [NUM_CH-1:0] vin;
  logic sen = 0, sin = 0, dig_start = 0, shift_start = 0;
  logic [BLOCK_W-1:0] rd_block = 0;
  logic [CELL_W-1:0] sample_sel = 0;
  logic busy, ready, done_bit, sdata_valid, wr_wrap, rd_collide, mon_valid;
  logic [NUM_CH-1:0] sdata;
  logic [BLOCK_W-1:0] wr_block;
  logic [NUM_TRIG-1:0] trig_out;
  logic [19:0] mon_count;

  target_asic dut (.*);

  always #0.5 clk_sample = ~clk_sample;
  always #2.4 clk_wilk = ~clk_wilk;
  always #10 sclk = ~sclk;

  int checks = 0, failures = 0;

  initial begin
    #2000us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_reg(input logic [7:0] a, input logic [15:0] d);
    logic [23:0] frame = {a, d};
    @(negedge sclk) sen = 1;
    for (int i = 23; i >= 0; i--) begin
      sin = frame[i];
      @(negedge sclk);
    end
    sen = 0;
    repeat (2) @(negedge sclk);
  endtask

  int trig_rises [NUM_TRIG];
  logic [NUM_TRIG-1:0] trig_d = 0;
  always @(posedge clk_sample) begin
    for (int g = 0; g < NUM_TRIG; g++) if (trig_out[g] && !trig_d[g]) trig_rises[g]++;
    trig_d <= trig_out;
  end

  int thr_list [3] = '{45, 200, 500};

  initial begin
    vin = '0;
    repeat (3) @(negedge sclk);
    rst_n = 1;
    foreach (thr_list[t]) begin
      automatic int thr = thr_list[t];
      for (int g = 0; g < NUM_TRIG; g++) write_reg(8'(CFG_TRIG_THR0 + g), 16'(thr));
      for (int g = 0; g < NUM_TRIG; g++) begin
        automatic int first_full = -1;
        for (int a = thr / 4 - 3; a <= thr / 4 + 3; a++) begin
          automatic int r0 = trig_rises[g];
          automatic int fired;
          for (int p = 0; p < 8; p++) begin
            @(negedge clk_sample);
            for (int c = 0; c < TRIG_GROUP_CH; c++) vin[g * TRIG_GROUP_CH + c] = volt_t'(a);
            repeat (5) @(negedge clk_sample);
            vin = '0;
            repeat (30) @(negedge clk_sample);
          end
          fired = trig_rises[g] - r0;
          checks++;
          if (fired != ((4 * a > thr) ? 8 : 0)) begin
            failures++;
            $display("FAIL thr %0d group %0d amplitude %0d: %0d of 8 pulses triggered", thr, g, a, fired);
          end
          if (fired == 8 && first_full < 0) first_full = a;
        end
        if (g == 0) $display("threshold %0d x0.1 mV: efficiency reaches 1 at %0d x0.1 mV per channel", thr, first_full);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
