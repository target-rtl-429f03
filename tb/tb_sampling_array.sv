// tb_sampling_array: self-checking test of the sampling-array model.
// Writes random voltages into all 64 cells of all 16 channels through the cell index.
// Compares both 32-cell groups with a scoreboard, then checks that nothing is written
// while sampling is disabled.
`timescale 1ns / 1ps
module tb_sampling_array;
  import target_pkg::*;

  logic clk = 0, en = 0, rd_group = 0;
  logic [5:0] cell_idx = 0;
  volt_t [NUM_CH-1:0] vin;
  block_volts_t grp_data;
  volt_t sb [NUM_CH][64];
  int checks = 0, failures = 0;

  sampling_array dut (.clk_sample(clk), .en, .cell_idx, .vin, .rd_group, .grp_data);

  always #1 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_groups();
    for (int g = 0; g < 2; g++) begin
      rd_group = g[0];
      #0.1;
      for (int ch = 0; ch < NUM_CH; ch++)
        for (int c = 0; c < 32; c++) begin
          checks++;
          if (grp_data[ch][c] != sb[ch][g*32 + c]) begin
            failures++;
            if (failures < 10) $display("FAIL ch%0d group%0d cell%0d: %0d vs %0d", ch, g, c, grp_data[ch][c], sb[ch][g*32+c]);
          end
        end
    end
  endtask

  initial begin
    for (int pass = 0; pass < 3; pass++) begin
      en = (pass != 2);
      for (int c = 0; c < 64; c++) begin
        @(negedge clk);
        cell_idx = 6'(c);
        for (int ch = 0; ch < NUM_CH; ch++) begin
          vin[ch] = volt_t'($urandom);
          if (en) sb[ch][c] = vin[ch];
        end
      end
      @(negedge clk);
      en = 0;
      check_groups();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
