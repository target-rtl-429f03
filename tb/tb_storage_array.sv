// tb_storage_array: self-checking test of the storage-array model at full size
// (512 blocks x 32 cells x 16 channels). Every block is written with its own pattern on the
// write clock. All blocks are then read back in random order on the read clock, one cycle
// after the read enable, and compared. A second round overwrites a few blocks and checks
// that only those changed.
`timescale 1ns / 1ps
module tb_storage_array;
  import target_pkg::*;

  logic clk_w = 0, clk_r = 0, re = 0;
  logic [7:0] wr_row_sel = 0, rd_row_sel = 0;
  logic [63:0] wr_col_sel = 0, rd_col_sel = 0;
  block_volts_t wdata, rdata;
  int checks = 0, failures = 0;

  storage_array dut (.clk_w, .wr_row_sel, .wr_col_sel, .wdata, .clk_r, .re, .rd_row_sel,
                     .rd_col_sel, .rdata);

  always #1 clk_w = ~clk_w;
  always #2.4 clk_r = ~clk_r;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Expected content: a hash of block, channel, cell and round.
  function automatic volt_t pat(int b, int ch, int c, int round);
    return volt_t'((b * 7919 + ch * 104729 + c * 31 + round * 12345) ^ (b << 5));
  endfunction

  int round_of [512];

  task automatic write_block(int b, int round);
    @(negedge clk_w);
    for (int ch = 0; ch < NUM_CH; ch++)
      for (int c = 0; c < 32; c++) wdata[ch][c] = pat(b, ch, c, round);
    wr_row_sel = 8'(1) << (b % 8);
    wr_col_sel = 64'(1) << (b / 8);
    @(negedge clk_w);
    wr_row_sel = 0;
    wr_col_sel = 0;
    round_of[b] = round;
  endtask

  task automatic read_check(int b);
    @(negedge clk_r);
    re = 1;
    rd_row_sel = 8'(1) << (b % 8);
    rd_col_sel = 64'(1) << (b / 8);
    @(negedge clk_r);
    re = 0;
    rd_row_sel = 0;
    rd_col_sel = 0;
    for (int ch = 0; ch < NUM_CH; ch++)
      for (int c = 0; c < 32; c++) begin
        checks++;
        if (rdata[ch][c] != pat(b, ch, c, round_of[b])) begin
          failures++;
          if (failures < 10) $display("FAIL block %0d ch %0d cell %0d", b, ch, c);
        end
      end
  endtask

  initial begin
    for (int b = 0; b < 512; b++) write_block(b, 0);
    for (int i = 0; i < 512; i++) read_check((i * 173) % 512);
    for (int i = 0; i < 8; i++) write_block(i * 61, 1);
    for (int b = 0; b < 512; b++) read_check(b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
