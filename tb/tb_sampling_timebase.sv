// tb_sampling_timebase: self-checking test of the sampling strobe and ping-pong write
// sequencing. A reference model counts cycles. The cell index must step 0..63 and wrap.
// A write request must follow each 32nd sample, for the group just filled, with block
// numbers 0,1,2,...,511,0 (group 0 to even blocks, group 1 to odd blocks). The wrap flag
// must come with block 511, i.e. every 16,384 samples. Sampling pauses while `en` is low.
`timescale 1ns / 1ps
module tb_sampling_timebase;
  logic clk = 0, rst_n = 0, en = 0;
  logic [5:0] cell_idx;
  logic wr_en, wr_group, wrap;
  logic [8:0] wr_block;
  int checks = 0, failures = 0;

  sampling_timebase dut (.clk_sample(clk), .rst_n, .en, .cell_idx, .wr_en, .wr_group, .wr_block, .wrap);

  always #1 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  int n_samples = 0, n_writes = 0, n_wraps = 0, exp_write_pending = 0, last_wrap_sample = -1;

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    en = 1;
    // 16,384 samples fill storage once; run past it to see the wrap.
    for (int cyc = 0; cyc < 16384 + 200; cyc++) begin
      if (cyc == 5000) en = 0;     // pause sampling for a few cycles
      if (cyc == 5010) en = 1;
      // cell index seen before the next edge must be the sample count mod 64
      if (en) begin
        check("cell", int'(cell_idx), n_samples % 64);
        if (n_samples % 32 == 31) exp_write_pending = 1;
        n_samples++;
      end
      @(posedge clk);
      #0.1;
      // state after the edge: the write request for a group completed at the last edge
      if (exp_write_pending) begin
        check("wr_en", int'(wr_en), 1);
        check("wr_block", int'(wr_block), n_writes % 512);
        check("wr_group", int'(wr_group), n_writes % 2);
        check("wrap", int'(wrap), (n_writes % 512) == 511);
        if (wrap) begin
          n_wraps++;
          check("16384 samples per wrap", n_samples, 16384 * n_wraps);
        end
        n_writes++;
      end else begin
        check("wr_en idle", int'(wr_en), 0);
      end
      exp_write_pending = 0;
      @(negedge clk);
    end
    check("wrapped once", n_wraps, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
