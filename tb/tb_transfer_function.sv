// tb_transfer_function: transfer-function sweep of the whole chip at its real sizes.
// The inputs carry a staircase that covers 0 to 2.15 V in 0.7 mV steps across samples and
// channels (3,072 distinct levels). It repeats every 16,384 samples, so every storage lap
// holds the same values. The first six storage blocks hold it. Each block is
// digitised with a 0.5 mV ramp step and read out in full. The testbench checks:
//   - every code against ceil(v/step), clipped at 4095;
//   - that the codes never decrease as the voltage rises;
//   - that the highest unsaturated level is at least 1.9 V, the dynamic range the design
//     is meant to cover.
`timescale 1ns / 1ps
module tb_transfer_function;
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
  localparam int STEP = 5;
  localparam int LEVEL = 7;
  localparam int NLEVELS = 6 * BLOCK_CELLS * NUM_CH;   // 3072

  initial begin
    #400us;
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

  longint n = 0;
  function automatic int level(longint k, int ch);
    return int'((((k % STORAGE_CELLS) * NUM_CH + ch) % NLEVELS) * LEVEL);
  endfunction
  always @(posedge clk_sample) if (rst_n) n <= n + 1;
  always @(negedge clk_sample)
    for (int ch = 0; ch < NUM_CH; ch++) vin[ch] = volt_t'(level(n, ch));

  int code_at [NLEVELS];

  initial begin
    int top_unsat = 0;
    vin = '0;
    repeat (3) @(negedge sclk);
    rst_n = 1;
    // wait until blocks 0..5 are written (samples 0..191), well before they are overwritten
    wait (n > 6 * BLOCK_CELLS + 64);
    for (int b = 0; b < 6; b++) begin
      @(negedge clk_wilk);
      dig_start = 1;
      rd_block = BLOCK_W'(b);
      @(negedge clk_wilk);
      dig_start = 0;
      while (!ready) @(negedge clk_wilk);
      for (int s = 0; s < BLOCK_CELLS; s++) begin
        logic [NUM_CH-1:0][ADC_BITS-1:0] word;
        @(negedge clk_wilk);
        shift_start = 1;
        sample_sel = CELL_W'(s);
        @(negedge clk_wilk);
        shift_start = 0;
        for (int i = ADC_BITS - 1; i >= 0; i--) begin
          for (int ch = 0; ch < NUM_CH; ch++) word[ch][i] = sdata[ch];
          @(negedge clk_wilk);
        end
        for (int ch = 0; ch < NUM_CH; ch++) begin
          automatic int v = level(b * BLOCK_CELLS + s, ch);
          automatic int e = (v + STEP - 1) / STEP;
          if (e > 4095) e = 4095;
          code_at[v / LEVEL] = int'(word[ch]);
          check($sformatf("code at %0d (x0.1 mV)", v), int'(word[ch]), e);
        end
      end
    end
    for (int i = 1; i < NLEVELS; i++) begin
      checks++;
      if (code_at[i] < code_at[i-1]) begin
        failures++;
        $display("FAIL not monotonic at level %0d", i);
      end
      if (code_at[i] < 4095) top_unsat = i * LEVEL;
    end
    $display("highest unsaturated input %0d x0.1 mV, codes 0..%0d", top_unsat, code_at[NLEVELS-1]);
    checks++;
    if (top_unsat < 19000) begin
      failures++;
      $display("FAIL dynamic range below 1.9 V");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
