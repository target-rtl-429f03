// tb_target_asic: end-to-end test of the whole readout ASIC at its real sizes, with a
// 1 GSa/s sample clock (1 ns), a 208 MHz digitisation clock (4.8 ns) and a 50 MHz
// configuration clock. The testbench plays the off-chip controller.
//  1. Configures the chip serially: thresholds, trigger widths, ramp slope, control bits.
//  2. Feeds every channel a known waveform v(n, ch) of the sample number n. Odd-numbered
//     32-sample stretches stay below 1.5 V, even ones reach 2.2 V, past the 12-bit range.
//  3. Lets storage fill and wrap. It checks that the write pointer wraps exactly every
//     16,384 samples, the storage depth.
//  4. Digitises recently written blocks and reads all 32 samples of each serially. Every
//     12-bit code is checked against min(max(ceil(v/step) - D, 0), 4095), and the
//     conversion time against the Done rule. The blocks cover a conversion ended early by
//     Done, a full 4096-count conversion with saturated codes, a conversion with Done
//     disabled, and one with a counter start delay.
//  5. Switches the inputs to a low baseline with short pulses on one trigger group at a
//     time. Pulses above threshold must give one trigger pulse of the configured width on
//     that group only. Pulses below threshold must give none.
//  6. Reads the clock monitor and checks the ratio of the two clocks.
//  7. Pauses sampling through the configuration and checks that writing stops and resumes.
// Each mechanism is counted, and one that never happened counts as a failure.
`timescale 1ns / 1ps
module tb_target_asic;
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
    #400us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // ---------------- stimulus ----------------
  longint n = 0;            // samples taken so far
  bit     sampling = 1;     // mirrors the sample-enable bit
  bit     trig_mode = 0;    // 0: data waveform, 1: trigger pulses
  int     pulse_group = -1, pulse_amp = 0, pulse_left = 0;

  function automatic volt_t data_v(longint k, int ch);
    longint m = ((k >> 5) & 1) ? 15000 : 22000;
    return volt_t'((k * 73 + ch * 1999 + (k >> 5) * 7) % m);
  endfunction

  always @(posedge clk_sample) if (rst_n && sampling) n <= n + 1;

  always @(negedge clk_sample) begin
    for (int ch = 0; ch < NUM_CH; ch++) begin
      if (!trig_mode) vin[ch] = data_v(n, ch);
      else begin
        vin[ch] = volt_t'((n + ch) % 50);
        if (pulse_left > 0 && ch / TRIG_GROUP_CH == pulse_group) vin[ch] += volt_t'(pulse_amp);
      end
    end
    if (pulse_left > 0) pulse_left--;
  end

  // ---------------- configuration ----------------
  int n_cfg = 0;
  task automatic write_reg(input logic [7:0] a, input logic [15:0] d);
    logic [23:0] frame = {a, d};
    @(negedge sclk) sen = 1;
    for (int i = 23; i >= 0; i--) begin
      sin = frame[i];
      @(negedge sclk);
    end
    sen = 0;
    repeat (2) @(negedge sclk);
    n_cfg++;
  endtask

  // ---------------- write pointer and wrap ----------------
  int n_even = 0, n_odd = 0, n_wrap = 0;
  longint last_wrap_n = -1;
  logic [BLOCK_W-1:0] wr_block_d = 0;
  always @(posedge clk_sample) begin
    if (rst_n) begin
      if (wr_block != wr_block_d) begin
        if (wr_block[0]) n_odd++; else n_even++;
      end
      wr_block_d <= wr_block;
      if (wr_wrap) begin
        // block 511 holds samples 16352..16383 of each lap; its write follows sample 16383
        if (last_wrap_n >= 0) check("samples between wraps", n - last_wrap_n, STORAGE_CELLS);
        last_wrap_n = n;
        n_wrap++;
      end
    end
  end

  // ---------------- triggers ----------------
  int trig_len [NUM_TRIG];
  int trig_pulses [NUM_TRIG];
  int trig_width_seen [NUM_TRIG];
  always @(posedge clk_sample) begin
    for (int g = 0; g < NUM_TRIG; g++) begin
      if (trig_out[g]) trig_len[g]++;
      else if (trig_len[g] > 0) begin
        trig_pulses[g]++;
        trig_width_seen[g] = trig_len[g];
        trig_len[g] = 0;
      end
    end
  end

  // ---------------- readout ----------------
  int step = 5, delay = 0;
  bit done_en = 1;
  int n_done_stop = 0, n_full = 0, n_saturated = 0, n_delayed = 0, n_words = 0;

  function automatic int code_of(int v);
    int e = (v + step - 1) / step - delay;
    if (e < 0) e = 0;
    if (e > 4095) e = 4095;
    return e;
  endfunction

  // Digitise the block written `back` blocks ago and check all its samples.
  task automatic digitise_recent(int back, bit want_even);
    longint k, base;
    int b, cycles = 0, tmax = 0, exp_cycles;
    @(negedge clk_wilk);
    k = (n >> 5) - back;
    if (((k & 1) == 0) != want_even) k--;
    b = int'(k % NUM_BLOCKS);
    base = k * BLOCK_CELLS;
    dig_start = 1;
    rd_block = BLOCK_W'(b);
    @(negedge clk_wilk);
    dig_start = 0;
    cycles = 1;
    while (!ready && cycles < 10000) begin
      @(negedge clk_wilk);
      cycles++;
    end
    for (int s = 0; s < BLOCK_CELLS; s++)
      for (int ch = 0; ch < NUM_CH; ch++)
        if ((int'(data_v(base + s, ch)) + step - 1) / step > tmax)
          tmax = (int'(data_v(base + s, ch)) + step - 1) / step;
    if (tmax < delay) tmax = delay;
    if (done_en && tmax + 1 <= delay + 4095) begin
      exp_cycles = tmax + 5;
      n_done_stop++;
    end else begin
      exp_cycles = delay + 4096 + 3;
      n_full++;
    end
    if (delay > 0) n_delayed++;
    check($sformatf("conversion cycles, block %0d", b), cycles, exp_cycles);
    for (int s = 0; s < BLOCK_CELLS; s++) begin
      logic [NUM_CH-1:0][ADC_BITS-1:0] word;
      @(negedge clk_wilk);
      shift_start = 1;
      sample_sel = CELL_W'(s);
      @(negedge clk_wilk);
      shift_start = 0;
      for (int i = ADC_BITS - 1; i >= 0; i--) begin
        check("sdata_valid", sdata_valid, 1);
        for (int ch = 0; ch < NUM_CH; ch++) word[ch][i] = sdata[ch];
        @(negedge clk_wilk);
      end
      n_words++;
      for (int ch = 0; ch < NUM_CH; ch++) begin
        int e = code_of(int'(data_v(base + s, ch)));
        if (e == 4095) n_saturated++;
        check($sformatf("code block %0d sample %0d ch %0d", b, s, ch), word[ch], e);
      end
    end
  endtask

  // Pulse one trigger group and check the trigger outputs.
  int n_fired = 0, n_quiet = 0;
  task automatic pulse(int g, int amp, bit expect_fire);
    int prev_cnt [NUM_TRIG];
    for (int i = 0; i < NUM_TRIG; i++) prev_cnt[i] = trig_pulses[i];
    @(negedge clk_sample);
    pulse_group = g;
    pulse_amp = amp;
    pulse_left = 10;
    repeat (60) @(negedge clk_sample);
    for (int i = 0; i < NUM_TRIG; i++)
      check($sformatf("trigger pulses group %0d (pulse on %0d)", i, g), trig_pulses[i] - prev_cnt[i],
            (i == g && expect_fire) ? 1 : 0);
    if (expect_fire) begin
      check($sformatf("trigger width group %0d", g), trig_width_seen[g], 8 + g);
      n_fired++;
    end else n_quiet++;
  endtask

  int n_mon = 0, n_pause = 0;

  initial begin
    vin = '0;
    repeat (3) @(negedge sclk);
    rst_n = 1;
    // 1. configuration
    for (int g = 0; g < NUM_TRIG; g++) begin
      write_reg(8'(CFG_TRIG_THR0 + g), 16'd500);       // 50 mV on the sum
      write_reg(8'(CFG_TRIG_WID0 + g), 16'(8 + g));
    end
    write_reg(CFG_RAMP_STEP, 16'(step));
    write_reg(CFG_CNT_DELAY, 16'd0);
    write_reg(CFG_MON_WINDOW, 16'd64);
    // 3. let storage fill and wrap
    wait (n > STORAGE_CELLS + 1024);
    // 4. digitisation and readout
    digitise_recent(4, 0);     // odd block: below full scale, ends on Done
    digitise_recent(6, 1);     // even block: saturating codes, full length
    done_en = 0;
    write_reg(CFG_CTRL, 16'b101);
    digitise_recent(4, 0);     // Done disabled: full length
    done_en = 1;
    write_reg(CFG_CTRL, 16'b111);
    delay = 10;
    write_reg(CFG_CNT_DELAY, 16'(delay));
    digitise_recent(4, 0);     // counter started 10 cycles after the ramp
    delay = 0;
    write_reg(CFG_CNT_DELAY, 16'd0);
    wait (n_wrap >= 2);
    // 5. triggers
    trig_mode = 1;
    repeat (100) @(negedge clk_sample);
    for (int g = 0; g < NUM_TRIG; g++) begin
      pulse(g, 200, 1);        // 4 x 20 mV + baseline > 50 mV
      pulse(g, 50, 0);         // 4 x 5 mV + baseline < 50 mV
    end
    // 6. clock monitor: 64 sample-clock cycles = 64 ns = 13.3 cycles of 4.8 ns
    repeat (3) begin
      @(posedge mon_valid);
      @(negedge clk_wilk);
      checks++;
      if (mon_count < 12 || mon_count > 14) begin
        failures++;
        $display("FAIL monitor count %0d", mon_count);
      end
      n_mon++;
    end
    // 7. pause sampling
    begin
      logic [BLOCK_W-1:0] w0;
      write_reg(CFG_CTRL, 16'b110);
      sampling = 0;
      repeat (5) @(negedge clk_sample);
      w0 = wr_block;
      repeat (200) @(negedge clk_sample);
      check("no writes while paused", wr_block, w0);
      sampling = 1;
      write_reg(CFG_CTRL, 16'b111);
      repeat (200) @(negedge clk_sample);
      checks++;
      if (wr_block == w0) failures++;
      else n_pause++;
    end
    // mechanism coverage
    $display("config writes %0d, even/odd block writes %0d/%0d, wraps %0d", n_cfg, n_even, n_odd, n_wrap);
    $display("conversions: Done-stop %0d, full-length %0d, delayed-counter %0d; words %0d, saturated codes %0d",
             n_done_stop, n_full, n_delayed, n_words, n_saturated);
    $display("trigger pulses fired %0d, sub-threshold pulses %0d, monitor reports %0d, pauses %0d",
             n_fired, n_quiet, n_mon, n_pause);
    check("config writes happened", n_cfg > 0, 1);
    check("ping-pong group 0 writes", n_even > 0, 1);
    check("ping-pong group 1 writes", n_odd > 0, 1);
    check("storage wrapped", n_wrap >= 2, 1);
    check("Done-stop conversion", n_done_stop > 0, 1);
    check("full-length conversion", n_full > 0, 1);
    check("saturated codes", n_saturated > 0, 1);
    check("delayed counter start", n_delayed > 0, 1);
    check("triggers fired", n_fired, NUM_TRIG);
    check("sub-threshold pulses", n_quiet, NUM_TRIG);
    check("monitor reports", n_mon, 3);
    check("sampling pause", n_pause, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
