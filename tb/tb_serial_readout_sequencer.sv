// tb_serial_readout_sequencer: self-checking test of the digitisation and readout sequencer.
// The sequencer drives the real ramp generator and Wilkinson ADC. A small storage model in
// the testbench returns a block one cycle after the read enable. For several blocks,
// counter delays and Done settings the testbench
//   - checks that the read strobe lasts one cycle and carries the requested block;
//   - checks the cycle count from request to `ready`: 5 + max(ceil(vmax/step), D) with the
//     Done shortcut, 3 + D + 4096 without it;
//   - reads several randomly chosen samples serially. Each 12-bit word per channel is
//     rebuilt from the 16 parallel lines, MSB first, and compared with
//     min(max(ceil(v/step) - D, 0), 4095).
`timescale 1ns / 1ps
module tb_serial_readout_sequencer;
  import target_pkg::*;

  logic clk = 0, rst_n = 0;
  logic dig_start = 0, shift_start = 0, done_stop_en = 1;
  logic [BLOCK_W-1:0] rd_block_in = 0, rd_block;
  logic [CELL_W-1:0] sample_sel = 0;
  logic [15:0] cnt_delay = 0;
  logic rd_en, adc_load, ramp_clear, ramp_run, cnt_en, adc_done, busy, ready, sdata_valid;
  logic [NUM_CH-1:0] sdata;
  block_codes_t adc_codes;
  block_volts_t rdata;
  volt_t ramp;
  volt_t step = 5;
  int checks = 0, failures = 0;

  serial_readout_sequencer dut (
    .clk, .rst_n, .dig_start, .rd_block_in, .shift_start, .sample_sel, .done_stop_en,
    .cnt_delay, .rd_en, .rd_block, .adc_load, .ramp_clear, .ramp_run, .cnt_en, .adc_done,
    .adc_codes, .busy, .ready, .sdata, .sdata_valid);
  ramp_generator u_ramp (.clk, .rst_n, .clear(ramp_clear), .run(ramp_run), .step, .ramp);
  wilkinson_adc u_adc (.clk, .rst_n, .load(adc_load), .vin_block(rdata), .cnt_en, .ramp,
                       .codes(adc_codes), .done(adc_done));

  always #1 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Storage model: block b holds pattern voltages, at most `vmax_of(b)`.
  function automatic int vmax_of(int b);
    return (b % 3 == 2) ? 65535 : 2000 + b * 37;
  endfunction
  function automatic volt_t v_of(int b, int ch, int c);
    return volt_t'(((b * 131 + ch * 977 + c * 61) * 7919) % (vmax_of(b) + 1));
  endfunction

  int rd_pulses = 0;
  always @(posedge clk) begin
    if (rd_en) begin
      rd_pulses++;
      for (int ch = 0; ch < NUM_CH; ch++)
        for (int c = 0; c < BLOCK_CELLS; c++) rdata[ch][c] <= v_of(int'(rd_block), ch, c);
    end
  end

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic int code_of(int v, int d);
    int e = (v + int'(step) - 1) / int'(step) - d;
    if (e < 0) e = 0;
    if (e > 4095) e = 4095;
    return e;
  endfunction

  int n_done_stop = 0, n_full = 0, n_shift = 0;

  task automatic digitise(int b, int d, bit use_done);
    int cycles = 0, tmax = 0, exp_cycles;
    int p0 = rd_pulses;
    cnt_delay = 16'(d);
    done_stop_en = use_done;
    @(negedge clk);
    dig_start = 1;
    rd_block_in = BLOCK_W'(b);
    @(negedge clk);
    dig_start = 0;
    cycles = 1;
    while (!ready) begin
      @(negedge clk);
      cycles++;
      if (cycles > 20000) break;
    end
    for (int ch = 0; ch < NUM_CH; ch++)
      for (int c = 0; c < BLOCK_CELLS; c++)
        if ((int'(v_of(b, ch, c)) + int'(step) - 1) / int'(step) > tmax)
          tmax = (int'(v_of(b, ch, c)) + int'(step) - 1) / int'(step);
    if (tmax < d) tmax = d;
    exp_cycles = (use_done && tmax + 1 <= d + 4095) ? tmax + 5 : d + 4096 + 3;
    if (use_done && tmax + 1 <= d + 4095) n_done_stop++; else n_full++;
    check($sformatf("digitise cycles block %0d", b), cycles, exp_cycles);
    check("one read strobe", rd_pulses - p0, 1);
    check("read block", int'(rd_block), b);
    // read out some samples
    for (int k = 0; k < 4; k++) begin
      int s = (k == 0) ? 0 : (k == 1) ? 31 : int'($urandom_range(31));
      logic [NUM_CH-1:0][ADC_BITS-1:0] word;
      @(negedge clk);
      shift_start = 1;
      sample_sel = CELL_W'(s);
      @(negedge clk);
      shift_start = 0;
      for (int bit_i = ADC_BITS - 1; bit_i >= 0; bit_i--) begin
        check("sdata_valid", int'(sdata_valid), 1);
        for (int ch = 0; ch < NUM_CH; ch++) word[ch][bit_i] = sdata[ch];
        @(negedge clk);
      end
      check("back to ready", int'(ready), 1);
      n_shift++;
      for (int ch = 0; ch < NUM_CH; ch++)
        check($sformatf("code b%0d ch%0d s%0d", b, ch, s), int'(word[ch]), code_of(int'(v_of(b, ch, s)), d));
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    digitise(0, 0, 1);
    digitise(7, 0, 1);
    digitise(100, 10, 1);
    digitise(5, 0, 1);     // block with saturating voltages
    digitise(300, 0, 0);   // full-length conversion without Done
    digitise(301, 20, 0);
    $display("done-stop conversions %0d, full-length %0d, serial words %0d", n_done_stop, n_full, n_shift);
    check("done-stop runs", int'(n_done_stop >= 3), 1);
    check("full runs", int'(n_full >= 2), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
