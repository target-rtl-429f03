// tb_charge_linearity: charge-linearity run of the whole chip at its real sizes.
// Each of the 16 channels gets a pedestal of 200 mV. Gaussian-shaped pulses (10 ns full
// width at half maximum, 4 mV per photoelectron) of 1 to 500 photoelectrons are placed,
// one at a time, inside a single 32-sample storage block. The block is digitised with the
// default 0.5 mV ramp step and read out, and the charge is rebuilt as
// sum(code - pedestal code) x step over the block. The testbench checks:
//   - every rebuilt charge lies within the quantisation bound (pulse samples x step) of the
//     true integral;
//   - the relative charge error stays below 4 % at 10 p.e. and below 0.8 % above 100 p.e.;
//   - no code saturates up to 300 p.e., and 500 p.e. does saturate, because
//     200 mV + 2.0 V exceeds the 2.048 V range.
// The model has no noise, so only quantisation errors remain.
`timescale 1ns / 1ps
module tb_charge_linearity;
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

  localparam int STEP = 5;          // default ramp step, 0.5 mV
  localparam int PED  = 2000;       // 200 mV pedestal
  localparam int SPE  = 40;         // 4 mV per photoelectron
  localparam int PLEN = 20;         // samples covered by a pulse
  localparam int POFF = 6;          // pulse start within the block
  localparam real SIGMA = 10.0 / 2.3548;

  int checks = 0, failures = 0;

  initial begin
    #1000us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // pulse samples, all channels alike
  int  shape [PLEN];
  longint n = 0;
  longint pulse_block = -1;   // absolute block index (n / 32) that carries the pulse
  int  npe = 0;

  function automatic int v_at(longint k);
    int pos = int'(k - pulse_block * BLOCK_CELLS) - POFF;
    if ((k >> 5) == pulse_block && pos >= 0 && pos < PLEN) return PED + shape[pos];
    return PED;
  endfunction

  always @(posedge clk_sample) if (rst_n) n <= n + 1;
  always @(negedge clk_sample)
    for (int ch = 0; ch < NUM_CH; ch++) vin[ch] = volt_t'(v_at(n));

  int npe_list [9] = '{1, 2, 5, 10, 30, 100, 300, 400, 500};

  initial begin
    vin = '0;
    repeat (3) @(negedge sclk);
    rst_n = 1;
    foreach (npe_list[i]) begin
      automatic longint q_true = 0, q_rec = 0;
      automatic int n_sat = 0;
      automatic real rel;
      npe = npe_list[i];
      for (int k = 0; k < PLEN; k++)
        shape[k] = int'(npe * SPE * $exp(-((k - 8.0) ** 2) / (2.0 * SIGMA * SIGMA)) + 0.5);
      for (int k = 0; k < PLEN; k++) q_true += shape[k];
      // place the pulse two blocks ahead and wait until that block is written
      @(negedge clk_sample);
      pulse_block = (n >> 5) + 2;
      wait (n > (pulse_block + 2) * BLOCK_CELLS);
      @(negedge clk_wilk);
      dig_start = 1;
      rd_block = BLOCK_W'(pulse_block % NUM_BLOCKS);
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
        for (int b = ADC_BITS - 1; b >= 0; b--) begin
          for (int ch = 0; ch < NUM_CH; ch++) word[ch][b] = sdata[ch];
          @(negedge clk_wilk);
        end
        // channel 0 builds the charge; all channels must agree
        q_rec += (longint'(word[0]) - PED / STEP) * STEP;
        if (word[0] == 12'hFFF) n_sat++;
        for (int ch = 1; ch < NUM_CH; ch++) begin
          checks++;
          if (word[ch] != word[0]) failures++;
        end
      end
      rel = (q_rec - q_true) * 1.0 / q_true;
      $display("%0d p.e.: true charge %0d, rebuilt %0d (x0.1 mV x 1 ns), error %0.3f %%, saturated samples %0d",
               npe, q_true, q_rec, 100.0 * rel, n_sat);
      if (npe <= 300) begin
        checks++;
        if (n_sat != 0 || q_rec - q_true < 0 || q_rec - q_true >= PLEN * STEP) begin
          failures++;
          $display("FAIL charge outside quantisation bound at %0d p.e.", npe);
        end
        checks++;
        if ((npe >= 10 && rel > 0.04) || (npe > 100 && rel > 0.008)) begin
          failures++;
          $display("FAIL relative error %0.3f %% at %0d p.e.", 100.0 * rel, npe);
        end
      end
      if (npe == 500) begin
        checks++;
        if (n_sat == 0) begin
          failures++;
          $display("FAIL 500 p.e. did not saturate");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
