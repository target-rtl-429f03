// wilkinson_adc: 32 x 16 Wilkinson analog-to-digital converter cells with a Done bit.
//
// One block of 32 stored samples per channel, 512 voltages in all, is converted at the
// same time. Each cell has a comparator and a 12-bit counter:
//   load   : the cell takes its voltage from `vin_block`, clears its counter and re-arms;
//   cnt_en : while high, an armed cell whose voltage is still above the broadcast `ramp`
//            counts one per digitisation clock. Once the ramp reaches the voltage
//            (ramp >= held) the cell stops and keeps its count, the ADC code.
// A counter that reaches 4095 holds there (saturation). `done` is high when every cell has
// stopped. The controller can then end the conversion early instead of waiting for the full
// 4096 counts. With the ramp starting from zero t*step and the counters enabled from cycle D,
// a voltage v gives code min(max(ceil(v/step) - D, 0), 4095).
// The per-cell comparator and counter, the 12 bits, the 32 x 16 parallelism and the Done bit
// follow the published chip. Its ripple counter is written here as a synchronous counter
// with the same count, and the analog comparator as a compare of voltage codes.
module wilkinson_adc
  import target_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,
  input  block_volts_t vin_block,
  input  logic         cnt_en,
  input  volt_t        ramp,
  output block_codes_t codes,
  output logic         done
);

  localparam logic [ADC_BITS-1:0] CODE_MAX = '1;

  block_volts_t                          held;
  logic [NUM_CH-1:0][BLOCK_CELLS-1:0]    stopped;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      held    <= '0;
      codes   <= '0;
      stopped <= '1;
    end else if (load) begin
      held    <= vin_block;
      codes   <= '0;
      stopped <= '0;
    end else if (cnt_en) begin
      for (int ch = 0; ch < NUM_CH; ch++)
        for (int c = 0; c < BLOCK_CELLS; c++)
          if (!stopped[ch][c]) begin
            if (ramp >= held[ch][c])            stopped[ch][c] <= 1'b1;
            else if (codes[ch][c] != CODE_MAX)  codes[ch][c]   <= codes[ch][c] + 1'b1;
          end
    end
  end

  assign done = &stopped;

endmodule
