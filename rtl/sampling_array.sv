// sampling_array: behavioural model of the 64-cell_idx switched-capacitor sampling array.
//
// The real part is analog: each channel has 64 sampling capacitors in two ping-pong groups
// of 32. In this model each cell_idx is a register holding the input voltage code (volt_t).
// The cell_idx named by `cell_idx` captures `vin` of every channel on the rising sample clock while
// `en` is high. `grp_data` shows, without delay, the 32 cells of the group named by
// `rd_group` for all channels. The write path reads it to copy a finished group into storage.
// The cell_idx count and grouping follow the published chip. Sampling on a clock edge
// and the voltage coding are the model's choices.
module sampling_array
  import target_pkg::*;
#(
  parameter int N_CELLS = 64
) (
  input  logic                              clk_sample,
  input  logic                              en,
  input  logic [$clog2(N_CELLS)-1:0] cell_idx,
  input  volt_t [NUM_CH-1:0]                vin,
  input  logic                              rd_group,
  output block_volts_t                      grp_data
);

  localparam int HALF = N_CELLS / 2;

  volt_t cap [NUM_CH][N_CELLS];

  always_ff @(posedge clk_sample) begin
    if (en)
      for (int ch = 0; ch < NUM_CH; ch++) cap[ch][cell_idx] <= vin[ch];
  end

  always_comb begin
    for (int ch = 0; ch < NUM_CH; ch++)
      for (int c = 0; c < BLOCK_CELLS; c++)
        grp_data[ch][c] = cap[ch][(rd_group ? HALF : 0) + (c % HALF)];
  end

endmodule
