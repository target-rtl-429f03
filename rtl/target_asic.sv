// target_asic: top level of a TARGET-7-style 16-channel waveform sampling and trigger ASIC.
//
// Data path (sample clock domain, clk_sample):
//   vin -> sampling_array (64 cells, two ping-pong groups of 32, stepped by sampling_timebase)
//       -> each full group is copied (WRITE) into the next 32-cell block of the
//          16,384-cell storage_array, blocks 0..511 in turn, so storage holds the last
//          16,384 samples of every channel.
// Readout (digitisation clock domain, clk_wilk), driven by an off-chip controller:
//   dig_start + rd_block -> serial_readout_sequencer reads that block (READ) into the
//   32 x 16 wilkinson_adc cells, runs ramp_generator and the counters until Done or 4096
//   counts, then raises `ready`. shift_start + sample_sel -> the 12-bit codes of one
//   sample leave MSB first on the 16 `sdata` lines in parallel.
// Trigger path (clk_sample): four groups of four adjacent channels, each summed and
//   compared with its threshold (trigger_sum_comparator), then stretched by a one-shot
//   to the configured width on `trig_out[g]`.
// Configuration (sclk): serial_config loads thresholds, widths, ramp slope, counter delay,
//   clock-monitor window and control bits (sampling, Done-stop, trigger enables).
// Monitoring: wilkinson_clock_monitor counts clk_wilk cycles over a window of clk_sample
//   cycles.
// `wr_block` tells the controller which block is being written, so that it can compute the
// block that holds a given past time. `rd_collide` flags a read of the block being written
// (data then undefined).
// The block structure, sizes and the sampling/storage/digitisation/trigger flow follow the
// published chip. Clocking, handshakes, register map and voltage coding are this model's
// own. The analog parts (cells, amplifiers, ramp, comparators) are behavioural.
module target_asic
  import target_pkg::*;
(
  input  logic                  clk_sample,
  input  logic                  clk_wilk,
  input  logic                  sclk,
  input  logic                  rst_n,
  // analog inputs: pulse amplitude above the reference line, per channel
  input  volt_t [NUM_CH-1:0]    vin,
  // serial configuration
  input  logic                  sen,
  input  logic                  sin,
  // readout requests
  input  logic                  dig_start,
  input  logic [BLOCK_W-1:0]    rd_block,
  input  logic                  shift_start,
  input  logic [CELL_W-1:0]     sample_sel,
  // readout status and data
  output logic                  busy,
  output logic                  ready,
  output logic                  done_bit,
  output logic [NUM_CH-1:0]     sdata,
  output logic                  sdata_valid,
  // write position
  output logic [BLOCK_W-1:0]    wr_block,
  output logic                  wr_wrap,
  output logic                  rd_collide,
  // triggers
  output logic [NUM_TRIG-1:0]   trig_out,
  // clock monitor
  output logic [19:0]           mon_count,
  output logic                  mon_valid
);

  cfg_t cfg;

  serial_config u_cfg (.sclk, .rst_n, .sen, .sin, .cfg);

  // ---------------- sampling and write ----------------
  logic [$clog2(SAMPLING_CELLS)-1:0] cell_idx;
  logic                              wr_en, wr_group;
  block_volts_t                      grp_data;

  sampling_timebase #(.SAMPLING_CELLS(SAMPLING_CELLS), .NUM_BLOCKS(NUM_BLOCKS)) u_tb (
    .clk_sample, .rst_n, .en(cfg.sample_en), .cell_idx,
    .wr_en, .wr_group, .wr_block, .wrap(wr_wrap)
  );

  sampling_array #(.N_CELLS(SAMPLING_CELLS)) u_sca (
    .clk_sample, .en(cfg.sample_en), .cell_idx, .vin, .rd_group(wr_group), .grp_data
  );

  // ---------------- address decode and storage ----------------
  logic                    seq_rd_en;
  logic [BLOCK_W-1:0]      seq_rd_block;
  logic [STORAGE_ROWS-1:0] wr_row_sel, rd_row_sel;
  logic [STORAGE_COLS-1:0] wr_col_sel, rd_col_sel;
  block_volts_t            st_rdata;

  addr_decode #(.STORAGE_ROWS(STORAGE_ROWS), .STORAGE_COLS(STORAGE_COLS)) u_dec (
    .wr_block, .wr_en, .rd_block(seq_rd_block), .rd_en(seq_rd_en),
    .wr_row_sel, .wr_col_sel, .rd_row_sel, .rd_col_sel, .collide(rd_collide)
  );

  storage_array #(.DEPTH(STORAGE_CELLS)) u_store (
    .clk_w(clk_sample), .wr_row_sel, .wr_col_sel, .wdata(grp_data),
    .clk_r(clk_wilk), .re(seq_rd_en), .rd_row_sel, .rd_col_sel, .rdata(st_rdata)
  );

  // ---------------- digitisation and serial readout ----------------
  logic         adc_load, ramp_clear, ramp_run, cnt_en;
  volt_t        ramp;
  block_codes_t adc_codes;

  serial_readout_sequencer u_seq (
    .clk(clk_wilk), .rst_n,
    .dig_start, .rd_block_in(rd_block), .shift_start, .sample_sel,
    .done_stop_en(cfg.done_stop_en), .cnt_delay(cfg.cnt_delay),
    .rd_en(seq_rd_en), .rd_block(seq_rd_block),
    .adc_load, .ramp_clear, .ramp_run, .cnt_en,
    .adc_done(done_bit), .adc_codes,
    .busy, .ready, .sdata, .sdata_valid
  );

  ramp_generator u_ramp (
    .clk(clk_wilk), .rst_n, .clear(ramp_clear), .run(ramp_run), .step(cfg.ramp_step), .ramp
  );

  wilkinson_adc u_adc (
    .clk(clk_wilk), .rst_n, .load(adc_load), .vin_block(st_rdata),
    .cnt_en, .ramp, .codes(adc_codes), .done(done_bit)
  );

  wilkinson_clock_monitor u_mon (
    .clk_ref(clk_sample), .clk_wilk, .rst_n, .window(cfg.mon_window),
    .count(mon_count), .valid(mon_valid)
  );

  // ---------------- trigger path ----------------
  for (genvar g = 0; g < NUM_TRIG; g++) begin : g_trig
    logic fire;
    trigger_sum_comparator u_sum (
      .vin(vin[g*TRIG_GROUP_CH +: TRIG_GROUP_CH]), .thr(cfg.trig_thr[g]),
      .en(cfg.trig_en), .fire
    );
    trigger_oneshot u_os (
      .clk(clk_sample), .rst_n, .fire, .width(cfg.trig_width[g]), .trig(trig_out[g])
    );
  end

endmodule
