// serial_readout_sequencer: digitisation and serial readout control.
//
// It runs on the digitisation (Wilkinson) clock and serves the off-chip controller:
//   1. `dig_start` (in IDLE or READY) latches `rd_block_in`. The next cycle (READ) asserts
//      `rd_en` for one cycle, so the storage array delivers the block.
//   2. LOAD: `adc_load` moves the 32 x 16 voltages into the ADC cells, and `ramp_clear`
//      resets the ramp.
//   3. RAMP: `ramp_run` raises the ramp each cycle. `cnt_en` enables the counters from the
//      `cnt_delay`-th ramp cycle on (the counters start after the ramp). The phase ends
//      after cnt_delay + 4096 cycles, or earlier once `adc_done` is seen if `done_stop_en`
//      is set.
//   4. READY: `ready` is high and the codes stay valid. `shift_start` with `sample_sel`
//      picks one of the 32 samples. Its 12-bit codes, one per channel, then leave MSB first
//      on the 16 `sdata` lines in parallel, one bit per cycle for 12 cycles, with
//      `sdata_valid`. After that the block is READY again, so any other sample of the same
//      block can be read.
// From dig_start to ready takes 3 + N cycles, N being the RAMP length.
// The on-demand block read, the broadcast ramp with delayed counter start, the Done
// shortcut, random access to digitised samples and the 16 parallel serial outputs follow the
// published chip. The exact cycle sequence, MSB-first order and handshake are this model's
// own.
module serial_readout_sequencer
  import target_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  // controller requests
  input  logic                dig_start,
  input  logic [BLOCK_W-1:0]  rd_block_in,
  input  logic                shift_start,
  input  logic [CELL_W-1:0]   sample_sel,
  // configuration
  input  logic                done_stop_en,
  input  logic [15:0]         cnt_delay,
  // storage array read
  output logic                rd_en,
  output logic [BLOCK_W-1:0]  rd_block,
  // ADC and ramp control
  output logic                adc_load,
  output logic                ramp_clear,
  output logic                ramp_run,
  output logic                cnt_en,
  input  logic                adc_done,
  input  block_codes_t        adc_codes,
  // status and serial data
  output logic                busy,
  output logic                ready,
  output logic [NUM_CH-1:0]   sdata,
  output logic                sdata_valid
);

  typedef enum logic [2:0] {S_IDLE, S_READ, S_LOAD, S_RAMP, S_READY, S_SHIFT} state_t;
  state_t state;

  localparam int TW = 18;
  logic [TW-1:0] t;                       // ramp cycle counter
  logic [TW-1:0] t_end;                   // last ramp cycle
  logic [NUM_CH-1:0][ADC_BITS-1:0] shreg;
  logic [$clog2(ADC_BITS)-1:0]     bitcnt;

  assign t_end = TW'(cnt_delay) + TW'(2**ADC_BITS) - 1'b1;

  always_comb begin
    rd_en       = (state == S_READ);
    adc_load    = (state == S_LOAD);
    ramp_clear  = (state == S_LOAD);
    ramp_run    = (state == S_RAMP);
    cnt_en      = (state == S_RAMP) && (t >= TW'(cnt_delay));
    busy        = (state == S_READ) || (state == S_LOAD) || (state == S_RAMP) || (state == S_SHIFT);
    ready       = (state == S_READY);
    sdata_valid = (state == S_SHIFT);
    for (int ch = 0; ch < NUM_CH; ch++) sdata[ch] = sdata_valid && shreg[ch][ADC_BITS-1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      rd_block <= '0;
      t        <= '0;
      shreg    <= '0;
      bitcnt   <= '0;
    end else begin
      case (state)
        S_IDLE, S_READY: begin
          if (dig_start) begin
            rd_block <= rd_block_in;
            state    <= S_READ;
          end else if (shift_start && state == S_READY) begin
            for (int ch = 0; ch < NUM_CH; ch++) shreg[ch] <= adc_codes[ch][sample_sel];
            bitcnt <= '0;
            state  <= S_SHIFT;
          end
        end
        S_READ: state <= S_LOAD;
        S_LOAD: begin
          t     <= '0;
          state <= S_RAMP;
        end
        S_RAMP: begin
          t <= t + 1'b1;
          if (t == t_end || (done_stop_en && adc_done)) state <= S_READY;
        end
        S_SHIFT: begin
          for (int ch = 0; ch < NUM_CH; ch++) shreg[ch] <= shreg[ch] << 1;
          bitcnt <= bitcnt + 1'b1;
          if (bitcnt == ($clog2(ADC_BITS))'(ADC_BITS - 1)) state <= S_READY;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A new request is only taken when the sequencer is idle or ready (busy is low in reset).
  a_no_start_busy: assert property (@(posedge clk) busy |-> !dig_start && !shift_start);

endmodule
