// target_pkg: constants and types shared by the TARGET-7-style readout ASIC model.
//
// The chip samples 16 channels into a 64-cell sampling array (two ping-pong groups of 32),
// moves each full group into one 32-cell block of a 16,384-cell storage array (512 blocks,
// 8 rows x 64 columns) and digitises one block of 32 cells x 16 channels at a time with
// 12-bit Wilkinson ADCs. Four trigger groups each sum four adjacent channels.
// Those numbers follow the published chip. Analog voltages are carried as 16-bit unsigned
// codes of 0.1 mV (volt_t), and the configuration register map (cfg_t, CFG_* addresses,
// reset values) is this model's own choice.
package target_pkg;

  localparam int NUM_CH         = 16;     // channels per ASIC
  localparam int SAMPLING_CELLS = 64;     // primary (sampling) array cells per channel
  localparam int BLOCK_CELLS    = 32;     // cells per ping-pong group / storage block
  localparam int STORAGE_CELLS  = 16384;  // storage cells per channel
  localparam int NUM_BLOCKS     = STORAGE_CELLS / BLOCK_CELLS;  // 512
  localparam int STORAGE_ROWS   = 8;
  localparam int STORAGE_COLS   = NUM_BLOCKS / STORAGE_ROWS;     // 64
  localparam int BLOCK_W        = $clog2(NUM_BLOCKS);            // 9
  localparam int CELL_W         = $clog2(BLOCK_CELLS);           // 5
  localparam int ADC_BITS       = 12;
  localparam int TRIG_GROUP_CH  = 4;
  localparam int NUM_TRIG       = NUM_CH / TRIG_GROUP_CH;        // 4

  // Analog voltage as an unsigned code, 1 LSB = 0.1 mV (0 .. 6.5535 V).
  localparam int VOLT_W = 16;
  typedef logic [VOLT_W-1:0] volt_t;

  // Serial configuration word: ADDR_W-bit register address followed by DATA_W-bit value.
  localparam int CFG_ADDR_W = 8;
  localparam int CFG_DATA_W = 16;

  // Register addresses.
  localparam logic [CFG_ADDR_W-1:0] CFG_TRIG_THR0  = 8'h00;  // 0x00..0x03 trigger thresholds
  localparam logic [CFG_ADDR_W-1:0] CFG_TRIG_WID0  = 8'h04;  // 0x04..0x07 one-shot widths
  localparam logic [CFG_ADDR_W-1:0] CFG_RAMP_STEP  = 8'h08;  // ramp rise per digitisation clock
  localparam logic [CFG_ADDR_W-1:0] CFG_CNT_DELAY  = 8'h09;  // counter start delay after ramp start
  localparam logic [CFG_ADDR_W-1:0] CFG_MON_WINDOW = 8'h0A;  // clock-monitor window, reference cycles
  localparam logic [CFG_ADDR_W-1:0] CFG_CTRL       = 8'h0B;  // bit0 sampling, bit1 done-stop, bit2 trigger

  typedef struct packed {
    volt_t [NUM_TRIG-1:0]        trig_thr;
    logic  [NUM_TRIG-1:0][15:0]  trig_width;
    volt_t                       ramp_step;
    logic  [15:0]                cnt_delay;
    logic  [15:0]                mon_window;
    logic                        sample_en;
    logic                        done_stop_en;
    logic                        trig_en;
  } cfg_t;

  // Values after reset: 50 mV thresholds, 16-cycle trigger pulses, 0.5 mV ramp step
  // (4096 counts span 2.048 V, above the 1.9 V range), no counter delay.
  localparam cfg_t CFG_RESET = '{
    trig_thr:     {NUM_TRIG{16'd500}},
    trig_width:   {NUM_TRIG{16'd16}},
    ramp_step:    16'd5,
    cnt_delay:    16'd0,
    mon_window:   16'd64,
    sample_en:    1'b1,
    done_stop_en: 1'b1,
    trig_en:      1'b1
  };

  // One block of analog samples for all channels.
  typedef volt_t [NUM_CH-1:0][BLOCK_CELLS-1:0] block_volts_t;
  // One block of ADC codes for all channels.
  typedef logic [NUM_CH-1:0][BLOCK_CELLS-1:0][ADC_BITS-1:0] block_codes_t;

endpackage
