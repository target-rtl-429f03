// storage_array: behavioural model of the 16,384-cell switched-capacitor storage array.
//
// The real part is analog: every channel has 16,384 storage capacitors in 512 blocks of 32,
// laid out as 8 rows x 64 columns. Here it is a memory of voltage codes with one word per
// block, each word holding 32 cells for all 16 channels. It has two ports:
//   write (clk_w): when one row and one column select are set, the selected block takes
//                  `wdata` (one full sampling group) on the rising edge;
//   read  (clk_r): when `re` is high, the block picked by the read selects appears on
//                  `rdata` one cycle later.
// The selects must be one-hot (zero or one bit set, zero meaning no access). Assertions
// check this. Reading a block in the same cycle as it is written is left to the
// controller. The sizes follow the published chip. Coding the voltages as words and the
// one-cycle read latency are the model's choices.
module storage_array
  import target_pkg::*;
#(
  parameter  int DEPTH  = 16384,
  localparam int NUM_BLK        = DEPTH / BLOCK_CELLS,
  localparam int STORAGE_COLS_P = NUM_BLK / STORAGE_ROWS
) (
  input  logic                       clk_w,
  input  logic [STORAGE_ROWS-1:0]    wr_row_sel,
  input  logic [STORAGE_COLS_P-1:0]  wr_col_sel,
  input  block_volts_t               wdata,
  input  logic                       clk_r,
  input  logic                       re,
  input  logic [STORAGE_ROWS-1:0]    rd_row_sel,
  input  logic [STORAGE_COLS_P-1:0]  rd_col_sel,
  output block_volts_t               rdata
);

  localparam int BW = $clog2(NUM_BLK);
  localparam int RW = $clog2(STORAGE_ROWS);
  localparam int CW = $clog2(STORAGE_COLS_P);

  block_volts_t mem [NUM_BLK];

  // One-hot to binary.
  function automatic logic [BW-1:0] block_of(input logic [STORAGE_ROWS-1:0] row,
                                             input logic [STORAGE_COLS_P-1:0] col);
    logic [RW-1:0] r;
    logic [CW-1:0] c;
    r = '0;
    c = '0;
    for (int i = 0; i < STORAGE_ROWS; i++)   if (row[i]) r = RW'(i);
    for (int i = 0; i < STORAGE_COLS_P; i++) if (col[i]) c = CW'(i);
    return {c, r};
  endfunction

  wire we = |wr_row_sel && |wr_col_sel;

  always_ff @(posedge clk_w) begin
    if (we) mem[block_of(wr_row_sel, wr_col_sel)] <= wdata;
  end

  always_ff @(posedge clk_r) begin
    if (re) rdata <= mem[block_of(rd_row_sel, rd_col_sel)];
  end

  // Select lines are one-hot or idle.
  a_wr_row: assert property (@(posedge clk_w) $onehot0(wr_row_sel));
  a_wr_col: assert property (@(posedge clk_w) $onehot0(wr_col_sel));
  a_rd_row: assert property (@(posedge clk_r) re |-> $onehot(rd_row_sel));
  a_rd_col: assert property (@(posedge clk_r) re |-> $onehot(rd_col_sel));

endmodule
