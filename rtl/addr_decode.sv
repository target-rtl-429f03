// addr_decode: write/read address decoder of the storage array.
//
// The storage array is a grid of 8 rows x 64 columns of 32-cell blocks, numbered down each
// column: column 0 holds blocks 0..7 and column 63 holds blocks 504..511. So a block number
// splits into row = block[2:0] and column = block[8:3]. The decoder turns the write and the
// read block number each into a one-hot row select and a one-hot column select. `collide`
// flags a read of the block that is being written. Purely combinational.
// The grid and its numbering follow the published block diagram. The collision flag is
// this model's addition, a help for the off-chip controller.
module addr_decode #(
  parameter int STORAGE_ROWS = 8,
  parameter int STORAGE_COLS = 64
) (
  input  logic [$clog2(STORAGE_ROWS*STORAGE_COLS)-1:0] wr_block,
  input  logic                                         wr_en,
  input  logic [$clog2(STORAGE_ROWS*STORAGE_COLS)-1:0] rd_block,
  input  logic                                         rd_en,
  output logic [STORAGE_ROWS-1:0]                      wr_row_sel,
  output logic [STORAGE_COLS-1:0]                      wr_col_sel,
  output logic [STORAGE_ROWS-1:0]                      rd_row_sel,
  output logic [STORAGE_COLS-1:0]                      rd_col_sel,
  output logic                                         collide
);

  localparam int RW = $clog2(STORAGE_ROWS);
  localparam int BW = $clog2(STORAGE_ROWS*STORAGE_COLS);

  always_comb begin
    wr_row_sel = '0;
    wr_col_sel = '0;
    rd_row_sel = '0;
    rd_col_sel = '0;
    if (wr_en) begin
      wr_row_sel[wr_block[RW-1:0]]   = 1'b1;
      wr_col_sel[wr_block[BW-1:RW]] = 1'b1;
    end
    if (rd_en) begin
      rd_row_sel[rd_block[RW-1:0]]   = 1'b1;
      rd_col_sel[rd_block[BW-1:RW]] = 1'b1;
    end
    collide = wr_en && rd_en && (wr_block == rd_block);
  end

endmodule
