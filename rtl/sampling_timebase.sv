// sampling_timebase: sampling strobe and ping-pong write sequencing.
//
// The sampling array has 64 cells per channel, split into group 0 (cells 0..31) and group 1
// (cells 32..63). `cell_idx` names the cell_idx that samples the input in the current sample-clock
// cycle, and it advances by one cell_idx per cycle while `en` is high. After the last cell_idx of a
// group has sampled (cell_idx 31 or 63), `wr_en` pulses for one cycle. Together with
// `wr_group` and `wr_block` it asks the storage array to copy that group into the next
// storage block. The other group samples in the meantime. Blocks are written in order
// 0..511 and then wrap (`wrap` pulses with the write of block 511). So a sample stays in
// storage for NUM_BLOCKS*BLOCK_CELLS = 16,384 sample periods, about 16 us at 1 GSa/s.
// Group 0 always lands in an even block and group 1 in an odd one.
// The 64 cells, the ping-pong scheme and the 16,384-cell_idx depth follow the published chip.
// In the chip the sampling strobe comes from a chain of delay elements with an adjustable
// step of 1 to 2.5 ns. Here it is a counter stepped by a sample clock whose period plays the
// role of that step. The in-order write addressing is this model's choice.
module sampling_timebase #(
  parameter int SAMPLING_CELLS = 64,
  parameter int NUM_BLOCKS     = 512
) (
  input  logic                          clk_sample,
  input  logic                          rst_n,
  input  logic                          en,
  output logic [$clog2(SAMPLING_CELLS)-1:0] cell_idx,
  output logic                          wr_en,
  output logic                          wr_group,
  output logic [$clog2(NUM_BLOCKS)-1:0] wr_block,
  output logic                          wrap
);

  localparam int CW = $clog2(SAMPLING_CELLS);
  localparam int BW = $clog2(NUM_BLOCKS);

  logic [BW-1:0] next_block;
  wire group_last = (cell_idx[CW-2:0] == '1);   // cell_idx 31 or 63

  always_ff @(posedge clk_sample or negedge rst_n) begin
    if (!rst_n) begin
      cell_idx       <= '0;
      wr_en      <= 1'b0;
      wr_group   <= 1'b0;
      wr_block   <= '0;
      wrap       <= 1'b0;
      next_block <= '0;
    end else begin
      wr_en <= 1'b0;
      wrap  <= 1'b0;
      if (en) begin
        cell_idx <= cell_idx + 1'b1;
        if (group_last) begin
          wr_en      <= 1'b1;
          wr_group   <= cell_idx[CW-1];
          wr_block   <= next_block;
          wrap       <= (next_block == BW'(NUM_BLOCKS - 1));
          next_block <= next_block + 1'b1;
        end
      end
    end
  end

endmodule
