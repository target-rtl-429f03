// tb_addr_decode: exhaustive test of the storage address decoder.
// For all 512 write and read block numbers it checks the one-hot row and column selects
// against the layout of the storage grid: block b sits in row b mod 8 and column b / 8.
// It also checks the idle (no access) case and the collision flag.
`timescale 1ns / 1ps
module tb_addr_decode;
  logic [8:0] wr_block, rd_block;
  logic wr_en, rd_en;
  logic [7:0] wr_row_sel, rd_row_sel;
  logic [63:0] wr_col_sel, rd_col_sel;
  logic collide;
  int checks = 0, failures = 0;

  addr_decode dut (.wr_block, .wr_en, .rd_block, .rd_en, .wr_row_sel, .wr_col_sel,
                   .rd_row_sel, .rd_col_sel, .collide);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input logic [63:0] got, input logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  initial begin
    for (int b = 0; b < 512; b++) begin
      wr_block = 9'(b);
      rd_block = 9'(511 - b);
      wr_en = 1;
      rd_en = 1;
      #1;
      check("wr_row", 64'(wr_row_sel), 64'(1) << (b % 8));
      check("wr_col", wr_col_sel, 64'(1) << (b / 8));
      check("rd_row", 64'(rd_row_sel), 64'(1) << ((511 - b) % 8));
      check("rd_col", rd_col_sel, 64'(1) << ((511 - b) / 8));
      check("collide", 64'(collide), 64'(b == 511 - b));
    end
    wr_block = 9'd200; rd_block = 9'd200; wr_en = 1; rd_en = 1;
    #1 check("collide same", 64'(collide), 1);
    rd_en = 0;
    #1 check("no collide when idle", 64'(collide), 0);
    check("idle rd row", 64'(rd_row_sel), 0);
    check("idle rd col", rd_col_sel, 0);
    wr_en = 0;
    #1 check("idle wr row", 64'(wr_row_sel), 0);
    check("idle wr col", wr_col_sel, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
