// tb_serial_config: self-checking test of the serial configuration interface.
// Checks the reset values, then loads every register through serial frames (8-bit address,
// 16-bit data, MSB first, stored when the enable falls) and compares the parallel record
// with the written values. It also checks that an unknown address changes nothing.
`timescale 1ns / 1ps
module tb_serial_config;
  import target_pkg::*;

  logic sclk = 0, rst_n = 0, sen = 0, sin = 0;
  cfg_t cfg;
  int checks = 0, failures = 0;

  serial_config dut (.sclk, .rst_n, .sen, .sin, .cfg);

  always #5 sclk = ~sclk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  task automatic write_reg(input logic [7:0] a, input logic [15:0] d);
    logic [23:0] frame = {a, d};
    @(negedge sclk) sen = 1;
    for (int i = 23; i >= 0; i--) begin
      sin = frame[i];
      @(negedge sclk);
    end
    sen = 0;
    @(negedge sclk);
  endtask

  logic [15:0] thr [4], wid [4];

  initial begin
    repeat (3) @(negedge sclk);
    rst_n = 1;
    check("reset thr0", cfg.trig_thr[0], 500);
    check("reset ramp", cfg.ramp_step, 5);
    check("reset ctrl", {cfg.trig_en, cfg.done_stop_en, cfg.sample_en}, 3'b111);
    for (int g = 0; g < 4; g++) begin
      thr[g] = 16'($urandom);
      wid[g] = 16'($urandom);
      write_reg(8'(g), thr[g]);
      write_reg(8'(4 + g), wid[g]);
    end
    write_reg(8'h08, 16'd7);
    write_reg(8'h09, 16'd3);
    write_reg(8'h0A, 16'd100);
    write_reg(8'h0B, 16'b101);
    write_reg(8'h33, 16'hFFFF);   // unknown address
    for (int g = 0; g < 4; g++) begin
      check($sformatf("thr%0d", g), cfg.trig_thr[g], thr[g]);
      check($sformatf("wid%0d", g), cfg.trig_width[g], wid[g]);
    end
    check("ramp_step", cfg.ramp_step, 7);
    check("cnt_delay", cfg.cnt_delay, 3);
    check("mon_window", cfg.mon_window, 100);
    check("sample_en", cfg.sample_en, 1);
    check("done_stop_en", cfg.done_stop_en, 0);
    check("trig_en", cfg.trig_en, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
