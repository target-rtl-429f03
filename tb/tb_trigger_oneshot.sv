// tb_trigger_oneshot: self-checking test of the trigger one-shot.
// A cycle-level reference model is run alongside the one-shot on random comparator
// activity with several widths. The model: a rising edge of fire while no pulse runs starts
// a pulse of max(width,1) cycles one cycle later, and other edges are ignored. Pulse
// lengths are also measured directly against the width.
`timescale 1ns / 1ps
module tb_trigger_oneshot;
  logic clk = 0, rst_n = 0, fire = 0, trig;
  logic [15:0] width = 5;
  int checks = 0, failures = 0;

  trigger_oneshot dut (.clk, .rst_n, .fire, .width, .trig);

  always #1 clk = ~clk;

  initial begin
    #400000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference model
  bit m_fire_d = 0, m_trig = 0;
  int m_left = 0, run_len = 0, n_pulses = 0, n_ignored = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      if (!m_trig) begin
        if (fire && !m_fire_d) begin
          m_trig <= 1;
          m_left <= (width == 0) ? 1 : int'(width);
        end
      end else begin
        if (fire && !m_fire_d) n_ignored++;
        if (m_left == 1) m_trig <= 0;
        m_left <= m_left - 1;
      end
      m_fire_d <= fire;
    end
  end

  always @(negedge clk) begin
    if (rst_n) begin
      checks++;
      if (trig !== m_trig) begin
        failures++;
        if (failures < 10) $display("FAIL at %0t: trig %0d model %0d", $time, trig, m_trig);
      end
      if (trig) run_len++;
      else if (run_len > 0) begin
        checks++;
        n_pulses++;
        if (run_len != ((width == 0) ? 1 : int'(width))) begin
          failures++;
          $display("FAIL pulse length %0d width %0d", run_len, width);
        end
        run_len = 0;
      end
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    foreach (wl[i]) begin
      width = wl[i];
      for (int k = 0; k < 2000; k++) begin
        @(negedge clk);
        fire = ($urandom_range(9) < 3);
      end
      fire = 0;
      repeat (40) @(negedge clk);
    end
    checks++;
    if (n_pulses < 10 || n_ignored == 0) failures++;
    $display("pulses %0d, edges ignored during a pulse %0d", n_pulses, n_ignored);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [15:0] wl [4] = '{16'd1, 16'd5, 16'd16, 16'd0};
endmodule
