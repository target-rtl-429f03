// wilkinson_clock_monitor: measures the digitisation-clock rate against a reference clock.
//
// In the reference domain a gate toggles every `window` reference cycles (a window of 0
// counts as 1). The gate is synchronised into the digitisation domain with two flip-flops.
// There a counter counts clk_wilk cycles while the gate is high. When the gate falls, the
// count is copied to `count` with a one-cycle `valid` pulse, and the counter restarts. So
// `count` is about window * f_wilk / f_ref, accurate to one cycle. That lets the rate be
// checked and trimmed, for example against temperature drift.
// A counter that monitors the ADC clock rate follows the published chip. The gate scheme,
// the window register and reporting the count as an output are this model's choices.
module wilkinson_clock_monitor (
  input  logic        clk_ref,
  input  logic        clk_wilk,
  input  logic        rst_n,
  input  logic [15:0] window,
  output logic [19:0] count,
  output logic        valid
);

  // Reference domain: gate generator.
  logic [15:0] rcnt;
  logic        gate;

  always_ff @(posedge clk_ref or negedge rst_n) begin
    if (!rst_n) begin
      rcnt <= '0;
      gate <= 1'b0;
    end else if (rcnt == ((window == '0) ? 16'd0 : window - 1'b1)) begin
      rcnt <= '0;
      gate <= ~gate;
    end else begin
      rcnt <= rcnt + 1'b1;
    end
  end

  // Digitisation domain: synchroniser and counter.
  logic [2:0]  gsync;
  logic [19:0] wcnt;

  always_ff @(posedge clk_wilk or negedge rst_n) begin
    if (!rst_n) begin
      gsync <= '0;
      wcnt  <= '0;
      count <= '0;
      valid <= 1'b0;
    end else begin
      gsync <= {gsync[1:0], gate};
      valid <= 1'b0;
      if (gsync[1]) begin
        if (wcnt != '1) wcnt <= wcnt + 1'b1;
      end else if (gsync[2]) begin
        count <= wcnt;
        valid <= 1'b1;
        wcnt  <= '0;
      end
    end
  end

endmodule
