// ramp_generator: behavioural model of the Wilkinson ramp generator.
//
// The real part is analog. It makes one voltage ramp and broadcasts it to the comparators
// of all channels. In this model the ramp is a voltage code. `clear` sets it to 0 V. Each
// digitisation-clock cycle with `run` high raises it by `step` (the slope), and it stops at
// full scale. So `ramp` equals t*step in the t-th run cycle after a clear.
// One broadcast ramp follows the published chip. The 0 V start (the newest chip ties the
// ramp reference to ground), the linear steps and the configurable slope are the model's
// choices.
module ramp_generator
  import target_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clear,
  input  logic  run,
  input  volt_t step,
  output volt_t ramp
);

  logic [VOLT_W:0] next;
  assign next = {1'b0, ramp} + {1'b0, step};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     ramp <= '0;
    else if (clear) ramp <= '0;
    else if (run)   ramp <= next[VOLT_W] ? '1 : next[VOLT_W-1:0];
  end

endmodule
