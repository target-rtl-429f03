// trigger_oneshot: one-shot that sets the width of a trigger output pulse.
//
// A rising edge of the comparator output `fire` starts a pulse on `trig` lasting `width`
// clock cycles (at least one). The pulse begins one cycle after the edge is seen. While a
// pulse runs, further edges are ignored: the one-shot does not retrigger, and a `fire` that
// stays high gives one pulse only. The published chip routes the comparator to a one-shot
// with adjustable width. Counting the width in sample-clock cycles and not retriggering
// are this model's choices (the chip's one-shot is an analog circuit).
module trigger_oneshot (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        fire,
  input  logic [15:0] width,
  output logic        trig
);

  logic        fire_d;
  logic [15:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fire_d <= 1'b0;
      trig   <= 1'b0;
      cnt    <= '0;
    end else begin
      fire_d <= fire;
      if (!trig) begin
        if (fire && !fire_d) begin
          trig <= 1'b1;
          cnt  <= (width == '0) ? '0 : width - 1'b1;
        end
      end else if (cnt == '0) begin
        trig <= 1'b0;
      end else begin
        cnt <= cnt - 1'b1;
      end
    end
  end

endmodule
