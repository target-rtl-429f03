// trigger_sum_comparator: behavioural model of one trigger group's summing amplifier and
// threshold comparator.
//
// The real part is analog. An inverting summing amplifier adds the signals of four adjacent
// channels, and a comparator tests that sum against an adjustable threshold. Each channel
// first passes through two extra inverting amplifier stages. In this model the inversions
// are folded into a plain sum of the four pulse amplitudes (voltage codes above the
// reference). `fire` is high while `en` is set and the sum exceeds `thr`. It is
// combinational. In the chip the comparator works continuously; here its output is
// meaningful once per sample period.
// Four channels per group and the adjustable threshold follow the published chip. The
// polarity and the unit gain are the model's choices.
module trigger_sum_comparator
  import target_pkg::*;
(
  input  volt_t [TRIG_GROUP_CH-1:0] vin,
  input  volt_t                     thr,
  input  logic                      en,
  output logic                      fire
);

  logic [VOLT_W+$clog2(TRIG_GROUP_CH)-1:0] sum;

  always_comb begin
    sum = '0;
    for (int i = 0; i < TRIG_GROUP_CH; i++) sum += (VOLT_W+$clog2(TRIG_GROUP_CH))'(vin[i]);
    fire = en && (sum > (VOLT_W+$clog2(TRIG_GROUP_CH))'(thr));
  end

endmodule
