// current_comparator: behavioural model of the comparator that ends the
// analog RBF classifier. Not synthesizable logic: it models an analog
// circuit whose design the source takes from earlier work.
//
// Compares the current summed on the positive rail with the one on the
// negative rail and gives a full-swing logic bit, so the analog classifier
// hands the decision logic a digital value with no ADC in between.
// out = 1 when i_pos - i_neg + OFFSET >= 0 (own convention, matching the
// linear classifiers: a non-negative margin selects the pair's second class).
// OFFSET is an input-referred offset current, 0 for an ideal comparator.
//
// Interface: i_pos / i_neg rail currents (amperes), out the decision bit.
// Timing: static model; decision delay is not modelled.
module current_comparator #(
  parameter real OFFSET = 0.0
) (
  input  real  i_pos,
  input  real  i_neg,
  output logic out
);

  assign out = (i_pos - i_neg + OFFSET) >= 0.0;

endmodule
