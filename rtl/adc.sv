// adc: behavioural model of the sensor-input analog-to-digital converter.
// Not synthesizable logic: it stands for a converter whose circuit the
// source design does not give.
//
// Function: a uniform quantiser. The sensor voltage vin, expected in
// [0, V_FS], is cut into 2**BITS equal steps and the index of the step it
// falls in is returned (floor quantisation), clamped to 0 below the range and
// to 2**BITS-1 at and above full scale. The 4-bit resolution and the [0, 1]
// normalised input range follow the source design; floor rounding, the
// clamping and full scale equal to the 1 V analog supply are own choices.
//
// Timing: the model converts instantly; the conversion time of the real
// converter (which hides the settling time of the analog classifiers) is
// not modelled, since the whole classifier has no clock.
module adc #(
  parameter int unsigned BITS = svm_pkg::FEAT_W,
  parameter real         V_FS = 1.0
) (
  input  real              vin,   // sensor voltage, volts
  output logic [BITS-1:0]  code   // quantised feature
);

  localparam int unsigned LEVELS = 2 ** BITS;

  always_comb begin
    real scaled;
    scaled = vin / V_FS * real'(LEVELS);
    if (scaled <= 0.0)
      code = '0;
    else if (scaled >= real'(LEVELS - 1))
      code = BITS'(LEVELS - 1);
    else
      code = BITS'($rtoi(scaled));
  end

endmodule
