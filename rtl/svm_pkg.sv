// svm_pkg: types, constants and elaboration-time helpers shared by the
// mixed-kernel, mixed-signal one-vs-one (OvO) SVM.
//
// The OvO scheme trains one binary classifier for every pair of classes
// (c_i, c_j) with i < j. Pairs are numbered in the order they are enumerated,
// (0,1), (0,2), ..., (0,K-1), (1,2), ..., (K-2,K-1), and every bus that
// carries one bit or one parameter per pair uses that numbering.
//
// Sizes that follow the source design: 4-bit uniformly quantised features,
// at most five features per classifier, three classes in every evaluated
// task. Weight and bias widths, and the subthreshold slope factor used by the
// analog models, are this implementation's own choices.
package svm_pkg;

  // Feature code width after the ADC (4-bit uniform quantisation).
  localparam int unsigned FEAT_W = 4;
  // Largest number of features the analog kernel chain supports.
  localparam int unsigned MAX_FEATURES = 5;
  // Default number of classes of the evaluated tasks.
  localparam int unsigned N_CLASSES = 3;
  // Linear-classifier coefficient widths (own choice).
  localparam int unsigned WEIGHT_W = 8;
  localparam int unsigned BIAS_W = 16;

  // Physical constants of the analog behavioural models.
  localparam real V_THERMAL = 0.02585;  // kT/q at 300 K, volts
  localparam real N_SLOPE = 1.5;        // subthreshold slope factor (own choice)

  // Kernel implemented by one binary classifier.
  typedef enum logic {
    KERNEL_LINEAR = 1'b0,  // digital, fed by the ADC codes
    KERNEL_RBF    = 1'b1   // analog, fed by the sensor voltages
  } kernel_e;

  // Number of OvO pairs for k classes.
  function automatic int unsigned n_pairs(input int unsigned k);
    return k * (k - 1) / 2;
  endfunction

  // Index of pair (i, j), i < j, in the enumeration order above.
  function automatic int unsigned pair_index(input int unsigned k,
                                             input int unsigned i,
                                             input int unsigned j);
    int unsigned idx;
    idx = 0;
    for (int unsigned a = 0; a < k; a++) begin
      for (int unsigned b = a + 1; b < k; b++) begin
        if (a == i && b == j) return idx;
        idx++;
      end
    end
    return idx;
  endfunction

  // Width of a class label.
  function automatic int unsigned class_w(input int unsigned k);
    return (k <= 2) ? 1 : $clog2(k);
  endfunction

endpackage
