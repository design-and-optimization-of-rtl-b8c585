// ovo_encoder: decision-making circuit of the one-vs-one SVM.
//
// Maps the N_PAIRS classifier bits straight to a class label, with no vote
// counters or argmax circuit: the mapping is a constant truth table of
// 2**N_PAIRS entries, indexed by the bit pattern. The table is worked out at
// elaboration time by counting, for every possible pattern, the pairwise wins
// of each class and taking the class with most wins, so after synthesis only
// the combinational encoder is left (for three classes a 3-to-2 encoder).
//
// Follows the source design: one bit per OvO pair, direct encoding instead
// of counters and argmax, label out. Own choices: bit p = 1 means the second
// class c_j of pair p wins, bit p = 0 the first class c_i (pairs numbered as
// in svm_pkg), and on a tie, including the cyclic patterns of three classes
// where every class wins once, the lowest-numbered tied class is output.
//
// Timing: purely combinational.
module ovo_encoder #(
  parameter int unsigned N_CLASSES = svm_pkg::N_CLASSES,
  localparam int unsigned N_PAIRS = svm_pkg::n_pairs(N_CLASSES),
  localparam int unsigned CLS_W   = svm_pkg::class_w(N_CLASSES)
) (
  input  logic [N_PAIRS-1:0] bits,  // one bit per OvO pair
  output logic [CLS_W-1:0]   label  // predicted class
);

  localparam int unsigned N_PATTERNS = 2 ** N_PAIRS;

  typedef logic [N_PATTERNS-1:0][CLS_W-1:0] table_t;

  // Class chosen for every pattern of classifier bits.
  function automatic table_t build_table();
    table_t t;
    int unsigned votes [N_CLASSES];
    int unsigned p, best;
    for (int unsigned pat = 0; pat < N_PATTERNS; pat++) begin
      for (int unsigned c = 0; c < N_CLASSES; c++) votes[c] = 0;
      p = 0;
      for (int unsigned i = 0; i < N_CLASSES; i++) begin
        for (int unsigned j = i + 1; j < N_CLASSES; j++) begin
          if (pat[p]) votes[j]++;
          else        votes[i]++;
          p++;
        end
      end
      best = 0;
      for (int unsigned c = 1; c < N_CLASSES; c++)
        if (votes[c] > votes[best]) best = c;
      t[pat] = CLS_W'(best);
    end
    return t;
  endfunction

  localparam table_t TABLE = build_table();

  assign label = TABLE[bits];

endmodule
