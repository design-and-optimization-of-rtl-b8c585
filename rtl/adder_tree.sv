// adder_tree: combinational balanced binary adder tree.
//
// Sums N signed operands of width IN_W by adding neighbours pairwise, level
// after level, as in the datapath of the linear classifier (products enter in
// pairs, pair sums are added again until one sum is left). Odd operands at
// a level pass to the next level unchanged. Each level widens the sum by one
// bit, so the result, of width IN_W + ceil(log2 N), never overflows.
//
// No clock: the tree is purely combinational, matching the memory-less,
// fully-parallel style of the classifier.
module adder_tree #(
  parameter int unsigned N    = 5,
  parameter int unsigned IN_W = 13,
  localparam int unsigned LEVELS = (N <= 1) ? 0 : $clog2(N),
  localparam int unsigned OUT_W  = IN_W + LEVELS
) (
  input  logic signed [N-1:0][IN_W-1:0] operands,
  output logic signed [OUT_W-1:0]       sum
);

  // node[l][k]: k-th partial sum at level l, kept at the full output width.
  logic signed [OUT_W-1:0] node [LEVELS+1][N];

  always_comb begin
    int unsigned count;
    for (int l = 0; l <= int'(LEVELS); l++)
      for (int k = 0; k < int'(N); k++)
        node[l][k] = '0;
    for (int k = 0; k < int'(N); k++)
      node[0][k] = OUT_W'(signed'(operands[k]));
    count = N;
    for (int l = 0; l < int'(LEVELS); l++) begin
      for (int k = 0; k < int'((count + 1) / 2); k++) begin
        if (2 * k + 1 < int'(count))
          node[l+1][k] = node[l][2*k] + node[l][2*k+1];
        else
          node[l+1][k] = node[l][2*k];
      end
      count = (count + 1) / 2;
    end
    sum = node[LEVELS][0];
  end

endmodule
