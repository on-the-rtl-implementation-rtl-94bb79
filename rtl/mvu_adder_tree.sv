// mvu_adder_tree -- sums the N signed lane products of one PE.
//
// A balanced binary tree written as a level-by-level pairwise reduction:
// on each level neighbouring partial sums are added in pairs (an odd one
// out is passed on), so N operands need ceil(log2 N) adder levels. The
// paper uses a "simple adder tree" behind the binary-weight and standard
// lanes; the pairing order and carrying OUT_W bits at every level are this
// design's choices.
//
// Interface: combinational, in_flat holds operand i at [i*IN_W +: IN_W]
// (signed), sum is their signed total on OUT_W bits.
module mvu_adder_tree #(
  parameter int unsigned N     = 16,
  parameter int unsigned IN_W  = 8,
  parameter int unsigned OUT_W = IN_W + $clog2(N) + 1
) (
  input  logic [N*IN_W-1:0]       in_flat,
  output logic signed [OUT_W-1:0] sum
);

  logic signed [OUT_W-1:0] t [N];

  always_comb begin
    for (int i = 0; i < N; i++) t[i] = OUT_W'(signed'(in_flat[i*IN_W +: IN_W]));
    for (int w = N; w > 1; w = (w + 1) / 2) begin
      for (int i = 0; i < w / 2; i++) t[i] = t[2*i] + t[2*i+1];
      if (w % 2 == 1) t[w/2] = t[w-1];
    end
    sum = t[0];
  end

endmodule
