// adder_tree: balanced tree that adds N signed operands.
//
// The N inputs (the products of the bespoke multipliers plus the selected
// partial sum) are sign-extended to the output width and added pairwise,
// level by level, in ceil(log2 N) levels; an odd operand at a level passes
// on to the next one. The result is taken modulo 2^OW.
//
// Interface: in[N] (IW bits signed each) in, sum (OW bits) out.
// Timing: purely combinational.
//
// From the paper: an adder tree accumulates the products together with the
// current partial sum. This design's choice: the balanced pairwise shape.
module adder_tree #(
  parameter int unsigned N  = 17,  // number of operands
  parameter int unsigned IW = 32,  // operand width
  parameter int unsigned OW = 32   // result width
) (
  input  logic signed [IW-1:0] in [N],
  output logic signed [OW-1:0] sum
);

  localparam int unsigned LEVELS = (N > 1) ? $clog2(N) : 1;

  logic signed [OW-1:0] lvl [LEVELS+1][N];

  always_comb begin
    int unsigned cnt;
    for (int l = 0; l <= LEVELS; l++)
      for (int i = 0; i < N; i++)
        lvl[l][i] = '0;
    for (int i = 0; i < N; i++)
      lvl[0][i] = OW'(in[i]);
    cnt = N;
    for (int l = 0; l < LEVELS; l++) begin
      for (int i = 0; i < N / 2 + 1; i++) begin
        if (2 * i + 1 < cnt)      lvl[l+1][i] = lvl[l][2*i] + lvl[l][2*i+1];
        else if (2 * i + 1 == cnt) lvl[l+1][i] = lvl[l][2*i];
      end
      cnt = (cnt + 1) / 2;
    end
    sum = lvl[LEVELS][0];
  end

endmodule
