// bespoke_mult: multiplier of a runtime input by a hardwired constant.
//
// One operand, x, is an L-bit two's-complement activation; the other, C, is
// fixed at elaboration. The product is built as a sum of shifted copies of x,
// one for every set bit of C in CW-bit two's complement, the top bit
// weighted negatively. Since C is a constant, only the adders that its set
// bits call for exist in hardware, which is what makes a by-constant
// multiplier several times smaller than a general one.
//
// Interface: x (L bits, signed) in, p (L+CW bits, signed) out.
// Timing: purely combinational.
//
// From the paper: one operand is a runtime input and the other a predefined
// constant; signed arithmetic; constants in [-8, 7] for 4-bit weights.
// This design's choice: the shift-and-add structure (the paper leaves the
// mapping of each constant to the synthesis tool).
module bespoke_mult #(
  parameter int unsigned L  = 4,   // input width
  parameter int unsigned CW = 4,   // constant width (two's complement)
  parameter int          C  = 3    // the hardwired constant
) (
  input  logic signed [L-1:0]    x,
  output logic signed [L+CW-1:0] p
);

  localparam int unsigned PW = L + CW;
  localparam logic [CW-1:0] CB = CW'(C);

  if (C < -(2 ** (CW - 1)) || C > (2 ** (CW - 1)) - 1) begin : g_range
    $error("bespoke_mult: constant %0d does not fit in %0d bits", C, CW);
  end

  logic signed [PW-1:0] xs;
  assign xs = PW'(x);  // sign-extended

  always_comb begin
    p = '0;
    for (int b = 0; b < CW; b++) begin
      if (CB[b]) begin
        if (b == CW - 1) p = p - (xs <<< b);
        else             p = p + (xs <<< b);
      end
    end
  end

endmodule
