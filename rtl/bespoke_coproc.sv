// bespoke_coproc: bespoke multiply-accumulate co-processor for MLP inference.
//
// Each call hands the co-processor two 32-bit registers, reg A (rs1) and
// reg B (rs2). They are cut into K fixed L-bit input fields I_0 .. I_{K-1}:
// I_0 is the L most significant bits of reg A, I_1 the next L bits, and so
// on; once reg A holds no further whole field, the numbering continues from
// the MSBs of reg B. Field I_j always feeds the bespoke multiplier with
// constant C_j, so the software chooses which products a call computes by
// where it puts each activation (a zero field adds nothing). An adder tree
// sums the K products with a base value chosen by the first multiplexer:
// 0 when inst_id is MLP_First (funct3 = 000, a new weighted sum), cur_sum
// otherwise (MLP_Comp). The second multiplexer, driven by valid, writes that
// sum into the cur_sum register only once rs1 and rs2 have been fully
// received; while SERV is still shifting operands in, the fields change every
// cycle and the tree's output is ignored. cur_sum is the result returned to
// SERV.
//
// Interface: clk, rst (synchronous, active high), reg_a/reg_b (32 bits),
// inst_id (funct3), valid (one-cycle pulse, operands complete), ready
// (one-cycle pulse, result valid), result (32 bits).
// Timing: cur_sum is written at the clock edge that samples valid; ready is
// high in the following cycle, with result already holding the new sum,
// so a call costs one co-processor cycle. The co-processor can take a new
// call in any cycle.
//
// From the paper (Fig. 1 and Sec. III-B): multipliers by constants fed from
// fixed register positions starting at the MSBs of rs1, the adder tree, the
// inst_id and valid multiplexers, the cur_sum register, the ready/valid pair,
// 16 multipliers at 4 bits or 12 at 5 bits. This design's own choices: a
// 32-bit cur_sum that wraps, the one-cycle ready pulse, synchronous reset of
// cur_sum to 0, and, when 32 is not a multiple of L, leaving the low bits of
// each register unused.
module bespoke_coproc
  import mlp_cp_pkg::*;
#(
  parameter int unsigned L          = DEF_L,      // input (activation) width
  parameter int unsigned K          = DEF_K,      // number of bespoke multipliers
  parameter int unsigned CW         = DEF_CW,     // constant width
  parameter int          COEFS [K]  = DEF_COEFS   // C_0 .. C_{K-1}
) (
  input  logic            clk,
  input  logic            rst,
  input  logic [XLEN-1:0] reg_a,    // rs1
  input  logic [XLEN-1:0] reg_b,    // rs2
  input  logic [2:0]      inst_id,  // funct3
  input  logic            valid,
  output logic            ready,
  output logic [XLEN-1:0] result
);

  localparam int unsigned PER_REG = XLEN / L;  // whole fields per register
  localparam int unsigned PW      = L + CW;    // product width

  if (K > 2 * PER_REG) begin : g_fit
    $error("bespoke_coproc: %0d fields of %0d bits do not fit in rs1 and rs2", K, L);
  end

  // Input fields I_j: MSB-first in reg A, then MSB-first in reg B.
  logic signed [L-1:0]  field [K];
  logic signed [PW-1:0] prod  [K];

  for (genvar j = 0; j < K; j++) begin : g_mul
    localparam int unsigned POS = j % PER_REG;          // slot inside the register
    localparam int unsigned MSB = XLEN - 1 - POS * L;   // its top bit
    if (j < PER_REG) begin : g_a
      assign field[j] = reg_a[MSB -: L];
    end else begin : g_b
      assign field[j] = reg_b[MSB -: L];
    end
    bespoke_mult #(.L(L), .CW(CW), .C(COEFS[j])) u_mul (
      .x(field[j]),
      .p(prod[j])
    );
  end

  // Multiplexer 1 (inst_id): start from 0 or from the current sum.
  logic [XLEN-1:0] cur_sum;
  logic [XLEN-1:0] base;
  assign base = (inst_id == CP_FIRST) ? '0 : cur_sum;

  logic signed [XLEN-1:0] terms [K+1];
  always_comb begin
    for (int j = 0; j < K; j++) terms[j] = XLEN'(prod[j]);
    terms[K] = base;
  end

  logic [XLEN-1:0] tree_sum;
  adder_tree #(.N(K + 1), .IW(XLEN), .OW(XLEN)) u_tree (
    .in (terms),
    .sum(tree_sum)
  );

  // Multiplexer 2 (valid): only a complete operand pair updates cur_sum.
  always_ff @(posedge clk) begin
    if (rst) begin
      cur_sum <= '0;
      ready   <= 1'b0;
    end else begin
      cur_sum <= valid ? tree_sum : cur_sum;
      ready   <= valid;
    end
  end

  assign result = cur_sum;

endmodule
