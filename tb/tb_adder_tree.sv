// tb_adder_tree: random check of the adder tree against a plain sum.
//
// Three trees are tested: 17 operands (sixteen products plus the partial
// sum, the main configuration), 13 operands (the 12-multiplier one) and a
// single operand. Operands are random 32-bit values, and the expected sum is
// their total modulo 2^32; a second round uses small values near zero.
module tb_adder_tree;

  logic clk = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic signed [31:0] a17 [17];
  logic signed [31:0] a13 [13];
  logic signed [31:0] a1  [1];
  logic signed [31:0] s17, s13, s1;

  adder_tree #(.N(17), .IW(32), .OW(32)) u17 (.in(a17), .sum(s17));
  adder_tree #(.N(13), .IW(32), .OW(32)) u13 (.in(a13), .sum(s13));
  adder_tree #(.N(1),  .IW(32), .OW(32)) u1  (.in(a1),  .sum(s1));

  initial begin
    for (int t = 0; t < 400; t++) begin
      logic [31:0] e17, e13;
      e17 = 0;
      e13 = 0;
      for (int i = 0; i < 17; i++) begin
        a17[i] = (t < 200) ? $urandom : 32'($signed($urandom_range(256, 0)) - 128);
        e17 += a17[i];
      end
      for (int i = 0; i < 13; i++) begin
        a13[i] = $urandom;
        e13 += a13[i];
      end
      a1[0] = $urandom;
      @(posedge clk);
      checks += 3;
      if (s17 !== e17) begin failures++; $display("FAIL N=17 got %h exp %h", s17, e17); end
      if (s13 !== e13) begin failures++; $display("FAIL N=13 got %h exp %h", s13, e13); end
      if (s1 !== a1[0]) begin failures++; $display("FAIL N=1 got %h exp %h", s1, a1[0]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
