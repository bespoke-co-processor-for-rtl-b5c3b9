// tb_bespoke_mult: exhaustive check of the by-constant multiplier.
//
// Instantiates one multiplier for every constant of [-8, 7] with 4-bit
// inputs (the main configuration), plus 5-bit-input multipliers with 8-bit
// constants at the ends and middle of their range, and compares every
// product over the whole input range with the integer product.
module tb_bespoke_mult;

  localparam int NC = 16;
  localparam int W8 [4] = '{-128, 127, 93, -3};

  logic clk = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic signed [3:0] x4;
  logic signed [7:0] p4 [NC];
  for (genvar c = 0; c < NC; c++) begin : g_c4
    bespoke_mult #(.L(4), .CW(4), .C(c - 8)) u (.x(x4), .p(p4[c]));
  end

  logic signed [4:0]  x5;
  logic signed [12:0] p5 [4];
  for (genvar c = 0; c < 4; c++) begin : g_c8
    bespoke_mult #(.L(5), .CW(8), .C(W8[c])) u (.x(x5), .p(p5[c]));
  end

  initial begin
    for (int x = -8; x < 8; x++) begin
      x4 = 4'(x);
      @(posedge clk);
      for (int c = 0; c < NC; c++) begin
        checks++;
        if (int'(p4[c]) != x * (c - 8)) begin
          failures++;
          $display("FAIL L=4 x=%0d C=%0d got %0d", x, c - 8, p4[c]);
        end
      end
    end
    for (int x = -16; x < 16; x++) begin
      x5 = 5'(x);
      @(posedge clk);
      for (int c = 0; c < 4; c++) begin
        checks++;
        if (int'(p5[c]) != x * W8[c]) begin
          failures++;
          $display("FAIL L=5 x=%0d C=%0d got %0d", x, W8[c], p5[c]);
        end
      end
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
