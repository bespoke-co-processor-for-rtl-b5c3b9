// tb_bespoke_coproc: weighted sums folded onto the bespoke co-processor.
//
// Three co-processors are tested side by side:
//   0: the four-multiplier, 16-bit-input example configuration with
//      constants -4, -3, 5, 7 and the eight weights 4, 2, -8, 7, -3, -4, 5, 7;
//   1: the main configuration, sixteen multipliers, 4-bit inputs;
//   2: twelve multipliers with 5-bit inputs.
// For each, random neurons (random weights and activations) are scheduled
// by the greedy scheduler of mlp_sched_pkg and run call by call. While
// operands are "shifting in" the registers and inst_id carry random values
// with valid low, which must leave the result alone. After every call the
// result must equal the running sum computed in the testbench from the
// schedule, ready must rise exactly one cycle after valid, and the final
// result must equal the plain dot product. The example is also run with a
// hand-made three-call schedule, the number of calls the example needs.
// A fourth co-processor with C_0 = 3 and C_1 = 15 checks that an activation
// placed in both I_0 and I_1 is multiplied by 18.
module tb_bespoke_coproc;
  import mlp_sched_pkg::*;

  localparam int NI = 3;
  localparam int LS [NI] = '{16, 4, 5};
  localparam int KS [NI] = '{4, 16, 12};
  localparam int C0 [4]  = '{-4, -3, 5, 7};
  localparam int C1 [16] = mlp_cp_pkg::DEF_COEFS;
  localparam int C2 [12] = mlp_cp_pkg::SPD_COEFS;

  logic clk = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_first = 0, n_comp = 0, n_gated = 0;
  logic [31:0] last [NI] = '{default: '0};  // result left by the previous neuron

  logic        rst;
  logic [31:0] reg_a [NI], reg_b [NI], result [NI];
  logic [2:0]  inst_id [NI];
  logic        valid [NI], ready [NI];

  bespoke_coproc #(.L(16), .K(4),  .CW(4), .COEFS(C0)) u0 (
    .clk, .rst, .reg_a(reg_a[0]), .reg_b(reg_b[0]), .inst_id(inst_id[0]),
    .valid(valid[0]), .ready(ready[0]), .result(result[0]));
  bespoke_coproc u1 (
    .clk, .rst, .reg_a(reg_a[1]), .reg_b(reg_b[1]), .inst_id(inst_id[1]),
    .valid(valid[1]), .ready(ready[1]), .result(result[1]));
  bespoke_coproc #(.L(5), .K(12), .CW(4), .COEFS(C2)) u2 (
    .clk, .rst, .reg_a(reg_a[2]), .reg_b(reg_b[2]), .inst_id(inst_id[2]),
    .valid(valid[2]), .ready(ready[2]), .result(result[2]));

  // The example with C_0 = 3 and C_1 = 15 (5-bit constants).
  localparam int C3 [16] = '{3, 15, -16, -7, -6, -5, -4, -3, -2, -1, 1, 2, 4, 5, 6, 7};
  logic [31:0] reg_a3, reg_b3, result3;
  logic [2:0]  inst_id3;
  logic        valid3 = 0, ready3;
  bespoke_coproc #(.L(4), .K(16), .CW(5), .COEFS(C3)) u3 (
    .clk, .rst, .reg_a(reg_a3), .reg_b(reg_b3), .inst_id(inst_id3),
    .valid(valid3), .ready(ready3), .result(result3));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic int coef(input int d, input int j);
    case (d)
      0:       return C0[j];
      1:       return C1[j];
      default: return C2[j];
    endcase
  endfunction

  // Runs one neuron on co-processor d and checks every call.
  task automatic run_neuron(input int d, input int w[], input int x[]);
    int k = KS[d], l = LS[d];
    int cf[] = new[k];
    int sched[$];
    sched_stats_t st;
    int acc = 0;
    foreach (cf[j]) cf[j] = coef(d, j);
    schedule(cf, w, sched, st);
    for (int c = 0; c < st.calls; c++) begin
      logic [31:0] a, b;
      int part = 0;
      // operands in flux: random register contents, valid low
      for (int s = 0; s < int'($urandom_range(3, 1)); s++) begin
        @(negedge clk);
        reg_a[d] = $urandom; reg_b[d] = $urandom; inst_id[d] = 3'($urandom);
        valid[d] = 0;
        n_gated++;
        @(posedge clk); #1;
        check(result[d] == ((c == 0) ? last[d] : 32'(acc)), "result held while valid low");
        check(!ready[d], "no ready without valid");
      end
      pack(l, k, sched, c, x, a, b);
      for (int j = 0; j < k; j++)
        if (sched[c * k + j] >= 0) part += cf[j] * x[sched[c * k + j]];
      acc = (c == 0) ? part : acc + part;
      @(negedge clk);
      reg_a[d] = a; reg_b[d] = b;
      inst_id[d] = (c == 0) ? 3'b000 : 3'b001;
      if (c == 0) n_first++; else n_comp++;
      valid[d] = 1;
      @(negedge clk);
      valid[d] = 0;
      reg_a[d] = $urandom; reg_b[d] = $urandom;
      check(ready[d], "ready one cycle after valid");
      check(result[d] == 32'(acc), $sformatf("call %0d of %0d on cp%0d", c, st.calls, d));
      @(negedge clk);
      check(!ready[d], "ready is a single pulse");
    end
    check(result[d] == 32'(dot(w, x)), $sformatf("dot product on cp%0d", d));
    last[d] = result[d];
  endtask

  initial begin
    rst = 1;
    for (int d = 0; d < NI; d++) begin
      reg_a[d] = $urandom; reg_b[d] = $urandom; inst_id[d] = 3'b001; valid[d] = 0;
    end
    repeat (3) @(posedge clk);
    for (int d = 0; d < NI; d++) check(result[d] == 0 && !ready[d], "reset state");
    rst = 0;
    begin
      // the example with four multipliers
      automatic int w[] = '{4, 2, -8, 7, -3, -4, 5, 7};
      automatic int x[] = new[8];
      for (int r = 0; r < 20; r++) begin
        foreach (x[i]) x[i] = srand(16);
        run_neuron(0, w, x);
      end
    end
    begin
      // The same example with a hand-made three-call schedule (fields
      // I_0..I_3 hold x indices; -1 is an empty field):
      //   call 1: x2*(-4) + x4*(-3) + x6*5 + x3*7
      //   call 2: x2*(-4) + x0*(-3) + x1*5 + x7*7
      //   call 3: x5*(-4) + x1*(-3)        + x0*7
      automatic int w[] = '{4, 2, -8, 7, -3, -4, 5, 7};
      automatic int x[] = new[8];
      automatic int hand[$] = '{2, 4, 6, 3,  2, 0, 1, 7,  5, 1, -1, 0};
      automatic logic [31:0] a, b;
      automatic int t0;
      foreach (x[i]) x[i] = srand(16);
      for (int c = 0; c < 3; c++) begin
        pack(16, 4, hand, c, x, a, b);
        @(negedge clk);
        reg_a[0] = a; reg_b[0] = b; inst_id[0] = (c == 0) ? 3'b000 : 3'b001; valid[0] = 1;
        t0 = int'($time);
        @(negedge clk);
        valid[0] = 0;
        check(ready[0] && int'($time) - t0 == 10, "hand schedule: one-cycle answer");
      end
      check(result[0] == 32'(dot(w, x)), "hand schedule: three calls give the weighted sum");
      last[0] = result[0];
    end
    for (int d = 1; d < NI; d++) begin
      for (int r = 0; r < 60; r++) begin
        automatic int n = int'($urandom_range(80, 1));
        automatic int w[] = new[n];
        automatic int x[] = new[n];
        foreach (w[i]) w[i] = srand(4);
        foreach (x[i]) x[i] = srand(LS[d]);
        if (r == 0) foreach (x[i]) x[i] = -(1 << (LS[d] - 1));  // extreme inputs
        run_neuron(d, w, x);
      end
    end
    // x * 18 with C_0 = 3 and C_1 = 15: x goes into both I_0 and I_1,
    // i.e. the 8 most significant bits of rs1.
    for (int r = 0; r < 16; r++) begin
      automatic int x = r - 8;
      @(negedge clk);
      reg_a3 = {4'(x), 4'(x), 24'h0}; reg_b3 = '0; inst_id3 = 3'b000; valid3 = 1;
      @(negedge clk);
      valid3 = 0;
      reg_a3 = $urandom;
      check(ready3 && result3 == 32'(18 * x), "x*18 from the 3 and 15 multipliers");
    end
    check(n_first > 0 && n_comp > 0 && n_gated > 0, "all call kinds seen");
    $display("calls: first=%0d comp=%0d gated cycles=%0d", n_first, n_comp, n_gated);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
