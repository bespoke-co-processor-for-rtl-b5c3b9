// tb_flex_mlp_top: end-to-end MLP inference through the co-processor path.
//
// The top is used at its default parameters (sixteen bespoke multipliers,
// 4-bit inputs). A cycle model of the core's side stands in for SERV: for
// every co-processor call it presents the instruction, shifts rs1 and rs2
// into the operand registers one bit per cycle for 32 cycles (so their
// contents change every cycle), pulses ops_done, waits out the stall until
// rd_wen, and then spends 32 cycles shifting the result into rd. Between
// neurons it executes ordinary R-type instructions (the bias addition),
// which the co-processor must ignore.
//
// The workload is one inference of a 34-9-6 MLP with random 4-bit weights,
// random biases and random signed 4-bit inputs. Hidden outputs get the
// bias, ReLU and a requantisation to 4 bits (shift right by 3, clip to 7),
// computed in "software" (the testbench); the class is the arg-max of the
// outputs. Every neuron's weighted sum is compared with a dot product
// computed in the testbench, and the class with a reference inference.
// Each mechanism is counted and must occur at least once: MLP_First and
// MLP_Comp calls, a weight mapped directly, one split over two multipliers
// in a call, one split across calls, stall cycles, operand cycles with valid
// low, and ignored non-co-processor instructions. The co-processor must
// answer exactly one cycle after ops_done.
module tb_flex_mlp_top;
  import mlp_sched_pkg::*;

  localparam int L = 4;
  localparam int K = 16;
  localparam int COEFS [K] = mlp_cp_pkg::DEF_COEFS;
  localparam int NIN = 34, NHID = 9, NOUT = 6;

  logic clk = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_first = 0, n_comp = 0, n_direct = 0, n_pair = 0, n_partial = 0;
  int n_stall = 0, n_flux = 0, n_plain = 0;

  logic        rst, ops_done;
  logic [31:0] instr, rs1, rs2, rdata;
  logic        rd_wen, stall, is_cp;
  logic [4:0]  rd_addr;

  flex_mlp_top dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // One instruction executed by the core model; returns rd's value for a
  // co-processor instruction.
  task automatic exec(input logic [31:0] ins, input logic [31:0] a,
                      input logic [31:0] b, output logic [31:0] rd_val);
    logic [31:0] held;
    int wait_cycles;
    @(negedge clk);
    instr = ins;
    held = rdata;
    // operands shift in LSB first, one bit per cycle
    for (int i = 0; i < 32; i++) begin
      rs1 = {a[i], rs1[31:1]};
      rs2 = {b[i], rs2[31:1]};
      @(negedge clk);
      n_flux++;
      check(!rd_wen && rdata == held, "no update while operands shift in");
    end
    check(rs1 == a && rs2 == b, "operands complete");
    ops_done = 1;
    @(negedge clk);
    ops_done = 0;
    wait_cycles = 0;
    while (!rd_wen && wait_cycles < 8) begin
      check(stall == is_cp, "stall only for co-processor calls");
      if (stall) n_stall++;
      if (!is_cp) break;
      @(negedge clk);
      wait_cycles++;
    end
    if (is_cp) begin
      check(rd_wen && wait_cycles == 0, "answer one cycle after ops_done");
      check(rd_addr == ins[11:7], "write-back register");
      rd_val = rdata;
      n_stall++;  // the answer cycle itself holds the core
    end else begin
      check(!rd_wen && rdata == held, "plain instruction ignored");
      rd_val = held;
      n_plain++;
    end
    // serial write-back into rd
    repeat (32) @(negedge clk);
  endtask

  // One neuron: co-processor calls, then the bias add as a plain R-type.
  task automatic neuron(input int w[], input int x[], output int s);
    int sched[$];
    sched_stats_t st;
    logic [31:0] a, b, r;
    schedule(COEFS, w, sched, st);
    n_direct += st.direct; n_pair += st.pair; n_partial += st.partial;
    for (int c = 0; c < st.calls; c++) begin
      pack(L, K, sched, c, x, a, b);
      exec(cp_instr((c == 0) ? 3'b000 : 3'b001, 5'd10, 5'd11, 5'd12), a, b, r);
      if (c == 0) n_first++; else n_comp++;
    end
    check(r == 32'(dot(w, x)), "neuron weighted sum");
    s = int'(r);
    // add rd, rd, rbias: an ordinary R-type, funct7 = 0
    exec({7'b0000000, 5'd13, 5'd10, 3'b000, 5'd10, 7'b0110011}, $urandom, $urandom, r);
  endtask

  function automatic int requant(input int v);
    int q = (v < 0) ? 0 : (v >>> 3);
    return (q > 7) ? 7 : q;
  endfunction

  initial begin
    automatic int w1[NHID][NIN];
    automatic int w2[NOUT][NHID];
    automatic int b1[NHID], b2[NOUT];
    automatic int xin[] = new[NIN];
    automatic int h[] = new[NHID];
    automatic int y[NOUT];
    automatic int ref_h[NHID];
    automatic int cls, ref_cls, s;
    rst = 1; ops_done = 0; instr = '0; rs1 = '0; rs2 = '0;
    repeat (3) @(negedge clk);
    check(rdata == 0 && !rd_wen && !stall, "reset state");
    rst = 0;
    foreach (w1[n, i]) w1[n][i] = srand(4);
    foreach (w2[n, i]) w2[n][i] = srand(4);
    foreach (b1[n]) b1[n] = srand(6);
    foreach (b2[n]) b2[n] = srand(6);
    foreach (xin[i]) xin[i] = srand(4);
    // reference inference
    foreach (ref_h[n]) begin
      automatic int acc = b1[n];
      foreach (xin[i]) acc += w1[n][i] * xin[i];
      ref_h[n] = requant(acc);
    end
    ref_cls = 0;
    begin
      automatic int best = 0;
      for (int n = 0; n < NOUT; n++) begin
        automatic int acc = b2[n];
        foreach (ref_h[i]) acc += w2[n][i] * ref_h[i];
        if (n == 0 || acc > best) begin best = acc; ref_cls = n; end
      end
    end
    // inference through the co-processor
    for (int n = 0; n < NHID; n++) begin
      automatic int wv[] = new[NIN];
      foreach (wv[i]) wv[i] = w1[n][i];
      neuron(wv, xin, s);
      h[n] = requant(s + b1[n]);
      check(h[n] == ref_h[n], "hidden activation");
    end
    cls = 0;
    for (int n = 0; n < NOUT; n++) begin
      automatic int wv[] = new[NHID];
      foreach (wv[i]) wv[i] = w2[n][i];
      neuron(wv, h, s);
      y[n] = s + b2[n];
      if (n == 0 || y[n] > y[cls]) cls = n;
    end
    check(cls == ref_cls, "predicted class");
    $display("class %0d (reference %0d); calls first=%0d comp=%0d", cls, ref_cls, n_first, n_comp);
    $display("products direct=%0d pair=%0d partial=%0d; stall cycles=%0d; operand cycles=%0d; plain instructions=%0d",
             n_direct, n_pair, n_partial, n_stall, n_flux, n_plain);
    check(n_first > 0, "MLP_First used");
    check(n_comp > 0, "MLP_Comp used");
    check(n_direct > 0, "direct mapping used");
    check(n_pair > 0, "split within a call used");
    check(n_partial > 0, "split across calls used");
    check(n_stall > 0, "stall seen");
    check(n_flux > 0, "valid-gated operand cycles seen");
    check(n_plain > 0, "plain instructions seen");
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
