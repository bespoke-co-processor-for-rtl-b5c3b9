// tb_mlp_workloads: one inference of each evaluated MLP topology.
//
// Runs the nine healthcare MLP topologies (inputs-hidden-outputs):
// AffectiveRoad 63-9-3, Arrhythmia 279-9-11, Dermatology 34-9-6,
// DriveDB 61-9-3, ECG5000 140-3-5, HAR 561-7-6, SPD 75-9-3,
// StressInNurses 72-9-3 and WESAD 96-9-3. Trained weights are not
// available, so each model gets random 4-bit weights, random biases and a
// random input vector; the topology, and hence the number of products, is
// the real one. SPD uses 5-bit activations and the twelve-multiplier
// co-processor with 5-bit inputs; all others use the default sixteen
// multipliers with 4-bit inputs. The core's side is modelled at transaction
// level: operands are presented at once, ops_done is pulsed and the answer
// must come one cycle later. Every weighted sum is checked against a dot
// product, and the predicted class against a reference inference. The
// number of co-processor calls per inference is printed for each model.
module tb_mlp_workloads;
  import mlp_sched_pkg::*;

  localparam int C4 [16] = mlp_cp_pkg::DEF_COEFS;
  localparam int C5 [12] = mlp_cp_pkg::SPD_COEFS;
  localparam int NM = 9;
  localparam string NAMES [NM] = '{"AffectiveRoad", "Arrhythmia", "Dermatology", "DriveDB",
                                   "ECG5000", "HAR", "SPD", "StressInNurses", "WESAD"};
  localparam int TOPO [NM][3] = '{'{63, 9, 3}, '{279, 9, 11}, '{34, 9, 6}, '{61, 9, 3},
                                  '{140, 3, 5}, '{561, 7, 6}, '{75, 9, 3}, '{72, 9, 3},
                                  '{96, 9, 3}};

  logic clk = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic        rst;
  logic        ops_done [2];
  logic [31:0] instr [2], rs1 [2], rs2 [2], rdata [2];
  logic        rd_wen [2], stall [2], is_cp [2];
  logic [4:0]  rd_addr [2];

  flex_mlp_top u4 (
    .clk, .rst, .instr(instr[0]), .rs1(rs1[0]), .rs2(rs2[0]), .ops_done(ops_done[0]),
    .rdata(rdata[0]), .rd_wen(rd_wen[0]), .rd_addr(rd_addr[0]), .stall(stall[0]),
    .is_cp(is_cp[0]));
  flex_mlp_top #(.L(5), .K(12), .CW(4), .COEFS(C5)) u5 (
    .clk, .rst, .instr(instr[1]), .rs1(rs1[1]), .rs2(rs2[1]), .ops_done(ops_done[1]),
    .rdata(rdata[1]), .rd_wen(rd_wen[1]), .rd_addr(rd_addr[1]), .stall(stall[1]),
    .is_cp(is_cp[1]));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // Weighted sum on co-processor d; returns the sum and adds to calls.
  task automatic wsum(input int d, input int w[], input int x[],
                      inout int calls, output int s);
    int l = (d == 0) ? 4 : 5;
    int k = (d == 0) ? 16 : 12;
    int cf[] = new[k];
    int sched[$];
    sched_stats_t st;
    logic [31:0] a, b;
    foreach (cf[j]) cf[j] = (d == 0) ? C4[j] : C5[j];
    schedule(cf, w, sched, st);
    for (int c = 0; c < st.calls; c++) begin
      pack(l, k, sched, c, x, a, b);
      @(negedge clk);
      instr[d] = cp_instr((c == 0) ? 3'b000 : 3'b001, 5'd10, 5'd11, 5'd12);
      rs1[d] = a; rs2[d] = b; ops_done[d] = 1;
      @(negedge clk);
      ops_done[d] = 0;
      check(rd_wen[d], "answer one cycle after ops_done");
    end
    calls += st.calls;
    s = int'(rdata[d]);
    check(s == dot(w, x), "weighted sum");
  endtask

  function automatic int requant(input int v, input int l);
    int q = (v < 0) ? 0 : (v >>> 3);
    int mx = (1 << (l - 1)) - 1;
    return (q > mx) ? mx : q;
  endfunction

  task automatic run_model(input int m);
    int d = (NAMES[m] == "SPD") ? 1 : 0;
    int l = (d == 0) ? 4 : 5;
    int nin = TOPO[m][0], nh = TOPO[m][1], no = TOPO[m][2];
    int x[] = new[nin];
    int h[] = new[nh];
    int rh[] = new[nh];
    int calls = 0, macs = nin * nh + nh * no;
    int cls = 0, rcls = 0, best = 0, rbest = 0, s;
    foreach (x[i]) x[i] = srand(l);
    for (int n = 0; n < nh; n++) begin
      int w[] = new[nin];
      int bias = srand(6);
      foreach (w[i]) w[i] = srand(4);
      rh[n] = requant(dot(w, x) + bias, l);
      wsum(d, w, x, calls, s);
      h[n] = requant(s + bias, l);
    end
    for (int n = 0; n < no; n++) begin
      int w[] = new[nh];
      int bias = srand(6);
      int ry, y;
      foreach (w[i]) w[i] = srand(4);
      ry = dot(w, rh) + bias;
      wsum(d, w, h, calls, s);
      y = s + bias;
      if (n == 0 || ry > rbest) begin rbest = ry; rcls = n; end
      if (n == 0 || y > best) begin best = y; cls = n; end
    end
    check(cls == rcls, "predicted class");
    $display("%-15s %0d-%0d-%0d  MACs=%0d  calls=%0d  MACs/call=%0.2f  class=%0d",
             NAMES[m], nin, nh, no, macs, calls, real'(macs) / calls, cls);
  endtask

  initial begin
    rst = 1;
    for (int d = 0; d < 2; d++) begin
      ops_done[d] = 0; instr[d] = '0; rs1[d] = '0; rs2[d] = '0;
    end
    repeat (3) @(negedge clk);
    rst = 0;
    for (int m = 0; m < NM; m++) run_model(m);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
