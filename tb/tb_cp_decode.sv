// tb_cp_decode: instruction detection and handshake of the decode extension.
//
// Drives R-type instructions with and without bit 25 set and other opcodes,
// checks is_cp, inst_id and rd_addr, and runs calls with a co-processor
// model that answers after a random delay: cp_valid must pulse exactly on
// ops_done of a co-processor instruction, stall must hold until cp_ready,
// rd_wen must coincide with the answer, and a repeated ops_done during a
// pending call must not issue a second one.
module tb_cp_decode;
  import mlp_sched_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic        rst, ops_done, cp_ready;
  logic [31:0] instr;
  logic        is_cp, cp_valid, stall, rd_wen;
  logic [2:0]  inst_id;
  logic [4:0]  rd_addr;

  cp_decode dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    rst = 1; ops_done = 0; cp_ready = 0; instr = '0;
    repeat (3) @(posedge clk);
    rst = 0;
    // decoding
    for (int t = 0; t < 200; t++) begin
      logic [31:0] ins;
      bit exp;
      ins = $urandom;
      if (t % 4 == 0) ins[6:0] = 7'b0110011;
      if (t % 8 == 0) ins[25]  = 1'b1;
      instr = ins;
      #1;
      exp = (ins[6:0] == 7'b0110011) && ins[25];
      check(is_cp == exp, "is_cp");
      check(inst_id == ins[14:12], "inst_id");
      check(rd_addr == ins[11:7], "rd_addr");
      check(!cp_valid, "no cp_valid without ops_done");
      @(negedge clk);
    end
    // handshake
    for (int t = 0; t < 40; t++) begin
      int delay;
      bit cpins;
      delay = int'($urandom_range(4, 1));
      cpins = (t % 3 != 2);
      instr = cpins ? cp_instr(3'(t % 2), 5'(t), 5'd1, 5'd2)
                    : {7'b0000000, 5'd2, 5'd1, 3'b000, 5'd3, 7'b0110011};
      @(negedge clk);
      ops_done = 1;
      #1;
      check(cp_valid == cpins, "cp_valid on ops_done");
      @(negedge clk);
      ops_done = 0;
      if (cpins) begin
        for (int d = 1; d < delay; d++) begin
          check(stall, "stall while pending");
          check(!rd_wen, "no rd_wen before answer");
          // a stray ops_done while pending must not issue a new call
          ops_done = (d == 1);
          #1;
          check(!cp_valid, "no second call while pending");
          @(negedge clk);
          ops_done = 0;
        end
        cp_ready = 1;
        #1;
        check(stall, "stall in answer cycle");
        check(rd_wen, "rd_wen with answer");
        check(rd_addr == 5'(t), "rd_addr at write-back");
        @(negedge clk);
        cp_ready = 0;
        #1;
        check(!stall, "stall released");
      end else begin
        check(!stall, "no stall for plain R-type");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
