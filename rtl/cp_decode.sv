// cp_decode: co-processor extension of SERV's instruction decoder.
//
// SERV recognises a co-processor instruction by its opcode (R-type,
// 0110011) together with instruction bit 25 (funct7 = 0000001). For such an
// instruction this block forwards funct3 as the co-processor's inst_id and,
// when SERV's FSM signals that rs1 and rs2 have been fully shifted into the
// operand registers (ops_done), raises cp_valid for one cycle. From then
// until the co-processor answers with cp_ready the core is held (stall);
// the cycle cp_ready arrives, the write-back path is triggered (rd_wen)
// with the destination register taken from the rd field, so the
// co-processor's result lands in rd like any R-type result.
//
// Interface: clk, rst (synchronous, active high); instr (32 bits, the
// instruction being executed); ops_done (pulse from the core's FSM);
// cp_ready, from the co-processor. Outputs: is_cp, cp_valid, inst_id,
// stall, rd_wen, rd_addr.
// Timing: cp_valid is combinational from ops_done; stall is high from the
// cycle after cp_valid until cp_ready; rd_wen equals cp_ready while a call
// is pending.
//
// From the paper: detection by opcode and bit 25, funct3 as the operation
// code, the ready/valid handshake, stalling until the response and
// triggering write-back. This design's own choices: the ops_done strobe as
// the boundary between operand transfer and the call, and the pending flag
// that ignores a second ops_done while a call is outstanding.
module cp_decode
  import mlp_cp_pkg::*;
(
  input  logic            clk,
  input  logic            rst,
  input  logic [XLEN-1:0] instr,
  input  logic            ops_done,
  input  logic            cp_ready,
  output logic            is_cp,
  output logic            cp_valid,
  output logic [2:0]      inst_id,
  output logic            stall,
  output logic            rd_wen,
  output logic [4:0]      rd_addr
);

  logic pending;

  assign is_cp    = (instr[6:0] == OPCODE_OP) && instr[CP_BIT];
  assign inst_id  = instr[14:12];
  assign rd_addr  = instr[11:7];
  assign cp_valid = is_cp && ops_done && !pending;
  assign stall    = pending;
  assign rd_wen   = pending && cp_ready;

  always_ff @(posedge clk) begin
    if (rst)           pending <= 1'b0;
    else if (cp_valid) pending <= 1'b1;
    else if (cp_ready) pending <= 1'b0;
  end

  // Handshake rules: a response only answers an outstanding call, and a
  // new call is never issued while one is outstanding.
  a_ready_answers : assert property (@(posedge clk) disable iff (rst)
                                     cp_ready |-> pending);
  a_one_call : assert property (@(posedge clk) disable iff (rst)
                                cp_valid |-> !pending);

endmodule
