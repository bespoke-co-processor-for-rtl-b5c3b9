// flex_mlp_top: the co-processor side of the accelerated SERV system.
//
// The system pairs the bit-serial SERV RISC-V core with a bespoke MAC
// co-processor. SERV itself (its serial ALU, register file, FSM and the SPI
// link to external memory) is an existing core and is not part of this
// RTL; its signals are ports here. This module holds the two parts that the
// accelerated system adds: the decode extension that recognises
// co-processor instructions and runs the ready/valid handshake, and the
// co-processor with its hardwired constants.
//
// Interface (all from or to SERV): instr, the executing instruction;
// rs1/rs2, SERV's operand registers, which SERV fills serially; ops_done,
// the FSM's pulse once both are complete; rdata, the value to write back;
// rd_wen/rd_addr, the write-back trigger; stall, which holds SERV while a
// call is outstanding; is_cp, the decoded "co-processor instruction" flag.
// Timing: a call's result is written back one cycle after ops_done.
module flex_mlp_top
  import mlp_cp_pkg::*;
#(
  parameter int unsigned L          = DEF_L,
  parameter int unsigned K          = DEF_K,
  parameter int unsigned CW         = DEF_CW,
  parameter int          COEFS [K]  = DEF_COEFS
) (
  input  logic            clk,
  input  logic            rst,
  input  logic [XLEN-1:0] instr,
  input  logic [XLEN-1:0] rs1,
  input  logic [XLEN-1:0] rs2,
  input  logic            ops_done,
  output logic [XLEN-1:0] rdata,
  output logic            rd_wen,
  output logic [4:0]      rd_addr,
  output logic            stall,
  output logic            is_cp
);

  logic       cp_valid;
  logic       cp_ready;
  logic [2:0] inst_id;

  cp_decode u_dec (
    .clk     (clk),
    .rst     (rst),
    .instr   (instr),
    .ops_done(ops_done),
    .cp_ready(cp_ready),
    .is_cp   (is_cp),
    .cp_valid(cp_valid),
    .inst_id (inst_id),
    .stall   (stall),
    .rd_wen  (rd_wen),
    .rd_addr (rd_addr)
  );

  bespoke_coproc #(.L(L), .K(K), .CW(CW), .COEFS(COEFS)) u_cp (
    .clk    (clk),
    .rst    (rst),
    .reg_a  (rs1),
    .reg_b  (rs2),
    .inst_id(inst_id),
    .valid  (cp_valid),
    .ready  (cp_ready),
    .result (rdata)
  );

endmodule
