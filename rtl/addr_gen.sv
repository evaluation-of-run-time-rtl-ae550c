// addr_gen: accurate adder for addresses and control-flow targets.
//
// Computes base + imm with an ordinary exact adder, never the error-controllable
// one, because an approximate address or jump target is not acceptable. The base is
// rs1 for loads, stores and jalr (bit 0 of a jalr target is cleared) and pc for jal,
// branches and auipc. Combinational. That such additions use a separate accurate
// adder is published; the base selection is the standard RISC-V one.
module addr_gen
  import approx_pkg::*;
(
  input  logic [6:0]      opcode,
  input  logic [XLEN-1:0] pc,
  input  logic [XLEN-1:0] rs1,
  input  logic [XLEN-1:0] imm,
  output logic [XLEN-1:0] addr
);
  logic            use_rs1;
  logic [XLEN-1:0] sum;

  assign use_rs1 = (opcode == OPC_LOAD) || (opcode == OPC_STORE) || (opcode == OPC_JALR);
  assign sum     = (use_rs1 ? rs1 : pc) + imm;
  assign addr    = (opcode == OPC_JALR) ? {sum[XLEN-1:1], 1'b0} : sum;
endmodule
