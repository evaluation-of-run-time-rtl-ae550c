// alu_unit: arithmetic logic execution unit with four circuit slots.
//
// The instruction determination logic recognises RV32I register-register (OP) and
// register-immediate (OP-IMM) instructions from opcode/funct3/funct7 and turns them
// into an alu_op_t. The unit's control register execsr (alucsr) chooses the circuit:
// sel (bits 2:1) drives the result and busy multiplexers and isolates the operands
// of every other slot (they see zeros, so they do not toggle); apx_en (bit 0) and
// err (bits 31:16) go to the selected circuit. Slot I holds the alu circuit with the
// error-controllable adder; slots II-IV are empty in this configuration and return
// 0. For OP-IMM, rs2 already carries the immediate.
// Combinational: result is valid in the cycle the operands are, busy stays low.
// The slot structure and CSR fields are published; decoding details, the
// empty-slot value and operand isolation are this design's.
module alu_unit
  import approx_pkg::*;
(
  input  logic [6:0]      opcode,
  input  logic [2:0]      funct3,
  input  logic [6:0]      funct7,
  input  logic [XLEN-1:0] rs1,
  input  logic [XLEN-1:0] rs2,
  input  execsr_t         execsr,
  output logic [XLEN-1:0] result,
  output logic            busy
);
  logic            is_op, is_imm, is_alu;
  alu_op_t         op;
  logic [XLEN-1:0] a1, b1, r1;

  // instruction determination logic
  assign is_op  = (opcode == OPC_OP) && (funct7 == 7'd0 || funct7 == F7_ALT);
  assign is_imm = (opcode == OPC_OPIMM);
  assign is_alu = is_op || is_imm;

  always_comb begin
    unique case (funct3)
      3'b000:  op = (is_op && funct7[5]) ? ALU_SUB : ALU_ADD;
      3'b001:  op = ALU_SLL;
      3'b010:  op = ALU_SLT;
      3'b011:  op = ALU_SLTU;
      3'b100:  op = ALU_XOR;
      3'b101:  op = funct7[5] ? ALU_SRA : ALU_SRL;
      3'b110:  op = ALU_OR;
      default: op = ALU_AND;
    endcase
  end

  // Circuit I: operands isolated unless selected
  assign a1 = (is_alu && execsr.sel == SLOT_I) ? rs1 : '0;
  assign b1 = (is_alu && execsr.sel == SLOT_I) ? rs2 : '0;

  alu u_circuit_i (.op(op), .a(a1), .b(b1), .apx_en(execsr.apx_en), .err(execsr.err), .result(r1));

  // result MUX and busy MUX (slots II-IV are empty)
  assign result = (execsr.sel == SLOT_I) ? r1 : '0;
  assign busy   = 1'b0;

  // truncation and designer-defined fields: no circuit of this configuration uses them
  logic unused;
  assign unused = (|execsr.trunc) | (|execsr.custom_lo) | (|execsr.custom_hi);
endmodule
