// alu: RV32I arithmetic/logic circuit (Circuit I of the ALU unit).
//
// add and sub go through the error-controllable carry-select adder ecsa32
// (sub as a + ~b + 1); every other operation is exact. The adder's low 16 full
// adders take their error control from err (the CSR bits 31:16): bit i of the adder
// is accurate when apx_en is 0 or err[i] is 1. The upper 16 adder bits are always
// accurate. That mapping is this design's choice; the published text only says the
// ALU adder is error-controllable and that the CSR's upper half is the error field.
// Combinational.
module alu
  import approx_pkg::*;
(
  input  alu_op_t          op,
  input  logic [XLEN-1:0]  a,
  input  logic [XLEN-1:0]  b,
  input  logic             apx_en,
  input  logic [15:0]      err,
  output logic [XLEN-1:0]  result
);
  logic [XLEN-1:0] add_b, add_sum, er;
  logic            add_cin, add_cout;

  assign add_b   = (op == ALU_SUB) ? ~b : b;
  assign add_cin = (op == ALU_SUB);
  assign er      = {16'hFFFF, err | {16{~apx_en}}};

  ecsa32 #(.W(XLEN), .BLK(4)) u_add (
    .a(a), .b(add_b), .cin(add_cin), .er(er), .sum(add_sum), .cout(add_cout)
  );

  always_comb begin
    unique case (op)
      ALU_ADD, ALU_SUB: result = add_sum;
      ALU_SLL:  result = a << b[4:0];
      ALU_SLT:  result = {31'd0, $signed(a) < $signed(b)};
      ALU_SLTU: result = {31'd0, a < b};
      ALU_XOR:  result = a ^ b;
      ALU_SRL:  result = a >> b[4:0];
      ALU_SRA:  result = $unsigned($signed(a) >>> b[4:0]);
      ALU_OR:   result = a | b;
      ALU_AND:  result = a & b;
      default:  result = '0;
    endcase
  end

  // The carry-out is not needed by any RV32I instruction.
  logic unused_cout;
  assign unused_cout = add_cout;
endmodule
