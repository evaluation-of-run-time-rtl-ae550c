// exe_stage: execution stage of an RV32IM pipeline with run-time controlled
// approximation.
//
// Three execution units sit side by side, each with its own control register:
//   alu_unit  <- alucsr (0x800)   RV32I arithmetic/logic, error-controllable adder
//   mul_unit  <- mulcsr (0x801)   slot I accurate, slot II approximate multiplier
//   div_unit  <- divcsr (0x802)   slot I accurate divider
// and the EXE STAGE MUX picks the result by opcode/funct3/funct7. Around them:
// approx_csrs holds the three registers and executes CSR instructions (the old value
// is the result; the write source is rs1 or the 5-bit zimm), and addr_gen computes
// load/store addresses and jump/branch targets with an exact adder. For OP-IMM the
// immediate replaces rs2 before the ALU unit. lui gives imm, auipc gives pc+imm,
// jal/jalr give pc+4 (link) with the target on addr.
// Interface: the decode stage presents one instruction (valid, pc, opcode, funct3,
// funct7, imm, zimm) with its operand values rs1/rs2. busy is the stall request: while
// it is high the instruction must be held; in the cycle it is low, result (and addr)
// are valid and the instruction leaves the stage. CSR writes take effect at the
// clock edge that ends that cycle.
// Fetch/decode, the register file, the memory/write-back stage, branch resolution and
// memories belong to the surrounding core and are not part of this module.
module exe_stage
  import approx_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            valid,
  input  logic [XLEN-1:0] pc,
  input  logic [6:0]      opcode,
  input  logic [2:0]      funct3,
  input  logic [6:0]      funct7,
  input  logic [XLEN-1:0] rs1,
  input  logic [XLEN-1:0] rs2,
  input  logic [XLEN-1:0] imm,
  input  logic [4:0]      zimm,
  output logic [XLEN-1:0] result,
  output logic [XLEN-1:0] addr,
  output logic            busy,
  output execsr_t         alucsr,
  output execsr_t         mulcsr,
  output execsr_t         divcsr
);
  logic [XLEN-1:0] alu_b, alu_res, mul_res, div_res, csr_rdata;
  logic            alu_busy, mul_busy, div_busy, csr_hit, is_csr, csr_we;
  csr_op_t         csr_op;
  logic [6:0]      alu_opcode;

  // ---- control and status registers ----
  assign is_csr = valid && (opcode == OPC_SYSTEM) && (funct3[1:0] != 2'b00);
  assign csr_we = is_csr && !busy;
  always_comb begin
    unique case (funct3[1:0])
      2'b10:   csr_op = CSR_SET;
      2'b11:   csr_op = CSR_CLEAR;
      default: csr_op = CSR_WRITE;
    endcase
  end

  approx_csrs u_csrs (
    .clk, .rst_n, .csr_we, .csr_op, .csr_addr(imm[11:0]),
    .csr_wdata(funct3[2] ? {27'd0, zimm} : rs1),
    .csr_rdata, .csr_hit, .alucsr, .mulcsr, .divcsr
  );

  // ---- execution units ----
  assign alu_b      = (opcode == OPC_OPIMM) ? imm : rs2;
  assign alu_opcode = valid ? opcode : 7'd0;

  alu_unit u_alu (
    .opcode(alu_opcode), .funct3, .funct7, .rs1, .rs2(alu_b), .execsr(alucsr),
    .result(alu_res), .busy(alu_busy)
  );

  mul_unit u_mul (
    .clk, .rst_n, .valid, .opcode, .funct3, .funct7, .rs1, .rs2, .execsr(mulcsr),
    .result(mul_res), .busy(mul_busy)
  );

  div_unit u_div (
    .clk, .rst_n, .valid, .opcode, .funct3, .funct7, .rs1, .rs2, .execsr(divcsr),
    .result(div_res), .busy(div_busy)
  );

  addr_gen u_agen (.opcode, .pc, .rs1, .imm, .addr);

  // ---- EXE STAGE MUX ----
  always_comb begin
    unique case (opcode)
      OPC_OP:     result = (funct7 == F7_MULDIV) ? (funct3[2] ? div_res : mul_res) : alu_res;
      OPC_OPIMM:  result = alu_res;
      OPC_LUI:    result = imm;
      OPC_AUIPC:  result = addr;
      OPC_JAL,
      OPC_JALR:   result = pc + 32'd4;
      OPC_SYSTEM: result = csr_rdata;
      default:    result = '0;
    endcase
  end

  assign busy = alu_busy | mul_busy | div_busy;

  logic unused;
  assign unused = csr_hit;

  a_one_busy: assert property (@(posedge clk) disable iff (!rst_n) $onehot0({alu_busy, mul_busy, div_busy}));
endmodule
