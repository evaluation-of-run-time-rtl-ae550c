// tb_alu_unit: decoding of the RV32I OP and OP-IMM instructions, the slot select of
// alucsr (slot I computes, empty slots return 0), approximation through alucsr and
// the busy output staying low.
module tb_alu_unit;
  import approx_pkg::*;
  import tb_ref_pkg::*;
  logic [6:0] opcode, funct7;
  logic [2:0] funct3;
  logic [31:0] rs1, rs2, result, expv;
  execsr_t execsr;
  logic busy;
  int checks = 0, failures = 0;

  alu_unit dut (.opcode, .funct3, .funct7, .rs1, .rs2, .execsr, .result, .busy);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] ref_rv(input logic [6:0] opc, input logic [2:0] f3, input logic [6:0] f7,
                                         input logic [31:0] x, y);
    case (f3)
      3'b000: return (opc == OPC_OP && f7[5]) ? x - y : x + y;
      3'b001: return x << y[4:0];
      3'b010: return ($signed(x) < $signed(y)) ? 32'd1 : 32'd0;
      3'b011: return (x < y) ? 32'd1 : 32'd0;
      3'b100: return x ^ y;
      3'b101: return f7[5] ? 32'($signed(x) >>> y[4:0]) : x >> y[4:0];
      3'b110: return x | y;
      default: return x & y;
    endcase
  endfunction

  initial begin
    for (int i = 0; i < 20000; i++) begin
      opcode = ($urandom % 2) ? OPC_OP : OPC_OPIMM;
      funct3 = $urandom;
      funct7 = ($urandom % 2) ? F7_ALT : 7'd0;
      if (opcode == OPC_OP && !(funct3 == 3'b000 || funct3 == 3'b101)) funct7 = 7'd0;
      if (opcode == OPC_OPIMM && funct3 != 3'b101) funct7 = 7'($urandom);   // immediate bits
      rs1 = $urandom; rs2 = $urandom;
      execsr = '0;
      execsr.sel = ($urandom % 4 == 0) ? 2'($urandom) : SLOT_I;
      execsr.err = $urandom; execsr.trunc = $urandom;
      #1;
      expv = (execsr.sel == SLOT_I) ? ref_rv(opcode, funct3, funct7, rs1, rs2) : 32'd0;
      checks++;
      if (result !== expv || busy !== 1'b0) begin
        failures++;
        if (failures < 10) $display("FAIL opc=%b f3=%b f7=%b sel=%0d got %h exp %h", opcode, funct3, funct7, execsr.sel, result, expv);
      end
    end
    // approximate add through alucsr
    for (int i = 0; i < 5000; i++) begin
      opcode = OPC_OP; funct3 = 3'b000; funct7 = 7'd0; rs1 = $urandom; rs2 = $urandom;
      execsr = '0; execsr.apx_en = 1'b1; execsr.err = $urandom;
      #1;
      checks++;
      if (result !== csa_ref(rs1, rs2, 1'b0, {16'hFFFF, execsr.err})[31:0]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
