// tb_addr_gen: base selection (rs1 for loads, stores, jalr; pc otherwise), exact
// addition, and clearing of bit 0 for jalr.
module tb_addr_gen;
  import approx_pkg::*;
  logic [6:0] opcode;
  logic [31:0] pc, rs1, imm, addr, expv;
  logic [6:0] opcs [6] = '{OPC_LOAD, OPC_STORE, OPC_JALR, OPC_JAL, OPC_BRANCH, OPC_AUIPC};
  int checks = 0, failures = 0;

  addr_gen dut (.opcode, .pc, .rs1, .imm, .addr);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 6000; i++) begin
      opcode = opcs[i % 6]; pc = $urandom; rs1 = $urandom; imm = $urandom;
      #1;
      case (i % 6)
        0, 1: expv = rs1 + imm;
        2:    expv = (rs1 + imm) & ~32'd1;
        default: expv = pc + imm;
      endcase
      checks++;
      if (addr !== expv) begin
        failures++;
        if (failures < 10) $display("FAIL opc=%b got %h exp %h", opcode, addr, expv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
