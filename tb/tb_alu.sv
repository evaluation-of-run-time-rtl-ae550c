// tb_alu: every ALU operation against plain SystemVerilog operators with
// approximation off, and add/sub with approximation on against the carry-select
// reference (low 16 adder bits approximate where err is 0).
module tb_alu;
  import approx_pkg::*;
  import tb_ref_pkg::*;
  alu_op_t op;
  logic [31:0] a, b, result, expv;
  logic apx_en;
  logic [15:0] err;
  int checks = 0, failures = 0, apx_diff = 0;

  alu dut (.op, .a, .b, .apx_en, .err, .result);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] ref_alu(input alu_op_t o, input logic [31:0] x, y);
    case (o)
      ALU_ADD:  return x + y;
      ALU_SUB:  return x - y;
      ALU_SLL:  return x << y[4:0];
      ALU_SLT:  return ($signed(x) < $signed(y)) ? 32'd1 : 32'd0;
      ALU_SLTU: return (x < y) ? 32'd1 : 32'd0;
      ALU_XOR:  return x ^ y;
      ALU_SRL:  return x >> y[4:0];
      ALU_SRA:  return 32'($signed(x) >>> y[4:0]);
      ALU_OR:   return x | y;
      default:  return x & y;
    endcase
  endfunction

  initial begin
    for (int i = 0; i < 20000; i++) begin
      op = alu_op_t'($urandom % 10); a = $urandom; b = $urandom;
      apx_en = 1'b0; err = $urandom;
      #1;
      checks++;
      if (result !== ref_alu(op, a, b)) begin
        failures++;
        if (failures < 10) $display("FAIL op=%s a=%h b=%h got %h", op.name(), a, b, result);
      end
    end
    // approximation enabled but every error bit accurate: still exact
    for (int i = 0; i < 2000; i++) begin
      op = ($urandom % 2) ? ALU_ADD : ALU_SUB; a = $urandom; b = $urandom; apx_en = 1'b1; err = 16'hFFFF;
      #1;
      checks++;
      if (result !== ref_alu(op, a, b)) failures++;
    end
    for (int i = 0; i < 10000; i++) begin
      op = ($urandom % 2) ? ALU_ADD : ALU_SUB; a = $urandom; b = $urandom; apx_en = 1'b1; err = $urandom;
      #1;
      expv = csa_ref(a, (op == ALU_SUB) ? ~b : b, op == ALU_SUB, {16'hFFFF, err})[31:0];
      checks++;
      if (result !== expv) begin
        failures++;
        if (failures < 10) $display("FAIL apx op=%s a=%h b=%h err=%h got %h exp %h", op.name(), a, b, err, result, expv);
      end
      if (result != ref_alu(op, a, b)) apx_diff++;
    end
    checks++;
    if (apx_diff == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
