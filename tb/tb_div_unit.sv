// tb_div_unit: the divider execution unit: div/divu/rem/remu through slot I with
// 32 busy cycles, empty slots return 0 without busy, multiplies are not taken.
module tb_div_unit;
  import approx_pkg::*;
  logic clk = 0, rst_n = 0, valid = 0, busy;
  logic [6:0] opcode, funct7;
  logic [2:0] funct3;
  logic [31:0] rs1, rs2, result;
  execsr_t execsr;
  int checks = 0, failures = 0;

  div_unit dut (.clk, .rst_n, .valid, .opcode, .funct3, .funct7, .rs1, .rs2, .execsr, .result, .busy);

  always #5 clk = ~clk;

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] ref_div(input logic [2:0] f3, input logic [31:0] x, y);
    logic s, r;
    s = !f3[0]; r = f3[1];
    if (y == 0) return r ? x : 32'hFFFF_FFFF;
    if (s && x == 32'h8000_0000 && y == 32'hFFFF_FFFF) return r ? 32'd0 : 32'h8000_0000;
    if (s) return r ? 32'($signed(x) % $signed(y)) : 32'($signed(x) / $signed(y));
    return r ? x % y : x / y;
  endfunction

  task automatic issue(input logic [2:0] f3, input logic [31:0] x, y, output logic [31:0] res, output int nbusy);
    @(negedge clk);
    valid = 1; opcode = OPC_OP; funct7 = F7_MULDIV; funct3 = f3; rs1 = x; rs2 = y;
    #1;
    nbusy = 0;
    while (busy) begin @(negedge clk); #1; nbusy++; end
    res = result;
    @(negedge clk);
    valid = 0;
  endtask

  initial begin
    logic [31:0] r, x, y;
    logic [2:0] f3;
    int nb;
    execsr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      f3 = 3'(4 + $urandom % 4); x = $urandom; y = (i % 50 == 0) ? 32'd0 : $urandom >> ($urandom % 32);
      issue(f3, x, y, r, nb);
      checks++;
      if (r !== ref_div(f3, x, y) || nb != 33) begin
        failures++;
        if (failures < 10) $display("FAIL f3=%b x=%h y=%h got %h exp %h nb=%0d", f3, x, y, r, ref_div(f3, x, y), nb);
      end
    end
    for (int s = 1; s < 4; s++) begin
      execsr.sel = 2'(s);
      issue(3'b100, 32'd30, 32'd5, r, nb);
      checks++;
      if (r != 0 || nb != 0) failures++;
    end
    execsr.sel = SLOT_I;
    @(negedge clk); valid = 1; opcode = OPC_OP; funct7 = F7_MULDIV; funct3 = 3'b000; #1;
    checks++; if (busy) failures++;
    @(negedge clk); valid = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
