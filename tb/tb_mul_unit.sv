// tb_mul_unit: the multiplier execution unit.
//  - slot I (accurate): answer in the same cycle, busy low;
//  - slot II (approximate) with apx_en = 0 or error field 7F: exact answer after
//    5 busy cycles; with the error field 0x7E: within the error bound, some wrong,
//    and mul of small signed operands off by at most 16;
//  - slots III/IV: result 0, busy low;
//  - non-multiply instructions never raise busy.
module tb_mul_unit;
  import approx_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, valid = 0, busy;
  logic [6:0] opcode, funct7;
  logic [2:0] funct3;
  logic [31:0] rs1, rs2, result;
  execsr_t execsr;
  int checks = 0, failures = 0, cyc, apx_wrong = 0;

  mul_unit dut (.clk, .rst_n, .valid, .opcode, .funct3, .funct7, .rs1, .rs2, .execsr, .result, .busy);

  always #5 clk = ~clk;

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] ref_mul(input logic [2:0] f3, input logic [31:0] x, y);
    logic [127:0] full;
    logic as, bs;
    as = (f3[1:0] == 2'b01 || f3[1:0] == 2'b10);
    bs = (f3[1:0] == 2'b01);
    full = 128'($signed({as & x[31], x})) * 128'($signed({bs & y[31], y}));
    return (f3[1:0] == 2'b00) ? full[31:0] : full[63:32];
  endfunction

  // Present one instruction, hold it while busy, return the number of busy cycles.
  task automatic issue(input logic [2:0] f3, input logic [31:0] x, y, output logic [31:0] res, output int nbusy);
    @(negedge clk);
    valid = 1; opcode = OPC_OP; funct7 = F7_MULDIV; funct3 = f3; rs1 = x; rs2 = y;
    #1;
    nbusy = 0;
    while (busy) begin @(negedge clk); #1; nbusy++; end
    res = result;
    @(negedge clk);
    valid = 0; rs1 = $urandom; rs2 = $urandom;
  endtask

  initial begin
    logic [31:0] r, x, y;
    logic [2:0] f3;
    int nb;
    execsr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // slot I
    for (int i = 0; i < 2000; i++) begin
      f3 = 3'($urandom % 4); x = $urandom; y = $urandom;
      issue(f3, x, y, r, nb);
      checks++;
      if (r !== ref_mul(f3, x, y) || nb != 0) begin failures++; $display("FAIL slot I f3=%0d nb=%0d", f3, nb); end
    end
    // slot II, approximation off: exact, 5 busy cycles
    execsr.sel = SLOT_II; execsr.apx_en = 1'b0; execsr.err = 16'h0000;
    for (int i = 0; i < 500; i++) begin
      f3 = 3'($urandom % 4); x = $urandom; y = $urandom;
      issue(f3, x, y, r, nb);
      checks++;
      if (r !== ref_mul(f3, x, y) || nb != 5) begin failures++; $display("FAIL slot II exact f3=%0d nb=%0d r=%h", f3, nb, r); end
    end
    // slot II, approximation on with the evaluated setting 0x7E
    execsr.apx_en = 1'b1; execsr.err = 16'h007E;
    for (int i = 0; i < 500; i++) begin
      x = $urandom; y = $urandom;
      issue(3'b011, x, y, r, nb);      // mulhu
      checks++;
      if (nb != 5 || (r > ref_mul(3'b011, x, y) ? r - ref_mul(3'b011, x, y) : ref_mul(3'b011, x, y) - r) > 32'd1056820) failures++;   // 16 at bit 4 of each of the sixteen 8x8 products, seen in the upper word
      if (r != ref_mul(3'b011, x, y)) apx_wrong++;
      // mul of small signed operands: one 8x8 product of the magnitudes, so the
      // error is a multiple of 16 and at most 16
      x = 32'(int'($urandom % 511) - 255); y = 32'(int'($urandom % 511) - 255);
      issue(3'b000, x, y, r, nb);
      checks++;
      if (!(r - x * y == 32'd0 || r - x * y == 32'd16 || x * y - r == 32'd16)) begin
        failures++;
        $display("FAIL signed mul %0d * %0d = %0d", $signed(x), $signed(y), $signed(r));
      end
    end
    checks++;
    if (apx_wrong == 0) begin failures++; $display("FAIL approximation never visible"); end
    // empty slots
    for (int s = 2; s < 4; s++) begin
      execsr.sel = 2'(s);
      issue(3'b000, 32'd3, 32'd5, r, nb);
      checks++;
      if (r != 0 || nb != 0) failures++;
    end
    // a division or ALU instruction is not taken by this unit
    execsr.sel = SLOT_II;
    @(negedge clk); valid = 1; opcode = OPC_OP; funct7 = F7_MULDIV; funct3 = 3'b100; #1;
    checks++; if (busy) failures++;
    @(negedge clk); funct7 = 7'd0; funct3 = 3'b000; #1;
    checks++; if (busy) failures++;
    @(negedge clk); valid = 0;
    $display("approximate mulhu results differing: %0d / 500", apx_wrong);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
