// tb_acc_mult32: the accurate multiplier for the four RV32M multiply operations,
// against 128-bit products of the sign- or zero-extended operands.
module tb_acc_mult32;
  logic [31:0] a, b, result;
  logic a_signed, b_signed, high;
  logic [127:0] full;
  int checks = 0, failures = 0;

  acc_mult32 dut (.a, .b, .a_signed, .b_signed, .high, .result);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [31:0] ta, tb_, input int mode);
    a = ta; b = tb_;
    a_signed = (mode == 1 || mode == 2); b_signed = (mode == 1); high = (mode != 0);
    #1;
    full = 128'($signed({a_signed & ta[31], ta})) * 128'($signed({b_signed & tb_[31], tb_}));
    checks++;
    if (result !== (high ? full[63:32] : full[31:0])) begin
      failures++;
      if (failures < 10) $display("FAIL mode %0d a=%h b=%h got %h", mode, ta, tb_, result);
    end
  endtask

  initial begin
    for (int m = 0; m < 4; m++) begin
      check(32'h8000_0000, 32'h8000_0000, m);
      check(32'hFFFF_FFFF, 32'hFFFF_FFFF, m);
      check(32'h8000_0000, 32'hFFFF_FFFF, m);
      check(32'd7, 32'hFFFF_FFFD, m);
      for (int i = 0; i < 5000; i++) check($urandom, $urandom, m);
    end
    // spot values worked out by hand
    check(32'd7, 32'hFFFF_FFFD, 0); checks++; if (result != 32'hFFFF_FFEB) failures++;   // 7 * -3 = -21
    check(32'd7, 32'hFFFF_FFFD, 1); checks++; if (result != 32'hFFFF_FFFF) failures++;   // high word of -21
    check(32'd7, 32'hFFFF_FFFD, 3); checks++; if (result != 32'h0000_0006) failures++;   // 7*(2^32-3) >> 32
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
