// tb_ecsa32: random and corner-case check of the 32-bit carry-select adder:
// with all error controls at 1 the sum must be exact; with random error control it
// must match the block-level reference (ripple blocks, exact +1 selection).
module tb_ecsa32;
  import tb_ref_pkg::*;
  logic [31:0] a, b, er, sum;
  logic cin, cout;
  logic [32:0] ref_v;
  int checks = 0, failures = 0, apx_diff = 0;

  ecsa32 dut (.a, .b, .cin, .er, .sum, .cout);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [31:0] ta, tb_, input logic tc, input logic [31:0] ter);
    a = ta; b = tb_; cin = tc; er = ter;
    #1;
    ref_v = (ter == '1) ? ({1'b0, ta} + {1'b0, tb_} + 33'(tc)) : csa_ref(ta, tb_, tc, ter);
    checks++;
    if ({cout, sum} !== ref_v) begin
      failures++;
      if (failures < 10) $display("FAIL a=%h b=%h cin=%b er=%h got %h exp %h", ta, tb_, tc, ter, {cout, sum}, ref_v);
    end
    if (ter != '1 && {cout, sum} != ({1'b0, ta} + {1'b0, tb_} + 33'(tc))) apx_diff++;
  endtask

  initial begin
    // carry through every block
    check(32'hFFFF_FFFF, 32'h0000_0000, 1'b1, '1);
    check(32'hFFFF_FFFF, 32'hFFFF_FFFF, 1'b1, '1);
    check(32'h0FFF_FFFF, 32'h0000_0001, 1'b0, '1);
    for (int i = 0; i < 20000; i++)
      check($urandom, $urandom, 1'($urandom), '1);
    for (int i = 0; i < 20000; i++)
      check($urandom, $urandom, 1'($urandom), $urandom);
    for (int i = 0; i < 5000; i++)
      check($urandom, $urandom, 1'($urandom), 32'hFFFF_0000);
    checks++;
    if (apx_diff == 0) begin
      failures++;
      $display("FAIL approximate mode never changed a sum");
    end
    $display("approximate sums differing from exact: %0d", apx_diff);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
