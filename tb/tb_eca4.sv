// tb_eca4: exhaustive check of the 4-bit error-controllable ripple adder for all
// operands, carry-in and error-control words against a ripple chain of reference
// cells.
module tb_eca4;
  import tb_ref_pkg::*;
  logic [3:0] a, b, er, sum;
  logic cin, cout;
  logic [32:0] ref_v;
  int checks = 0, failures = 0;

  eca4 dut (.a, .b, .cin, .er, .sum, .cout);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < (1 << 13); i++) begin
      {er, a, b, cin} = 13'(i);
      #1;
      ref_v = rca_ref({28'd0, a}, {28'd0, b}, cin, {28'd0, er}, 4);
      checks++;
      if ({cout, sum} !== ref_v[4:0]) begin
        failures++;
        if (failures < 10) $display("FAIL er=%h a=%h b=%h cin=%b got %h exp %h", er, a, b, cin, {cout, sum}, ref_v[4:0]);
      end
      if (er == 4'hF && {cout, sum} !== 5'(a + b + cin)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
