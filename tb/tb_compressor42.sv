// tb_compressor42: exhaustive check of the 4:2 compressor: the weighted output
// equals the input count, and cout does not depend on cin.
module tb_compressor42;
  logic [3:0] x;
  logic cin, sum, carry, cout, cout0;
  int checks = 0, failures = 0;

  compressor42 dut (.x, .cin, .sum, .carry, .cout);

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 16; i++) begin
      x = 4'(i);
      cin = 1'b0; #1; cout0 = cout;
      checks++;
      if (int'(sum) + 2 * (int'(carry) + int'(cout)) != $countones(x)) failures++;
      cin = 1'b1; #1;
      checks++;
      if (int'(sum) + 2 * (int'(carry) + int'(cout)) != $countones(x) + 1) failures++;
      checks++;
      if (cout !== cout0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
