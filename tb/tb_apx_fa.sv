// tb_apx_fa: exhaustive check of the error-controllable full adder against the
// reference table (exact with er=1; two wrong patterns, one low and one high, with
// er=0).
module tb_apx_fa;
  import tb_ref_pkg::*;
  logic a, b, cin, er, sum, cout;
  int checks = 0, failures = 0, low = 0, high = 0;

  apx_fa dut (.a, .b, .cin, .er, .sum, .cout);

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 16; i++) begin
      {er, a, b, cin} = 4'(i);
      #1;
      checks++;
      if ({cout, sum} !== fa_ref(a, b, cin, er)) begin
        failures++;
        $display("FAIL er=%b a=%b b=%b cin=%b got %b", er, a, b, cin, {cout, sum});
      end
      if (!er) begin
        if (int'({cout, sum}) < int'(a) + int'(b) + int'(cin)) low++;
        if (int'({cout, sum}) > int'(a) + int'(b) + int'(cin)) high++;
      end
    end
    // unbiased error: one pattern low, one high
    checks++;
    if (low != 1 || high != 1) begin
      failures++;
      $display("FAIL error balance low=%0d high=%0d", low, high);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
