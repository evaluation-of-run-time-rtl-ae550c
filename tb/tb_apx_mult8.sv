// tb_apx_mult8: exhaustive check of the 8x8 multiplier.
//  - er = 7F: the product is exact for all 65536 operand pairs;
//  - the Wallace reduction leaves two rows whose sum is a*b, with the carry row zero
//    in bits 3:0 (so a 12-bit final adder suffices);
//  - for several er values the product equals a reference ripple chain of
//    error-controllable cells applied to those two rows, the error is a multiple of
//    16 and within the bound of the approximate cells, and the all-approximate
//    setting er = 00 has the highest error rate.
module tb_apx_mult8;
  import tb_ref_pkg::*;
  logic [7:0]  a, b;
  logic [6:0]  er;
  logic [15:0] p;
  logic [32:0] ref_v;
  int checks = 0, failures = 0;
  int errs [3];
  int ed;
  real red [3] = '{0.0, 0.0, 0.0};
  logic [6:0] er_list [3] = '{7'h00, 7'h3F, 7'h7E};

  apx_mult8 dut (.a, .b, .er, .p);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    er = 7'h7F;
    for (int i = 0; i < 65536; i++) begin
      {a, b} = 16'(i);
      #1;
      checks++;
      if (p !== 16'(a) * 16'(b)) begin
        failures++;
        if (failures < 10) $display("FAIL exact a=%0d b=%0d p=%0d", a, b, p);
      end
      checks++;
      if (17'(dut.s_f) + 17'(dut.c_f) !== 17'(a) * 17'(b) || dut.c_f[3:0] != 4'd0) failures++;
    end
    for (int e = 0; e < 3; e++) begin
      er = er_list[e];
      errs[e] = 0;
      for (int i = 0; i < 65536; i++) begin
        {a, b} = 16'(i);
        #1;
        ref_v = rca_ref({20'd0, dut.s_f[15:4]}, {20'd0, dut.c_f[15:4]}, 1'b0, {25'h1FFFFFF, er}, 12);
        checks++;
        if (p !== {ref_v[11:0], dut.s_f[3:0]}) begin
          failures++;
          if (failures < 10) $display("FAIL er=%h a=%0d b=%0d p=%0d ref=%0d", er, a, b, p, {ref_v[11:0], dut.s_f[3:0]});
        end
        checks++;
        if ((int'(p) - int'(a) * int'(b)) % 16 != 0 ||
            ((int'(p) - int'(a) * int'(b)) < 0 ? -(int'(p) - int'(a) * int'(b)) : (int'(p) - int'(a) * int'(b))) > int'(m8_bound(er)))
          failures++;
        if (p != 16'(a) * 16'(b)) errs[e]++;
        ed = int'(p) - int'(a) * int'(b);
        if (ed < 0) ed = -ed;
        if (a != 0 && b != 0) red[e] = red[e] + real'(ed) / real'(int'(a) * int'(b));
      end
      $display("er=%h error rate %0d / 65536, MRED %f %%", er, errs[e], 100.0 * red[e] / 65025.0);
    end
    checks++;
    if (!(errs[0] > errs[1] && errs[0] > errs[2] && errs[1] > 0 && errs[2] > 0)) begin
      failures++;
      $display("FAIL error rate of the all-approximate setting not the highest");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
