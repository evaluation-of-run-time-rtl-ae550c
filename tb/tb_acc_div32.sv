// tb_acc_div32: the accurate divider for div, divu, rem, remu including division by
// zero and signed overflow, and its 33-cycle latency.
module tb_acc_div32;
  logic clk = 0, rst_n = 0, start = 0, busy, done, is_signed, want_rem;
  logic [31:0] a, b, result, expv;
  int checks = 0, failures = 0, cyc;

  acc_div32 dut (.clk, .rst_n, .start, .a, .b, .is_signed, .want_rem, .busy, .done, .result);

  always #5 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] ref_div(input logic [31:0] x, y, input logic s, r);
    if (y == 0) return r ? x : 32'hFFFF_FFFF;
    if (s && x == 32'h8000_0000 && y == 32'hFFFF_FFFF) return r ? 32'd0 : 32'h8000_0000;
    if (s) return r ? 32'($signed(x) % $signed(y)) : 32'($signed(x) / $signed(y));
    return r ? x % y : x / y;
  endfunction

  task automatic run(input logic [31:0] ta, tb_, input logic s, r);
    @(negedge clk);
    a = ta; b = tb_; is_signed = s; want_rem = r; start = 1;
    @(negedge clk);
    start = 0; a = $urandom; b = $urandom; is_signed = $urandom; want_rem = $urandom;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != 33) begin failures++; $display("FAIL latency %0d", cyc); end
    expv = ref_div(ta, tb_, s, r);
    checks++;
    if (result !== expv) begin
      failures++;
      if (failures < 10) $display("FAIL a=%h b=%h s=%b r=%b got %h exp %h", ta, tb_, s, r, result, expv);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int m = 0; m < 4; m++) begin
      run(32'd100, 32'd7, m[0], m[1]);
      run(32'hFFFF_FF9C, 32'd7, m[0], m[1]);      // -100
      run(32'd100, 32'hFFFF_FFF9, m[0], m[1]);    // / -7
      run(32'd5, 32'd0, m[0], m[1]);
      run(32'hFFFF_FFFB, 32'd0, m[0], m[1]);
      run(32'h8000_0000, 32'hFFFF_FFFF, m[0], m[1]);
      run(32'hFFFF_FFFF, 32'd1, m[0], m[1]);
      for (int i = 0; i < 1500; i++) run($urandom, $urandom, m[0], m[1]);
      for (int i = 0; i < 500; i++) run($urandom, $urandom >> ($urandom % 32), m[0], m[1]);
    end
    // hand-worked values: -100 / 7 = -14 rem -2
    run(32'hFFFF_FF9C, 32'd7, 1'b1, 1'b0); checks++; if (result != 32'hFFFF_FFF2) failures++;
    run(32'hFFFF_FF9C, 32'd7, 1'b1, 1'b1); checks++; if (result != 32'hFFFF_FFFE) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
