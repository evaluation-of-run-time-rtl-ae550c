// tb_apx_mult32: the hierarchical 32x32 multiplier for mul, mulh, mulhsu, mulhu:
// exact with er = 7F; with approximation the upper word stays within the error
// bound of the sixteen 8x8 products; done exactly 5 cycles after start.
module tb_apx_mult32;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [31:0] a, b, result;
  logic a_signed, b_signed, high;
  logic [6:0] er;
  int checks = 0, failures = 0, cyc, apx_seen = 0;

  apx_mult32 dut (.clk, .rst_n, .start, .a, .b, .a_signed, .b_signed, .high, .er, .busy, .done, .result);

  always #5 clk = ~clk;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mode: 0 mul, 1 mulh, 2 mulhsu, 3 mulhu
  task automatic run(input logic [31:0] ta, tb_, input int mode, input logic [6:0] ter);
    longint signed ex_lo, ex_hi, got, d;
    logic [127:0] full;
    real bound;
    logic as, bs;
    as = (mode == 1 || mode == 2);
    bs = (mode == 1);
    @(negedge clk);
    a = ta; b = tb_; a_signed = as; b_signed = bs; high = (mode != 0); er = ter; start = 1;
    @(negedge clk);
    start = 0; a = $urandom; b = $urandom; er = $urandom; a_signed = $urandom; high = $urandom;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != 5) begin failures++; $display("FAIL latency %0d", cyc); end
    full  = 128'($signed({as & ta[31], ta})) * 128'($signed({bs & tb_[31], tb_}));
    checks++;
    if (ter == 7'h7F) begin
      if (result !== ((mode == 0) ? full[31:0] : full[63:32])) begin
        failures++;
        if (failures < 10) $display("FAIL mode %0d a=%h b=%h got %h exp %h", mode, ta, tb_, result, (mode == 0) ? full[31:0] : full[63:32]);
      end
    end else if (mode != 0) begin
      ex_hi = longint'($signed(full[63:32]));
      got   = (mode == 3) ? longint'({32'd0, result}) : longint'($signed(result));
      if (mode == 3) ex_hi = longint'({32'd0, full[63:32]});
      d     = (got > ex_hi) ? got - ex_hi : ex_hi - got;
      bound = real'(m8_bound(ter)) * (1.0 + 512.0 + 65536.0) * (1.0 + 2.0 * 65536.0 + 4294967296.0) / 4294967296.0 + 2.0;
      if (real'(d) > bound) begin
        failures++;
        $display("FAIL apx mode %0d a=%h b=%h got %h exp %h", mode, ta, tb_, result, full[63:32]);
      end
      if (result != full[63:32]) apx_seen++;
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int m = 0; m < 4; m++) begin
      run(32'h8000_0000, 32'h8000_0000, m, 7'h7F);
      run(32'hFFFF_FFFF, 32'hFFFF_FFFF, m, 7'h7F);
      run(32'h8000_0000, 32'hFFFF_FFFF, m, 7'h7F);
      run(32'd0, 32'h1234_5678, m, 7'h7F);
      for (int i = 0; i < 1000; i++) run($urandom, $urandom, m, 7'h7F);
      for (int i = 0; i < 500; i++) run($urandom, $urandom, m, $urandom);
    end
    checks++;
    if (apx_seen == 0) begin failures++; $display("FAIL approximation never visible"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
