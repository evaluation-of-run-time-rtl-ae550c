// tb_apx_mult16: the 16x16 multi-cycle multiplier: exact products with er = 7F,
// error within the bound of four 8x8 products otherwise, done exactly 5 cycles
// after start, busy during the four product steps.
module tb_apx_mult16;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [15:0] a, b;
  logic [6:0] er;
  logic [31:0] p;
  int checks = 0, failures = 0, cyc;
  longint unsigned bound, diff, exact;

  apx_mult16 dut (.clk, .rst_n, .start, .a, .b, .er, .busy, .done, .p);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input logic [15:0] ta, tb_, input logic [6:0] ter);
    @(negedge clk);
    a = ta; b = tb_; er = ter; start = 1;
    @(negedge clk);
    start = 0; a = $urandom; b = $urandom; er = $urandom;   // must have been latched
    cyc = 1;
    checks++;
    if (!busy) failures++;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != 5) begin failures++; $display("FAIL latency %0d", cyc); end
    exact = longint'(ta) * longint'(tb_);
    diff  = (longint'(p) > exact) ? longint'(p) - exact : exact - longint'(p);
    bound = longint'(m8_bound(ter)) * (1 + 2 * 256 + 65536);
    checks++;
    if (ter == 7'h7F ? (p != 32'(exact)) : (diff > bound)) begin
      failures++;
      if (failures < 10) $display("FAIL a=%h b=%h er=%h p=%h exact=%h", ta, tb_, ter, p, exact);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(16'hFFFF, 16'hFFFF, 7'h7F);
    run(16'h0000, 16'h1234, 7'h7F);
    for (int i = 0; i < 3000; i++) run($urandom, $urandom, 7'h7F);
    for (int i = 0; i < 3000; i++) run($urandom, $urandom, $urandom);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
