// eca4: 4-bit error-controllable ripple-carry adder (the "ECA" block of the
// carry-select adder). Four apx_fa cells in a ripple chain; er[i] is the error
// control of bit i (1 = accurate). Combinational.
module eca4 #(
  parameter int unsigned W = 4
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic         cin,
  input  logic [W-1:0] er,
  output logic [W-1:0] sum,
  output logic         cout
);
  logic [W:0] c;

  assign c[0] = cin;
  for (genvar i = 0; i < W; i++) begin : g_fa
    apx_fa u_fa (.a(a[i]), .b(b[i]), .cin(c[i]), .er(er[i]), .sum(sum[i]), .cout(c[i+1]));
  end
  assign cout = c[W];
endmodule
