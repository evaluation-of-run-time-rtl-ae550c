// acc_mult32: accurate 32x32 multiplier (Circuit I of the multiplier unit).
//
// A single-cycle combinational multiplier for the four RV32M multiply operations:
// both operands are extended to 33 bits (sign- or zero-extended per a_signed /
// b_signed), multiplied, and high selects bits 63:32 instead of 31:0.
// The published design uses a vendor-library multiplier here; this plain '*' stands
// in for it and leaves the architecture to the synthesis tool.
module acc_mult32 (
  input  logic [31:0] a,
  input  logic [31:0] b,
  input  logic        a_signed,
  input  logic        b_signed,
  input  logic        high,
  output logic [31:0] result
);
  logic signed [32:0] a_x, b_x;
  logic signed [65:0] prod;

  assign a_x    = {a_signed & a[31], a};
  assign b_x    = {b_signed & b[31], b};
  assign prod   = a_x * b_x;
  assign result = high ? prod[63:32] : prod[31:0];

  logic unused;
  assign unused = ^prod[65:64];
endmodule
