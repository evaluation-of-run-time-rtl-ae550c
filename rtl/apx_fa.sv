// apx_fa: full adder with an error-control input.
//
// With er = 1 the cell is an ordinary full adder. With er = 0 the carry-out is taken
// straight from input a and the sum is patched so that only two of the eight input
// patterns come out wrong: a=0,b=1,cin=1 gives value 1 instead of 2 (carry too low)
// and a=1,b=0,cin=0 gives value 2 instead of 1 (carry too high). The error is thus
// one unit either way, half of the time downwards and half upwards, which is the
// behaviour the published cell is described to have; the gate-level circuit of the
// published cell is not reproduced, this function is this design's own choice.
// Purely combinational.
module apx_fa (
  input  logic a,
  input  logic b,
  input  logic cin,
  input  logic er,    // 1 = accurate, 0 = approximate
  output logic sum,
  output logic cout
);
  logic sum_apx;

  assign sum_apx = a ? (b & cin) : (b | cin);
  assign sum  = er ? (a ^ b ^ cin) : sum_apx;
  assign cout = er ? ((a & b) | (a & cin) | (b & cin)) : a;
endmodule
