// compressor42: exact 4:2 compressor built from two full adders.
//
// Takes four bits of one column plus cin from the column to the right, and returns
// sum (same weight), carry and cout (both one column higher); x0+x1+x2+x3+cin =
// sum + 2*(carry + cout). cout does not depend on cin, so a row of compressors has no
// ripple. Combinational. Only the name "4:2 compressor" is published; this
// construction is the common textbook one.
module compressor42 (
  input  logic [3:0] x,
  input  logic       cin,
  output logic       sum,
  output logic       carry,
  output logic       cout
);
  logic s1;

  assign s1    = x[0] ^ x[1] ^ x[2];
  assign cout  = (x[0] & x[1]) | (x[0] & x[2]) | (x[1] & x[2]);
  assign sum   = s1 ^ x[3] ^ cin;
  assign carry = (s1 & x[3]) | (s1 & cin) | (x[3] & cin);
endmodule
