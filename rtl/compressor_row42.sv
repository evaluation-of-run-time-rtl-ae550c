// compressor_row42: one row of 4:2 compressors across a W-bit column array.
//
// Reduces four W-bit rows to a sum row s and a carry row c with
// r0+r1+r2+r3 = s + c (mod 2^W). Column j's compressor gets cin from column j-1's
// cout; carry and cout of column j land in column j+1 of c. Because cout does not
// depend on cin there is no ripple through the row. c[0] is always 0: nothing
// carries into column 0. Combinational.
module compressor_row42 #(
  parameter int unsigned W = 16
) (
  input  logic [W-1:0] r0,
  input  logic [W-1:0] r1,
  input  logic [W-1:0] r2,
  input  logic [W-1:0] r3,
  output logic [W-1:0] s,
  output logic [W-1:0] c
);
  logic [W:0] co;      // co[j+1] = cout of column j
  logic [W:0] cy;      // cy[j+1] = carry of column j

  assign co[0] = 1'b0;
  assign cy[0] = 1'b0;
  for (genvar j = 0; j < W; j++) begin : g_col
    compressor42 u_c (.x({r3[j], r2[j], r1[j], r0[j]}), .cin(co[j]),
                      .sum(s[j]), .carry(cy[j+1]), .cout(co[j+1]));
  end
  // Each cout is consumed as the cin of the next column, so only the carry bits
  // form the second output row.
  assign c = cy[W-1:0];

  logic unused;
  assign unused = co[W] | cy[W];
endmodule
