// apx_mult8: 8x8 unsigned multiplier with an error-configurable final adder.
//
// Three stages, as in the published block diagram:
//  1. partial products: 8 rows of AND gates, row i = a & {8{b[i]}} shifted by i;
//  2. Wallace reduction with 4:2 compressors: rows 0-3 and rows 4-7 are each
//     compressed to two rows, then those four rows to two (sum row S, carry row C);
//  3. final ripple-carry adder over product bits 15:4 (12 bits) built from apx_fa
//     cells. Bits 3:0 of C are zero by construction, so S[3:0] is the product there.
// The 7 low cells of the final adder (product bits 10:4) take error control er[6:0],
// er[k] on bit 4+k, 1 = accurate; the upper 5 cells are always accurate. With
// er = 7'h7F the product is exact. Combinational.
// The 12-bit adder with 7 controllable bits is published; which 7 bits, and the
// exact compressors, are this design's choices.
module apx_mult8 #(
  parameter int unsigned N     = 8,
  parameter int unsigned RCA_W = 12,
  parameter int unsigned ER_W  = 7
) (
  input  logic [N-1:0]    a,
  input  logic [N-1:0]    b,
  input  logic [ER_W-1:0] er,
  output logic [2*N-1:0]  p
);
  localparam int unsigned PW = 2 * N;   // product width
  localparam int unsigned LO = PW - RCA_W;

  // 1. partial product generation
  logic [PW-1:0] pp [N];
  for (genvar i = 0; i < N; i++) begin : g_pp
    assign pp[i] = PW'(a & {N{b[i]}}) << i;
  end

  // 2. reduction: three rows of 4:2 compressors
  logic [PW-1:0] s_a, c_a, s_b, c_b, s_f, c_f;

  compressor_row42 #(.W(PW)) u_row_a (.r0(pp[0]), .r1(pp[1]), .r2(pp[2]), .r3(pp[3]), .s(s_a), .c(c_a));
  compressor_row42 #(.W(PW)) u_row_b (.r0(pp[4]), .r1(pp[5]), .r2(pp[6]), .r3(pp[7]), .s(s_b), .c(c_b));
  compressor_row42 #(.W(PW)) u_row_f (.r0(s_a),   .r1(c_a),   .r2(s_b),   .r3(c_b),   .s(s_f), .c(c_f));

  // 3. final addition stage, error-controllable ripple-carry adder
  logic [RCA_W:0]   rc;
  logic [RCA_W-1:0] rer;

  assign rer   = {{(RCA_W-ER_W){1'b1}}, er};
  assign rc[0] = 1'b0;
  for (genvar j = 0; j < RCA_W; j++) begin : g_rca
    apx_fa u_fa (.a(s_f[LO+j]), .b(c_f[LO+j]), .cin(rc[j]), .er(rer[j]),
                 .sum(p[LO+j]), .cout(rc[j+1]));
  end
  assign p[LO-1:0] = s_f[LO-1:0];

  // The final carry and the low carry-row bits are zero for every operand pair.
  logic unused;
  assign unused = rc[RCA_W] | (|c_f[LO-1:0]);
endmodule
