// ecsa32: error-controllable carry-select adder.
//
// The word is cut into BLK-bit blocks. The lowest block is an eca4 that takes the
// adder's carry-in and produces the low sum bits and the first block carry. Every
// higher block adds its operand bits once, with carry-in 0, in its own eca4; an
// exact incrementer makes the "+1" version of that sum, and a 10:5 multiplexer
// picks {carry, sum} of either version by the carry coming from the block below.
// The block carries therefore ripple only through one mux per block. The carry of
// the "+1" version is the ECA carry OR an all-ones ECA sum.
// er[i] is the error control of the full adder at bit i (1 = accurate); the
// incrementers and the muxes are always exact. Combinational.
// Block structure follows the published figure; how the carry pair and the
// incrementer are built is this design's choice.
module ecsa32 #(
  parameter int unsigned W   = 32,
  parameter int unsigned BLK = 4
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic         cin,
  input  logic [W-1:0] er,
  output logic [W-1:0] sum,
  output logic         cout
);
  localparam int unsigned NB = W / BLK;

  logic [NB:1] bc;   // bc[k] = carry into block k (bc[NB] is the carry-out)

  eca4 #(.W(BLK)) u_eca0 (
    .a(a[BLK-1:0]), .b(b[BLK-1:0]), .cin(cin), .er(er[BLK-1:0]),
    .sum(sum[BLK-1:0]), .cout(bc[1])
  );

  for (genvar k = 1; k < NB; k++) begin : g_blk
    logic [BLK-1:0] s0, s1;
    logic           c0, c1;

    eca4 #(.W(BLK)) u_eca (
      .a(a[k*BLK +: BLK]), .b(b[k*BLK +: BLK]), .cin(1'b0), .er(er[k*BLK +: BLK]),
      .sum(s0), .cout(c0)
    );
    // incrementer
    assign s1 = s0 + BLK'(1);
    assign c1 = c0 | (&s0);
    // MUX 10:5 with the CY part
    assign {bc[k+1], sum[k*BLK +: BLK]} = bc[k] ? {c1, s1} : {c0, s0};
  end

  assign cout = bc[NB];
endmodule
