// apx_mult32: hierarchical 32x32 approximate multiplier (Circuit II of the
// multiplier unit).
//
// Four apx_mult16 copies run in parallel on the four 16x16 sub-products of the
// operand magnitudes (aL*bL, aL*bH, aH*bL, aH*bH); their results are combined with
// exact adders into the 64-bit magnitude product, which is negated when exactly one
// operand is negative. high selects the upper word (mulh/mulhsu/mulhu) or the lower
// word (mul). a_signed / b_signed say whether each operand is two's complement.
// Each 8x8 core inside uses error control er (1 = accurate bit).
// Timing: start in cycle t (sign mode and high are latched), busy in t+1..t+4, done
// for one cycle in t+5 with result valid from then until the next start.
// Four copies of the 16-bit unit are published; the sign handling is this design's
// choice, since the published 8x8 core is unsigned.
module apx_mult32 (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] a,
  input  logic [31:0] b,
  input  logic        a_signed,
  input  logic        b_signed,
  input  logic        high,
  input  logic [6:0]  er,
  output logic        busy,
  output logic        done,
  output logic [31:0] result
);
  logic        a_neg, b_neg, neg_q, high_q;
  logic [31:0] a_mag, b_mag;
  logic [31:0] p_ll, p_lh, p_hl, p_hh;
  logic [3:0]  busy_v, done_v;
  logic [63:0] mag, prod;

  assign a_neg = a_signed & a[31];
  assign b_neg = b_signed & b[31];
  assign a_mag = a_neg ? (~a + 32'd1) : a;
  assign b_mag = b_neg ? (~b + 32'd1) : b;

  apx_mult16 u_ll (.clk, .rst_n, .start, .a(a_mag[15:0]),  .b(b_mag[15:0]),  .er, .busy(busy_v[0]), .done(done_v[0]), .p(p_ll));
  apx_mult16 u_lh (.clk, .rst_n, .start, .a(a_mag[15:0]),  .b(b_mag[31:16]), .er, .busy(busy_v[1]), .done(done_v[1]), .p(p_lh));
  apx_mult16 u_hl (.clk, .rst_n, .start, .a(a_mag[31:16]), .b(b_mag[15:0]),  .er, .busy(busy_v[2]), .done(done_v[2]), .p(p_hl));
  apx_mult16 u_hh (.clk, .rst_n, .start, .a(a_mag[31:16]), .b(b_mag[31:16]), .er, .busy(busy_v[3]), .done(done_v[3]), .p(p_hh));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      neg_q  <= 1'b0;
      high_q <= 1'b0;
    end else if (start) begin
      neg_q  <= a_neg ^ b_neg;
      high_q <= high;
    end
  end

  assign mag    = {32'd0, p_ll} + {16'd0, p_lh, 16'd0} + {16'd0, p_hl, 16'd0} + {p_hh, 32'd0};
  assign prod   = neg_q ? (~mag + 64'd1) : mag;
  assign result = high_q ? prod[63:32] : prod[31:0];
  // The four copies run in lock step.
  assign busy   = busy_v[0];
  assign done   = done_v[0];

  logic unused;
  assign unused = (|busy_v[3:1]) | (|done_v[3:1]);


  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n) (&busy_v) || !(|busy_v));

endmodule
