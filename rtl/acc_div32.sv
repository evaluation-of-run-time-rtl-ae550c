// acc_div32: accurate 32-bit divider (Circuit I of the divider unit).
//
// Restoring division on operand magnitudes, one quotient bit per cycle. On start the
// magnitudes and the sign mode are latched; XLEN cycles later done pulses and result
// holds the quotient (want_rem = 0) or the remainder (want_rem = 1), sign-corrected
// as RISC-V requires: quotient negative when the operand signs differ, remainder
// with the dividend's sign. Division by zero gives all ones / the dividend;
// -2^31 / -1 gives -2^31 / 0, both as the ISA specifies.
// Timing: start in cycle t, busy in t+1..t+XLEN, done in t+XLEN+1.
// Only "fully accurate division" is published; the algorithm is this design's.
module acc_div32 #(
  parameter int unsigned XLEN = 32
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [XLEN-1:0] a,
  input  logic [XLEN-1:0] b,
  input  logic            is_signed,
  input  logic            want_rem,
  output logic            busy,
  output logic            done,
  output logic [XLEN-1:0] result
);
  localparam int unsigned CW = $clog2(XLEN + 1);

  logic [XLEN-1:0] q_q, d_q, a_orig_q;
  logic [XLEN-1:0] r_q;
  logic [CW-1:0]   cnt_q;
  logic            qneg_q, rneg_q, rem_q, dz_q;
  logic [XLEN-1:0] a_mag, b_mag;
  logic [XLEN:0]   r_sh, r_sub;
  logic            a_neg, b_neg;

  assign a_neg = is_signed & a[XLEN-1];
  assign b_neg = is_signed & b[XLEN-1];
  assign a_mag = a_neg ? (~a + 1'b1) : a;
  assign b_mag = b_neg ? (~b + 1'b1) : b;

  // one restoring step: shift in the next dividend bit, try to subtract
  assign r_sh  = {r_q, q_q[XLEN-1]};
  assign r_sub = r_sh - {1'b0, d_q};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_q <= '0; d_q <= '0; r_q <= '0; a_orig_q <= '0; cnt_q <= '0;
      qneg_q <= 1'b0; rneg_q <= 1'b0; rem_q <= 1'b0; dz_q <= 1'b0;
      busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        q_q      <= a_mag;   // dividend bits shift out of the top, quotient bits in
        d_q      <= b_mag;
        r_q      <= '0;
        a_orig_q <= a;
        cnt_q    <= CW'(XLEN);
        qneg_q   <= a_neg ^ b_neg;
        rneg_q   <= a_neg;
        rem_q    <= want_rem;
        dz_q     <= (b == '0);
        busy     <= 1'b1;
      end else if (busy) begin
        if (!r_sub[XLEN]) begin
          r_q <= r_sub[XLEN-1:0];
          q_q <= {q_q[XLEN-2:0], 1'b1};
        end else begin
          r_q <= r_sh[XLEN-1:0];   // below the divisor, fits in XLEN bits
          q_q <= {q_q[XLEN-2:0], 1'b0};
        end
        cnt_q <= cnt_q - 1'b1;
        if (cnt_q == CW'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  always_comb begin
    if (dz_q)
      result = rem_q ? a_orig_q : '1;
    else if (rem_q)
      result = rneg_q ? (~r_q + 1'b1) : r_q;
    else
      result = qneg_q ? (~q_q + 1'b1) : q_q;
  end
endmodule
