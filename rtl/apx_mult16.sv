// apx_mult16: 16x16 unsigned multiplier that reuses one apx_mult8 over four cycles.
//
// On start the operands and the error-control word are latched. In each of the next
// four cycles one 8x8 product (lo*lo, lo*hi, hi*lo, hi*hi) is formed by the single
// apx_mult8 and added, shifted by 0, 8, 8 or 16 bits, into a 32-bit accumulator
// (exact adder). done pulses for one cycle after the fourth step, with p valid from
// then until the next start. busy is high from the cycle after start until done.
// Latency: start in cycle t, done in cycle t+5 (busy in t+1..t+4).
// Reusing one 8x8 core over several cycles is published; the step order and the
// timing are this design's choices.
module apx_mult16 #(
  parameter int unsigned STEPS = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [15:0] a,
  input  logic [15:0] b,
  input  logic [6:0]  er,
  output logic        busy,
  output logic        done,
  output logic [31:0] p
);
  logic [15:0] a_q, b_q;
  logic [6:0]  er_q;
  logic [1:0]  step_q;
  logic [7:0]  m_a, m_b;
  logic [15:0] m_p;
  logic [31:0] addend;

  // operand halves for the current step: step[0] picks b's half, step[1] a's half
  assign m_a = step_q[1] ? a_q[15:8] : a_q[7:0];
  assign m_b = step_q[0] ? b_q[15:8] : b_q[7:0];

  apx_mult8 u_m8 (.a(m_a), .b(m_b), .er(er_q), .p(m_p));

  always_comb begin
    unique case (step_q)
      2'd0:       addend = {16'd0, m_p};
      2'd1, 2'd2: addend = {8'd0, m_p, 8'd0};
      default:    addend = {m_p, 16'd0};
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_q    <= '0;
      b_q    <= '0;
      er_q   <= '0;
      step_q <= '0;
      busy   <= 1'b0;
      done   <= 1'b0;
      p      <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        a_q    <= a;
        b_q    <= b;
        er_q   <= er;
        step_q <= '0;
        busy   <= 1'b1;
        p      <= '0;
      end else if (busy) begin
        p      <= p + addend;
        step_q <= step_q + 2'd1;
        if (step_q == 2'(STEPS - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
