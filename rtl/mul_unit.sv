// mul_unit: multiplier execution unit with four circuit slots.
//
// The instruction determination logic recognises mul, mulh, mulhsu and mulhu
// (opcode OP, funct7 = 0000001, funct3[2] = 0). mulcsr chooses the circuit:
//   slot I   acc_mult32, accurate, combinational (the default after reset);
//   slot II  apx_mult32, hierarchical approximate multiplier, 5 busy cycles;
//   slot III, IV empty (result 0, never busy).
// The error control of every apx_fa in the approximate multiplier's final adders is
// Er[k] = ~apx_en | err[k], k = 0..6, so with apx_en = 0 the approximate circuit
// computes the exact product; the error field value 0x7E leaves only product bit 4
// of each 8x8 core approximate. mul is computed from signed operands (see below).
// Unselected slots get zero operands and no start.
// Handshake (Fig. 2 gives only result and busy): while valid is high and a multiply
// is decoded, a combinational slot answers in the same cycle with busy low. A
// multi-cycle slot is started in the first cycle (busy goes high at once,
// combinationally), busy stays high until the circuit is done, and in the cycle
// busy falls result is valid; the pipeline must move the instruction on in that
// cycle, since the unit is ready to start again in the next one.
// Slot assignment follows the published configuration; the handshake is this
// design's own.
module mul_unit
  import approx_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            valid,
  input  logic [6:0]      opcode,
  input  logic [2:0]      funct3,
  input  logic [6:0]      funct7,
  input  logic [XLEN-1:0] rs1,
  input  logic [XLEN-1:0] rs2,
  input  execsr_t         execsr,
  output logic [XLEN-1:0] result,
  output logic            busy
);
  logic            is_mul, a_signed, b_signed, high;
  logic            sel_i, sel_ii, start_ii, run_q;
  logic [XLEN-1:0] a1, b1, a2, b2, r1, r2;
  logic            busy2, done2;
  logic [6:0]      er;

  // instruction determination logic
  assign is_mul   = valid && (opcode == OPC_OP) && (funct7 == F7_MULDIV) && !funct3[2];
  assign high     = (funct3[1:0] != 2'b00);            // mulh, mulhsu, mulhu
  // mul takes both operands as signed: its exact low word is the same for any
  // signedness, and sign-magnitude operands keep the approximation error of a small
  // negative operand small instead of spreading it over a 32-bit magnitude.
  assign a_signed = (funct3[1:0] != 2'b11);            // mul, mulh, mulhsu
  assign b_signed = (funct3[1:0] == 2'b00) || (funct3[1:0] == 2'b01);   // mul, mulh

  assign sel_i    = is_mul && (execsr.sel == SLOT_I);
  assign sel_ii   = is_mul && (execsr.sel == SLOT_II);
  assign start_ii = sel_ii && !run_q;
  assign er       = execsr.err[6:0] | {7{~execsr.apx_en}};

  // Circuit I: accurate multiplier
  assign a1 = sel_i ? rs1 : '0;
  assign b1 = sel_i ? rs2 : '0;
  acc_mult32 u_circuit_i (.a(a1), .b(b1), .a_signed, .b_signed, .high, .result(r1));

  // Circuit II: approximate hierarchical multiplier
  assign a2 = sel_ii ? rs1 : '0;
  assign b2 = sel_ii ? rs2 : '0;
  apx_mult32 u_circuit_ii (
    .clk, .rst_n, .start(start_ii), .a(a2), .b(b2), .a_signed, .b_signed, .high,
    .er, .busy(busy2), .done(done2), .result(r2)
  );

  // run_q: a multi-cycle operation is in flight (from the cycle after start to done)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          run_q <= 1'b0;
    else if (start_ii)   run_q <= 1'b1;
    else if (done2)      run_q <= 1'b0;
  end

  // result MUX and busy MUX
  always_comb begin
    unique case (execsr.sel)
      SLOT_I:  begin result = r1; busy = 1'b0; end
      SLOT_II: begin result = r2; busy = start_ii || (run_q && !done2); end
      default: begin result = '0; busy = 1'b0; end
    endcase
  end

  logic unused;
  assign unused = busy2 | (|execsr.err[15:7]) | (|execsr.trunc) | (|execsr.custom_lo) | (|execsr.custom_hi);

  a_busy_until_done: assert property (@(posedge clk) disable iff (!rst_n) run_q |-> (busy2 || done2));
endmodule
