// div_unit: divider execution unit with four circuit slots.
//
// The instruction determination logic recognises div, divu, rem and remu (opcode OP,
// funct7 = 0000001, funct3[2] = 1). divcsr's sel field picks the circuit: slot I is
// the accurate divider acc_div32; slots II-IV are empty (result 0, never busy).
// Unselected slots get zero operands and no start.
// Handshake as in mul_unit: in the first cycle of a decoded division the divider is
// started and busy rises combinationally; busy stays high until the divider is done
// (33 busy cycles), and in the cycle busy falls result is valid and the
// instruction must leave the stage.
// Only an accurate divider is published for this configuration; the handshake and
// empty-slot value are this design's.
module div_unit
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
  logic            is_div, sel_i, start_i, run_q, busy1, done1;
  logic [XLEN-1:0] a1, b1, r1;

  // instruction determination logic
  assign is_div  = valid && (opcode == OPC_OP) && (funct7 == F7_MULDIV) && funct3[2];
  assign sel_i   = is_div && (execsr.sel == SLOT_I);
  assign start_i = sel_i && !run_q;

  assign a1 = sel_i ? rs1 : '0;
  assign b1 = sel_i ? rs2 : '0;
  acc_div32 #(.XLEN(XLEN)) u_circuit_i (
    .clk, .rst_n, .start(start_i), .a(a1), .b(b1),
    .is_signed(!funct3[0]), .want_rem(funct3[1]),
    .busy(busy1), .done(done1), .result(r1)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        run_q <= 1'b0;
    else if (start_i)  run_q <= 1'b1;
    else if (done1)    run_q <= 1'b0;
  end

  // result MUX and busy MUX
  always_comb begin
    if (execsr.sel == SLOT_I) begin
      result = r1;
      busy   = start_i || (run_q && !done1);
    end else begin
      result = '0;
      busy   = 1'b0;
    end
  end

  logic unused;
  assign unused = busy1 | execsr.apx_en | (|execsr.err) | (|execsr.trunc) | (|execsr.custom_lo) | (|execsr.custom_hi);

  a_busy_until_done: assert property (@(posedge clk) disable iff (!rst_n) run_q |-> (busy1 || done1));
endmodule
