// tb_exe_stage: end-to-end test of the execution stage at its default size.
//
// The testbench plays the decode stage: it presents one instruction at a time,
// holds it while busy is high and takes result/addr in the cycle busy is low.
// Sequence:
//  1. CSR instructions: read the reset values, csrrw/csrrs/csrrc/csrrwi on
//     alucsr, mulcsr, divcsr, read back;
//  2. RV32I ALU instructions (OP and OP-IMM), lui, auipc, jal, jalr, load/store
//     address generation, all against a reference model;
//  3. multiply with mulcsr selecting the accurate slot I (no stall) and, after a
//     csrrw of 0x007E0003 (error field 0x7E, slot II, approximation on), the
//     approximate slot II (5-cycle stall); division (33-cycle stall);
//  4. an empty slot; approximate addition through alucsr;
//  5. a 3x3 convolution over an 8x8 image computed with mul/add instructions, once
//     with the accurate and once with the approximate multiplier.
// Every mechanism (stall, circuit switch, approximate add/multiply, CSR
// write/set/clear, empty slot, immediate operand) is counted and must occur.
module tb_exe_stage;
  import approx_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, valid = 0, busy;
  logic [31:0] pc, rs1, rs2, imm, result, addr;
  logic [6:0] opcode, funct7;
  logic [2:0] funct3;
  logic [4:0] zimm;
  execsr_t alucsr, mulcsr, divcsr;
  int checks = 0, failures = 0, cycles = 0;

  // mechanism counters
  int n_stall_mul = 0, n_stall_div = 0, n_switch = 0, n_apx_mul = 0, n_apx_add = 0;
  int n_csr_w = 0, n_csr_s = 0, n_csr_c = 0, n_empty = 0, n_imm = 0, n_agen = 0;

  exe_stage dut (.clk, .rst_n, .valid, .pc, .opcode, .funct3, .funct7, .rs1, .rs2, .imm, .zimm,
                 .result, .addr, .busy, .alucsr, .mulcsr, .divcsr);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic exec(input logic [6:0] opc, input logic [2:0] f3, input logic [6:0] f7,
                      input logic [31:0] x, y, im, input logic [4:0] z,
                      output logic [31:0] res, output int nstall);
    @(negedge clk);
    valid = 1; opcode = opc; funct3 = f3; funct7 = f7; rs1 = x; rs2 = y; imm = im; zimm = z;
    pc = 32'h0000_1000 + 32'($urandom % 1024) * 4;
    #1;
    nstall = 0;
    while (busy) begin @(negedge clk); #1; nstall++; end
    res = result;
    @(negedge clk);
    valid = 0; opcode = 7'd0; rs1 = $urandom; rs2 = $urandom;
  endtask

  function automatic void check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endfunction

  // CSR helpers: csrrw / csrrs / csrrc with a register source, returning the old value
  task automatic csr(input logic [2:0] f3, input logic [11:0] a, input logic [31:0] v, output logic [31:0] old);
    int ns;
    exec(OPC_SYSTEM, f3, 7'd0, v, 32'd0, {20'd0, a}, 5'(v), old, ns);
  endtask

  task automatic mul(input logic [2:0] f3, input logic [31:0] x, y, output logic [31:0] r, output int ns);
    exec(OPC_OP, f3, F7_MULDIV, x, y, 32'd0, 5'd0, r, ns);
  endtask

  task automatic add(input logic [31:0] x, y, output logic [31:0] r);
    int ns;
    exec(OPC_OP, 3'b000, 7'd0, x, y, 32'd0, 5'd0, r, ns);
  endtask

  // 3x3 convolution of an 8x8 image through the stage; returns the sum of relative
  // errors against the exact convolution and the number of wrong pixels.
  task automatic conv3x3(input logic [31:0] img [64], input logic [31:0] k [9],
                         output real rel_err, output int wrong);
    logic [31:0] acc, pr, exact;
    int ns;
    rel_err = 0.0;
    wrong = 0;
    for (int r = 0; r < 6; r++)
      for (int c = 0; c < 6; c++) begin
        acc = 0;
        exact = 0;
        for (int i = 0; i < 3; i++)
          for (int j = 0; j < 3; j++) begin
            mul(3'b000, img[(r + i) * 8 + c + j], k[i * 3 + j], pr, ns);
            add(acc, pr, acc);
            exact += img[(r + i) * 8 + c + j] * k[i * 3 + j];
          end
        if (acc != exact) wrong++;
        rel_err += ((acc > exact) ? real'(acc - exact) : real'(exact - acc)) / real'(exact);
      end
  endtask

  initial begin
    logic [31:0] r, old, x, y, expv;
    logic [31:0] img [64];
    logic [31:0] k [9];
    real rel_acc, rel_apx;
    int ns, wrong_acc, wrong_apx;
    logic [127:0] full;

    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- 1. CSRs ----
    csr(3'b010, 12'h800, 32'd0, old); check(old == 0, "alucsr reset");
    csr(3'b010, 12'h801, 32'd0, old); check(old == 0, "mulcsr reset");
    csr(3'b010, 12'h802, 32'd0, old); check(old == 0, "divcsr reset");
    csr(3'b001, 12'h802, 32'h1234_5678, old); n_csr_w++;
    csr(3'b010, 12'h802, 32'h0000_0001, old); n_csr_s++; check(old == 32'h1234_5678, "csrrw divcsr");
    csr(3'b011, 12'h802, 32'hFFFF_FFFF, old); n_csr_c++; check(old == 32'h1234_5679, "csrrs divcsr");
    csr(3'b010, 12'h802, 32'd0, old); check(old == 0 && divcsr == '0, "csrrc divcsr");
    exec(OPC_SYSTEM, 3'b101, 7'd0, 32'd0, 32'd0, 32'h0000_0800, 5'd6, r, ns); n_csr_w++;   // csrrwi alucsr, 6
    check(alucsr.sel == SLOT_IV && !alucsr.apx_en, "csrrwi alucsr");

    // ---- 4a. empty ALU slot ----
    add(32'd5, 32'd6, r); n_empty++; check(r == 0, "empty ALU slot gives 0");
    csr(3'b001, 12'h800, 32'd0, old);  n_csr_w++;

    // ---- 2. ALU, immediates, control flow, addresses ----
    for (int i = 0; i < 400; i++) begin
      logic [2:0] f3;
      logic [6:0] f7;
      logic [31:0] im;
      logic isimm;
      isimm = $urandom % 2;
      f3 = $urandom; x = $urandom; y = $urandom; im = 32'($signed(12'($urandom)));
      f7 = ((f3 == 3'b000 && !isimm) || f3 == 3'b101) && ($urandom % 2) ? F7_ALT : 7'd0;
      if (isimm) begin
        exec(OPC_OPIMM, f3, f7, x, y, im, 5'd0, r, ns); n_imm++;
        y = im;
      end else
        exec(OPC_OP, f3, f7, x, y, 32'd0, 5'd0, r, ns);
      case (f3)
        3'b000: expv = (!isimm && f7[5]) ? x - y : x + y;
        3'b001: expv = x << y[4:0];
        3'b010: expv = ($signed(x) < $signed(y)) ? 32'd1 : 32'd0;
        3'b011: expv = (x < y) ? 32'd1 : 32'd0;
        3'b100: expv = x ^ y;
        3'b101: expv = f7[5] ? 32'($signed(x) >>> y[4:0]) : x >> y[4:0];
        3'b110: expv = x | y;
        default: expv = x & y;
      endcase
      check(r == expv && ns == 0, $sformatf("ALU f3=%0d imm=%0d", f3, isimm));
    end
    exec(OPC_LUI, 3'd0, 7'd0, 32'd0, 32'd0, 32'hABCDE000, 5'd0, r, ns); check(r == 32'hABCDE000, "lui");
    exec(OPC_AUIPC, 3'd0, 7'd0, 32'd0, 32'd0, 32'h0001_0000, 5'd0, r, ns); check(r == pc + 32'h0001_0000, "auipc");
    exec(OPC_JAL, 3'd0, 7'd0, 32'd0, 32'd0, 32'h0000_0100, 5'd0, r, ns);
    check(r == pc + 4, "jal link"); check(addr == pc + 32'h100, "jal target"); n_agen++;
    exec(OPC_JALR, 3'd0, 7'd0, 32'h0000_2001, 32'd0, 32'h0000_0010, 5'd0, r, ns);
    check(r == pc + 4 && addr == 32'h0000_2010, "jalr"); n_agen++;
    exec(OPC_LOAD, 3'b010, 7'd0, 32'h0000_4000, 32'd0, 32'hFFFF_FFFC, 5'd0, r, ns);
    check(addr == 32'h0000_3FFC, "lw address"); n_agen++;
    exec(OPC_STORE, 3'b010, 7'd0, 32'h0000_4000, 32'd7, 32'h0000_0008, 5'd0, r, ns);
    check(addr == 32'h0000_4008, "sw address"); n_agen++;

    // ---- 3. multiply: accurate slot I ----
    for (int i = 0; i < 200; i++) begin
      logic [2:0] f3;
      f3 = 3'($urandom % 4); x = $urandom; y = $urandom;
      mul(f3, x, y, r, ns);
      full = 128'($signed({(f3 == 1 || f3 == 2) & x[31], x})) * 128'($signed({(f3 == 1) & y[31], y}));
      check(r == ((f3 == 0) ? full[31:0] : full[63:32]) && ns == 0, "accurate multiply");
    end
    // switch to the approximate circuit: error field 0x7E, slot II, approximation on
    csr(3'b001, 12'h801, 32'h007E_0003, old); n_csr_w++; n_switch++;
    for (int i = 0; i < 200; i++) begin
      x = $urandom % 256; y = $urandom % 256;
      mul(3'b000, x, y, r, ns);
      if (ns == 5) n_stall_mul++;
      if (r != x * y) n_apx_mul++;
      check(ns == 5, "approximate multiply stalls 5 cycles");
      check((int'(r) - int'(x * y)) % 16 == 0 && (r > x * y ? r - x * y : x * y - r) <= 16, "approximate 8-bit product error bound");
    end
    // clear only the enable bit: slot II now computes exactly
    csr(3'b011, 12'h801, 32'h0000_0001, old); n_csr_c++;
    for (int i = 0; i < 50; i++) begin
      x = $urandom; y = $urandom;
      mul(3'b011, x, y, r, ns);
      check(r == 32'((64'(x) * 64'(y)) >> 32) && ns == 5, "slot II with approximation off is exact");
    end
    csr(3'b010, 12'h801, 32'h0000_0001, old); n_csr_s++;

    // ---- 3b. division ----
    for (int i = 0; i < 50; i++) begin
      x = $urandom; y = ($urandom % 1000) + 1;
      exec(OPC_OP, 3'b101, F7_MULDIV, x, y, 32'd0, 5'd0, r, ns);
      if (ns == 33) n_stall_div++;
      check(r == x / y && ns == 33, "divu");
      exec(OPC_OP, 3'b111, F7_MULDIV, x, y, 32'd0, 5'd0, r, ns);
      check(r == x % y && ns == 33, "remu");
    end

    // ---- 4b. approximate addition through alucsr ----
    csr(3'b001, 12'h800, 32'h0000_0001, old); n_csr_w++;    // every controlled bit approximate
    for (int i = 0; i < 200; i++) begin
      x = $urandom; y = $urandom;
      add(x, y, r);
      if (r != x + y) n_apx_add++;
      check(r == csa_ref(x, y, 1'b0, 32'hFFFF_0000)[31:0], "approximate add");
    end
    csr(3'b001, 12'h800, 32'd0, old); n_csr_w++;

    // ---- 5. 3x3 convolution, accurate vs approximate multiplier ----
    foreach (img[i]) img[i] = $urandom % 256;
    foreach (k[i]) k[i] = 1 + $urandom % 255;
    csr(3'b001, 12'h801, 32'd0, old); n_switch++;
    conv3x3(img, k, rel_acc, wrong_acc);
    check(wrong_acc == 0, "accurate convolution exact");
    csr(3'b001, 12'h801, 32'h007E_0003, old); n_switch++;
    conv3x3(img, k, rel_apx, wrong_apx);
    check(rel_apx / 36.0 < 0.01, "approximate convolution mean relative error below 1%");
    $display("conv3x3: accurate wrong pixels %0d, approximate wrong pixels %0d / 36, mean relative error %f %%",
             wrong_acc, wrong_apx, 100.0 * rel_apx / 36.0);

    // ---- mechanism coverage ----
    check(n_stall_mul > 0, "mechanism: multiplier stall");
    check(n_stall_div > 0, "mechanism: divider stall");
    check(n_switch > 0,    "mechanism: circuit switch");
    check(n_apx_mul > 0,   "mechanism: approximate product");
    check(n_apx_add > 0,   "mechanism: approximate sum");
    check(n_csr_w > 0 && n_csr_s > 0 && n_csr_c > 0, "mechanism: csr write/set/clear");
    check(n_empty > 0,     "mechanism: empty slot");
    check(n_imm > 0,       "mechanism: immediate operand");
    check(n_agen > 0,      "mechanism: address generation");
    $display("counts: mul stalls %0d, div stalls %0d, switches %0d, apx products %0d, apx sums %0d, csr w/s/c %0d/%0d/%0d, empty %0d, imm %0d, agen %0d, cycles %0d",
             n_stall_mul, n_stall_div, n_switch, n_apx_mul, n_apx_add, n_csr_w, n_csr_s, n_csr_c, n_empty, n_imm, n_agen, cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
