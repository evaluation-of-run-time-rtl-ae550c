// tb_workloads: the arithmetic kernels of the evaluated applications, executed
// instruction by instruction through the execution stage, once with the accurate
// multiplier (mulcsr = 0) and once with the approximate one (mulcsr = 0x007E0003:
// error field 0x7E, slot II, approximation on).
//
// Kernels (sizes are this testbench's own, small enough to simulate quickly):
//   2DConv3x3 / 2DConv5x5  one 8x8 image, 3x3 and 5x5 kernels
//   fir_int                16-tap FIR over 40 samples
//   iir_int                second-order IIR, Q8 coefficients, 40 samples
//   matMul_int             6x6 by 6x6 integer matrices
//   nr_solver              Newton-Raphson square roots in Q8 fixed point
//   factorial              1! .. 12!
// Only the operations of the stage are modelled (mul, add/addi, sub, srai, div);
// loads, stores and branches of the real programs are left to the testbench. For each
// kernel it checks that the accurate run matches a SystemVerilog golden model
// exactly, that every approximate multiply stalls 5 cycles and every division 33,
// and that every approximate product stays within the error bound of its non-zero
// byte pairs (16 at bit 4 of each 8x8 product for the 0x7E setting). For the
// accumulating, error-tolerant kernels (convolutions, FIR, matrix product) the mean
// relative output error must also stay below 2 %. Kernels with small operands
// (factorial, IIR, Newton-Raphson) see large relative errors, because the absolute
// error of an approximate product does not shrink with its size; those are only
// reported. It prints the error and the cycle counts of both runs.
module tb_workloads;
  import approx_pkg::*;

  logic clk = 0, rst_n = 0, valid = 0, busy;
  logic [31:0] pc = 32'h1000, rs1, rs2, imm, result, addr;
  logic [6:0] opcode, funct7;
  logic [2:0] funct3;
  logic [4:0] zimm = '0;
  execsr_t alucsr, mulcsr, divcsr;
  int checks = 0, failures = 0;
  int n_mul = 0, n_div = 0, stall_mul = 0, stall_div = 0, n_cyc = 0;
  bit apx_mode = 0;
  int n_bound_chk = 0, n_bound_fail = 0;

  exe_stage dut (.clk, .rst_n, .valid, .pc, .opcode, .funct3, .funct7, .rs1, .rs2, .imm, .zimm,
                 .result, .addr, .busy, .alucsr, .mulcsr, .divcsr);

  always #5 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endfunction

  task automatic exec(input logic [6:0] opc, input logic [2:0] f3, input logic [6:0] f7,
                      input logic [31:0] x, y, im, output logic [31:0] res, output int ns);
    @(negedge clk);
    valid = 1; opcode = opc; funct3 = f3; funct7 = f7; rs1 = x; rs2 = y; imm = im;
    #1;
    ns = 0;
    while (busy) begin @(negedge clk); #1; ns++; end
    res = result;
    n_cyc += ns + 1;
    @(negedge clk);
    valid = 0;
  endtask

  function automatic int s32(input logic [31:0] v); return int'($signed(v)); endfunction

  task automatic mul(input int x, y, output int r);
    logic [31:0] q; int ns;
    exec(OPC_OP, 3'b000, F7_MULDIV, 32'(x), 32'(y), 32'd0, q, ns);
    n_mul++; stall_mul += ns;
    r = s32(q);
    if (apx_mode) begin
      // each non-zero byte pair of the magnitudes may be off by 16 at its bit 4
      longint unsigned bnd;
      logic [31:0] ax, ay;
      longint d;
      ax = (x < 0) ? 32'(-x) : 32'(x);
      ay = (y < 0) ? 32'(-y) : 32'(y);
      bnd = 0;
      for (int i = 0; i < 4; i++)
        for (int j = 0; j < 4; j++)
          if (ax[8*i +: 8] != 0 && ay[8*j +: 8] != 0) bnd += 64'd16 << (8 * (i + j));
      d = longint'(r) - longint'(x * y);   // both wrap to 32 bits
      if (d < 0) d = -d;
      n_bound_chk++;
      if (bnd < 64'h8000_0000 && longint'(d) > longint'(bnd)) begin
        n_bound_fail++;
        $display("FAIL product %0d * %0d = %0d, bound %0d", x, y, r, bnd);
      end
    end
  endtask
  task automatic div(input int x, y, output int r);
    logic [31:0] q; int ns;
    exec(OPC_OP, 3'b100, F7_MULDIV, 32'(x), 32'(y), 32'd0, q, ns);
    n_div++; stall_div += ns;
    r = s32(q);
  endtask
  task automatic add(input int x, y, output int r);
    logic [31:0] q; int ns;
    exec(OPC_OP, 3'b000, 7'd0, 32'(x), 32'(y), 32'd0, q, ns); r = s32(q);
  endtask
  task automatic sub(input int x, y, output int r);
    logic [31:0] q; int ns;
    exec(OPC_OP, 3'b000, F7_ALT, 32'(x), 32'(y), 32'd0, q, ns); r = s32(q);
  endtask
  task automatic addi(input int x, input int im, output int r);
    logic [31:0] q; int ns;
    exec(OPC_OPIMM, 3'b000, 7'd0, 32'(x), 32'd0, 32'(im), q, ns); r = s32(q);
  endtask
  task automatic srai(input int x, input int sh, output int r);
    logic [31:0] q; int ns;
    exec(OPC_OPIMM, 3'b101, F7_ALT, 32'(x), 32'd0, {27'd0, 5'(sh)} | 32'h400, q, ns); r = s32(q);
  endtask
  task automatic set_mulcsr(input logic [31:0] v);
    logic [31:0] q; int ns;
    exec(OPC_SYSTEM, 3'b001, 7'd0, v, 32'd0, 32'h801, q, ns);
  endtask

  // ---------------- kernels: out[] gets the results, n the count ----------------
  int img [64], k3 [9], k5 [25], xs [40], taps [16], ma [36], mb [36];
  int out [64];
  int nout;

  task automatic k_conv(input int ks);
    int acc, p;
    nout = 0;
    for (int r = 0; r + ks <= 8; r++)
      for (int c = 0; c + ks <= 8; c++) begin
        acc = 0;
        for (int i = 0; i < ks; i++)
          for (int j = 0; j < ks; j++) begin
            mul(img[(r + i) * 8 + c + j], (ks == 3) ? k3[i * 3 + j] : k5[i * 5 + j], p);
            add(acc, p, acc);
          end
        out[nout++] = acc;
      end
  endtask
  function automatic void g_conv(input int ks, ref int g [64], output int n);
    n = 0;
    for (int r = 0; r + ks <= 8; r++)
      for (int c = 0; c + ks <= 8; c++) begin
        g[n] = 0;
        for (int i = 0; i < ks; i++)
          for (int j = 0; j < ks; j++)
            g[n] += img[(r + i) * 8 + c + j] * ((ks == 3) ? k3[i * 3 + j] : k5[i * 5 + j]);
        n++;
      end
  endfunction

  task automatic k_fir();
    int acc, p;
    nout = 0;
    for (int n = 15; n < 40; n++) begin
      acc = 0;
      for (int t = 0; t < 16; t++) begin mul(xs[n - t], taps[t], p); add(acc, p, acc); end
      out[nout++] = acc;
    end
  endtask
  function automatic void g_fir(ref int g [64], output int cnt);
    cnt = 0;
    for (int n = 15; n < 40; n++) begin
      g[cnt] = 0;
      for (int t = 0; t < 16; t++) g[cnt] += xs[n - t] * taps[t];
      cnt++;
    end
  endfunction

  // y[n] = (b0*x[n] + b1*x[n-1] + b2*x[n-2] + a1*y[n-1] + a2*y[n-2]) >>> 8
  localparam int B0 = 64, B1 = 128, B2 = 64, A1 = 100, A2 = -40;
  task automatic k_iir();
    int y1, y2, acc, p;
    y1 = 0; y2 = 0; nout = 0;
    for (int n = 2; n < 40; n++) begin
      mul(xs[n], B0, acc);
      mul(xs[n - 1], B1, p); add(acc, p, acc);
      mul(xs[n - 2], B2, p); add(acc, p, acc);
      mul(y1, A1, p); add(acc, p, acc);
      mul(y2, A2, p); add(acc, p, acc);
      srai(acc, 8, acc);
      y2 = y1; y1 = acc;
      out[nout++] = acc;
    end
  endtask
  function automatic void g_iir(ref int g [64], output int cnt);
    int y1, y2, acc;
    y1 = 0; y2 = 0; cnt = 0;
    for (int n = 2; n < 40; n++) begin
      acc = (xs[n] * B0 + xs[n - 1] * B1 + xs[n - 2] * B2 + y1 * A1 + y2 * A2) >>> 8;
      y2 = y1; y1 = acc;
      g[cnt++] = acc;
    end
  endfunction

  task automatic k_matmul();
    int acc, p;
    nout = 0;
    for (int i = 0; i < 6; i++)
      for (int j = 0; j < 6; j++) begin
        acc = 0;
        for (int t = 0; t < 6; t++) begin mul(ma[i * 6 + t], mb[t * 6 + j], p); add(acc, p, acc); end
        out[nout++] = acc;
      end
  endtask
  function automatic void g_matmul(ref int g [64], output int cnt);
    cnt = 0;
    for (int i = 0; i < 6; i++)
      for (int j = 0; j < 6; j++) begin
        g[cnt] = 0;
        for (int t = 0; t < 6; t++) g[cnt] += ma[i * 6 + t] * mb[t * 6 + j];
        cnt++;
      end
  endfunction

  // x <- x - (x*x - a) / (2x), Q8 fixed point, 6 iterations per root
  task automatic k_nr();
    int x, f, d, q;
    nout = 0;
    for (int i = 0; i < 12; i++) begin
      x = 256 * 8;
      for (int it = 0; it < 6; it++) begin
        mul(x, x, f); srai(f, 8, f); sub(f, xs[i] * 256, f);
        add(x, x, d);
        mul(f, 256, f);
        div(f, d, q);
        sub(x, q, x);
      end
      out[nout++] = x;
    end
  endtask
  function automatic void g_nr(ref int g [64], output int cnt);
    int x, f;
    cnt = 0;
    for (int i = 0; i < 12; i++) begin
      x = 256 * 8;
      for (int it = 0; it < 6; it++) begin
        f = ((x * x) >>> 8) - xs[i] * 256;
        x = x - (f * 256) / (x + x);
      end
      g[cnt++] = x;
    end
  endfunction

  task automatic k_fact();
    int f;
    f = 1; nout = 0;
    for (int i = 1; i <= 12; i++) begin mul(f, i, f); out[nout++] = f; end
  endtask
  function automatic void g_fact(ref int g [64], output int cnt);
    int f;
    f = 1; cnt = 0;
    for (int i = 1; i <= 12; i++) begin f *= i; g[cnt++] = f; end
  endfunction

  task automatic run_kernel(input int id);
    case (id)
      0: k_conv(3);
      1: k_conv(5);
      2: k_fir();
      3: k_iir();
      4: k_matmul();
      5: k_nr();
      default: k_fact();
    endcase
  endtask
  function automatic void golden(input int id, ref int g [64], output int cnt);
    case (id)
      0: g_conv(3, g, cnt);
      1: g_conv(5, g, cnt);
      2: g_fir(g, cnt);
      3: g_iir(g, cnt);
      4: g_matmul(g, cnt);
      5: g_nr(g, cnt);
      default: g_fact(g, cnt);
    endcase
  endfunction

  initial begin
    string names [7] = '{"2DConv3x3", "2DConv5x5", "fir_int", "iir_int", "matMul_int", "nr_solver", "factorial"};
    int g [64];
    int cnt, cyc_acc, cyc_apx, wrong;
    real mre;

    foreach (img[i]) img[i] = $urandom % 256;
    foreach (k3[i]) k3[i] = 1 + $urandom % 15;
    foreach (k5[i]) k5[i] = 1 + $urandom % 15;
    foreach (xs[i]) xs[i] = 16 + $urandom % 200;
    foreach (taps[i]) taps[i] = 1 + $urandom % 63;
    foreach (ma[i]) ma[i] = $urandom % 1000;
    foreach (mb[i]) mb[i] = $urandom % 1000;

    repeat (3) @(posedge clk);
    rst_n = 1;

    for (int id = 0; id < 7; id++) begin
      golden(id, g, cnt);
      // accurate run
      set_mulcsr(32'h0000_0000);
      apx_mode = 0;
      n_mul = 0; n_div = 0; stall_mul = 0; stall_div = 0; n_cyc = 0;
      run_kernel(id);
      cyc_acc = n_cyc;
      wrong = 0;
      for (int i = 0; i < cnt; i++) if (out[i] != g[i]) wrong++;
      check(nout == cnt && wrong == 0, {names[id], ": accurate run matches golden model"});
      check(stall_mul == 0 && stall_div == 33 * n_div, {names[id], ": accurate stalls"});
      // approximate run
      set_mulcsr(32'h007E_0003);
      apx_mode = 1;
      n_mul = 0; n_div = 0; stall_mul = 0; stall_div = 0; n_cyc = 0;
      run_kernel(id);
      cyc_apx = n_cyc;
      mre = 0.0; wrong = 0;
      for (int i = 0; i < cnt; i++) begin
        if (out[i] != g[i]) wrong++;
        mre += ((out[i] > g[i]) ? real'(out[i] - g[i]) : real'(g[i] - out[i])) / ((g[i] == 0) ? 1.0 : ((g[i] > 0) ? real'(g[i]) : -real'(g[i])));
      end
      mre = 100.0 * mre / real'(cnt);
      check(stall_mul == 5 * n_mul && stall_div == 33 * n_div, {names[id], ": approximate stalls"});
      // error-tolerant kernels with large accumulations: small relative error expected
      if (id <= 2 || id == 4) check(mre < 2.0, {names[id], ": approximate mean relative error below 2%"});
      check(n_bound_fail == 0 && n_bound_chk > 0, {names[id], ": every approximate product within its error bound"});
      n_bound_chk = 0;
      n_bound_fail = 0;
      $display("%-10s outputs %0d, multiplies %0d, divides %0d | cycles accurate %0d, approximate %0d | approximate: wrong outputs %0d, mean relative error %f %%",
               names[id], cnt, n_mul, n_div, cyc_acc, cyc_apx, wrong, mre);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
