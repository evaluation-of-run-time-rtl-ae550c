// tb_approx_csrs: reset values, write/set/clear at 0x800..0x802, read-back, the
// hit flag, and no effect of accesses to other addresses.
module tb_approx_csrs;
  import approx_pkg::*;
  logic clk = 0, rst_n = 0, csr_we = 0, csr_hit;
  csr_op_t csr_op;
  logic [11:0] csr_addr;
  logic [31:0] csr_wdata, csr_rdata;
  execsr_t alucsr, mulcsr, divcsr;
  logic [31:0] model [3];
  int checks = 0, failures = 0;

  approx_csrs dut (.clk, .rst_n, .csr_we, .csr_op, .csr_addr, .csr_wdata, .csr_rdata, .csr_hit, .alucsr, .mulcsr, .divcsr);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    csr_addr = 12'h800; csr_op = CSR_WRITE; csr_wdata = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++;
    if (alucsr != '0 || mulcsr != '0 || divcsr != '0) failures++;
    model = '{32'd0, 32'd0, 32'd0};
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      csr_addr  = ($urandom % 4 == 3) ? 12'($urandom) : 12'h800 + 12'($urandom % 3);
      csr_op    = csr_op_t'(1 + $urandom % 3);
      csr_wdata = $urandom;
      csr_we    = $urandom;
      #1;
      checks++;
      if (csr_addr >= 12'h800 && csr_addr <= 12'h802) begin
        if (csr_rdata !== model[csr_addr - 12'h800] || !csr_hit) failures++;
        if (csr_we) begin
          case (csr_op)
            CSR_SET:   model[csr_addr - 12'h800] |= csr_wdata;
            CSR_CLEAR: model[csr_addr - 12'h800] &= ~csr_wdata;
            default:   model[csr_addr - 12'h800] = csr_wdata;
          endcase
        end
      end else if (csr_hit || csr_rdata != 0) failures++;
      @(posedge clk); #1;
      checks++;
      if (alucsr !== model[0] || mulcsr !== model[1] || divcsr !== model[2]) begin
        failures++;
        if (failures < 10) $display("FAIL regs %h %h %h exp %h %h %h", alucsr, mulcsr, divcsr, model[0], model[1], model[2]);
      end
    end
    // the value used in the evaluation: error field 0x7E, slot II, approximation on
    @(negedge clk); csr_addr = 12'h801; csr_op = CSR_WRITE; csr_wdata = 32'h007E_0003; csr_we = 1;
    @(negedge clk); csr_we = 0;
    checks++;
    if (mulcsr.err != 16'h007E || mulcsr.sel != SLOT_II || !mulcsr.apx_en) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
