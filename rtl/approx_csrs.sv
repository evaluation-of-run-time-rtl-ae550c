// approx_csrs: the three approximation control registers of the execution stage.
//
// alucsr (0x800), mulcsr (0x801) and divcsr (0x802) each hold one execsr_t word
// (see approx_pkg) for the ALU, multiplier and divider units. Access follows the
// RISC-V Zicsr read-modify-write model: csr_rdata is the current value of the
// addressed register (combinational); when csr_we is high the register is written
// at the next clock edge with wdata (CSR_WRITE), old | wdata (CSR_SET) or
// old & ~wdata (CSR_CLEAR). csr_hit says whether csr_addr names one of the three.
// Reset clears all three, which selects the accurate Circuit I of every unit.
// Addresses and field layout are published; reset value and access port are this
// design's choices.
module approx_csrs
  import approx_pkg::*;
#(
  parameter logic [11:0] ALUCSR_ADDR_P = ALUCSR_ADDR,
  parameter logic [11:0] MULCSR_ADDR_P = MULCSR_ADDR,
  parameter logic [11:0] DIVCSR_ADDR_P = DIVCSR_ADDR
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        csr_we,
  input  csr_op_t     csr_op,
  input  logic [11:0] csr_addr,
  input  logic [31:0] csr_wdata,
  output logic [31:0] csr_rdata,
  output logic        csr_hit,
  output execsr_t     alucsr,
  output execsr_t     mulcsr,
  output execsr_t     divcsr
);
  logic [31:0] new_val;

  always_comb begin
    unique case (csr_addr)
      ALUCSR_ADDR_P: begin csr_rdata = alucsr; csr_hit = 1'b1; end
      MULCSR_ADDR_P: begin csr_rdata = mulcsr; csr_hit = 1'b1; end
      DIVCSR_ADDR_P: begin csr_rdata = divcsr; csr_hit = 1'b1; end
      default:       begin csr_rdata = '0;     csr_hit = 1'b0; end
    endcase
  end

  always_comb begin
    unique case (csr_op)
      CSR_SET:   new_val = csr_rdata | csr_wdata;
      CSR_CLEAR: new_val = csr_rdata & ~csr_wdata;
      default:   new_val = csr_wdata;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      alucsr <= '0;
      mulcsr <= '0;
      divcsr <= '0;
    end else if (csr_we) begin
      if (csr_addr == ALUCSR_ADDR_P) alucsr <= new_val;
      if (csr_addr == MULCSR_ADDR_P) mulcsr <= new_val;
      if (csr_addr == DIVCSR_ADDR_P) divcsr <= new_val;
    end
  end
endmodule
