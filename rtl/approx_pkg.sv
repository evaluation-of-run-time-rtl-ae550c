// approx_pkg: types and constants shared by the approximation-aware execution stage.
//
// Every execution unit (ALU, multiplier, divider) is steered by one 32-bit control
// register with the same field layout: bit 0 enables approximation, bits 2:1 pick one
// of four circuit slots, bits 7:3 are a truncation field, bits 11:8 and 15:12 are free
// for designer-defined features and bits 31:16 carry the error-control word for
// error-configurable circuits. The field layout and the CSR addresses 0x800..0x802
// follow the published description; the enum encodings below are this design's own.
package approx_pkg;

  localparam int unsigned XLEN = 32;

  // Field layout of alucsr / mulcsr / divcsr (MSB first).
  typedef struct packed {
    logic [15:0] err;        // [31:16] error control of error-configurable circuits
    logic [3:0]  custom_hi;  // [15:12] designer-defined
    logic [3:0]  custom_lo;  // [11:8]  designer-defined
    logic [4:0]  trunc;      // [7:3]   dynamic truncation control
    logic [1:0]  sel;        // [2:1]   selected circuit (0 = Circuit I)
    logic        apx_en;     // [0]     1 = approximate, 0 = accurate
  } execsr_t;

  localparam logic [11:0] ALUCSR_ADDR = 12'h800;
  localparam logic [11:0] MULCSR_ADDR = 12'h801;
  localparam logic [11:0] DIVCSR_ADDR = 12'h802;

  // Circuit slot numbers (the sel field).
  localparam logic [1:0] SLOT_I   = 2'd0;
  localparam logic [1:0] SLOT_II  = 2'd1;
  localparam logic [1:0] SLOT_III = 2'd2;
  localparam logic [1:0] SLOT_IV  = 2'd3;

  // RV32 major opcodes.
  localparam logic [6:0] OPC_LUI    = 7'b0110111;
  localparam logic [6:0] OPC_AUIPC  = 7'b0010111;
  localparam logic [6:0] OPC_JAL    = 7'b1101111;
  localparam logic [6:0] OPC_JALR   = 7'b1100111;
  localparam logic [6:0] OPC_BRANCH = 7'b1100011;
  localparam logic [6:0] OPC_LOAD   = 7'b0000011;
  localparam logic [6:0] OPC_STORE  = 7'b0100011;
  localparam logic [6:0] OPC_OPIMM  = 7'b0010011;
  localparam logic [6:0] OPC_OP     = 7'b0110011;
  localparam logic [6:0] OPC_SYSTEM = 7'b1110011;

  localparam logic [6:0] F7_MULDIV  = 7'b0000001;
  localparam logic [6:0] F7_ALT     = 7'b0100000;

  // ALU operations (internal encoding).
  typedef enum logic [3:0] {
    ALU_ADD, ALU_SUB, ALU_SLL, ALU_SLT, ALU_SLTU,
    ALU_XOR, ALU_SRL, ALU_SRA, ALU_OR,  ALU_AND
  } alu_op_t;

  // CSR access kinds after decoding csrrw/csrrs/csrrc (and the immediate forms).
  typedef enum logic [1:0] {
    CSR_WRITE = 2'd1,
    CSR_SET   = 2'd2,
    CSR_CLEAR = 2'd3
  } csr_op_t;

endpackage
