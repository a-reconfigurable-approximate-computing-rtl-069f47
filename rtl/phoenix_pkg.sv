// phoenix_pkg: types and constants shared by the phoeniX-style RV32I(E)M core.
//
// Holds the RV32 major opcodes, the layout of the three execution-engine
// control/status registers (alucsr, mulcsr, divcsr) and the record that the
// decode stage hands to the execute stage.  The CSR layout follows the paper's
// register format exactly: bit 0 enables approximation, bits 2:1 select one of
// four circuits, bits 7:3 truncation control, 11:8 custom field I, 15:12 custom
// field II, 31:16 error control.  Note the paper's bullet list and its register
// figure disagree on which of 7:3 / 15:12 is truncation; the figure (7:3) is
// followed here.  The CSR addresses 0x800..0x802 are the paper's.
package phoenix_pkg;

  localparam int unsigned XLEN = 32;

  // RV32 major opcodes (RISC-V unprivileged specification)
  typedef enum logic [6:0] {
    OP_LUI    = 7'b0110111,
    OP_AUIPC  = 7'b0010111,
    OP_JAL    = 7'b1101111,
    OP_JALR   = 7'b1100111,
    OP_BRANCH = 7'b1100011,
    OP_LOAD   = 7'b0000011,
    OP_STORE  = 7'b0100011,
    OP_IMM    = 7'b0010011,
    OP_OP     = 7'b0110011,
    OP_FENCE  = 7'b0001111,
    OP_SYSTEM = 7'b1110011
  } opcode_e;

  // Instruction formats, as produced by the decoder for the immediate generator
  typedef enum logic [2:0] {
    TYPE_R, TYPE_I, TYPE_S, TYPE_B, TYPE_U, TYPE_J
  } instr_type_e;

  // funct7 of the M extension on OP_OP
  localparam logic [6:0] FUNCT7_MULDIV = 7'b0000001;
  localparam logic [6:0] FUNCT7_ALT    = 7'b0100000;

  // Execution-engine CSR addresses (paper: 0x800, 0x801, 0x802)
  localparam logic [11:0] CSR_ALUCSR = 12'h800;
  localparam logic [11:0] CSR_MULCSR = 12'h801;
  localparam logic [11:0] CSR_DIVCSR = 12'h802;

  // Circuit-select encodings (bits 2:1).  Slot 0 holds the accurate circuit,
  // slot 1 the default approximate / accuracy-controllable circuit, slots 2
  // and 3 are reserved for designer circuits.
  localparam logic [1:0] CIRCUIT_ACCURATE = 2'd0;
  localparam logic [1:0] CIRCUIT_APPROX   = 2'd1;

  // Field view of an execution-engine CSR (MSB first)
  typedef struct packed {
    logic [15:0] error_control;   // [31:16]
    logic [3:0]  custom2;         // [15:12]
    logic [3:0]  custom1;         // [11:8]
    logic [4:0]  trunc_control;   // [7:3]
    logic [1:0]  circuit_select;  // [2:1]
    logic        approx_enable;   // [0]
  } exec_csr_t;

  // Where the write-back value of an instruction comes from
  typedef enum logic [1:0] {
    WB_EXEC, WB_NEXT_PC, WB_IMM, WB_LOAD
  } wb_sel_e;

  // Source of an operand in the fetch/decode stage
  typedef enum logic [1:0] {
    FWD_REGFILE, FWD_EX, FWD_MW
  } fwd_sel_e;

  // Decoded fields of one instruction (decoder output)
  typedef struct packed {
    logic [6:0]  opcode;
    logic [2:0]  funct3;
    logic [6:0]  funct7;
    logic [11:0] funct12;   // CSR address for SYSTEM
    logic [4:0]  rs1;
    logic [4:0]  rs2;
    logic        rs1_en;
    logic        rs2_en;
    logic [4:0]  rd;
    logic        rd_en;
    instr_type_e itype;
  } decoded_t;

  // True when the approximate circuit of a unit is the one in use
  function automatic logic approx_active(exec_csr_t c);
    return c.approx_enable && (c.circuit_select == CIRCUIT_APPROX);
  endfunction

endpackage
