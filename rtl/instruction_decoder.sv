// instruction_decoder: splits a 32-bit RV32 instruction into its fields.
//
// With no central control unit, the decoder only extracts fields and a few
// generic flags; each execution unit derives its own control signals from
// opcode/funct3/funct7.  Outputs: opcode, funct3, funct7, funct12 (CSR
// address), the two source register indices with read enables, the
// destination index with a write enable (never set for x0); index fields
// are passed raw (the rs1 field doubles as zimm for CSR immediate forms), and the
// instruction type that steers the immediate generator.  FENCE, ECALL and
// EBREAK decode as instructions without register effects (no traps are
// modelled).  Combinational.
module instruction_decoder
  import phoenix_pkg::*;
(
  input  logic [31:0] instruction,
  output decoded_t    dec
);
  logic [6:0] opc;
  assign opc = instruction[6:0];

  always_comb begin
    dec.opcode  = opc;
    dec.funct3  = instruction[14:12];
    dec.funct7  = instruction[31:25];
    dec.funct12 = instruction[31:20];
    dec.rs1     = instruction[19:15];
    dec.rs2     = instruction[24:20];
    dec.rd      = instruction[11:7];
    dec.rs1_en  = 1'b0;
    dec.rs2_en  = 1'b0;
    dec.rd_en   = 1'b0;
    dec.itype   = TYPE_I;
    case (opc)
      OP_LUI, OP_AUIPC: begin dec.itype = TYPE_U; dec.rd_en = 1'b1; end
      OP_JAL:           begin dec.itype = TYPE_J; dec.rd_en = 1'b1; end
      OP_JALR, OP_LOAD, OP_IMM: begin
        dec.itype = TYPE_I; dec.rs1_en = 1'b1; dec.rd_en = 1'b1;
      end
      OP_BRANCH: begin dec.itype = TYPE_B; dec.rs1_en = 1'b1; dec.rs2_en = 1'b1; end
      OP_STORE:  begin dec.itype = TYPE_S; dec.rs1_en = 1'b1; dec.rs2_en = 1'b1; end
      OP_OP: begin
        dec.itype = TYPE_R; dec.rs1_en = 1'b1; dec.rs2_en = 1'b1; dec.rd_en = 1'b1;
      end
      OP_SYSTEM: begin
        // CSR instructions; funct3[2] = 1 selects the immediate (zimm) forms
        if (instruction[13:12] != 2'b00) begin
          dec.rd_en  = 1'b1;
          dec.rs1_en = ~instruction[14];
        end
      end
      default: ;
    endcase
    if (dec.rd == 5'd0) dec.rd_en = 1'b0;
  end
endmodule
