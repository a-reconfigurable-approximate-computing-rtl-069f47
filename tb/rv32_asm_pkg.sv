// rv32_asm_pkg: RV32 instruction encoders used by the core testbenches to
// assemble their programs.  Each function returns one instruction word in
// the RISC-V base format named by the function; offsets are in bytes.
package rv32_asm_pkg;
  function automatic logic [31:0] r_t(logic [6:0] f7, int rs2, int rs1, logic [2:0] f3, int rd, logic [6:0] op);
    return {f7, 5'(rs2), 5'(rs1), f3, 5'(rd), op};
  endfunction
  function automatic logic [31:0] i_t(int imm, int rs1, logic [2:0] f3, int rd, logic [6:0] op);
    return {12'(imm), 5'(rs1), f3, 5'(rd), op};
  endfunction
  function automatic logic [31:0] s_t(int imm, int rs2, int rs1, logic [2:0] f3);
    logic [11:0] m = 12'(imm);
    return {m[11:5], 5'(rs2), 5'(rs1), f3, m[4:0], 7'b0100011};
  endfunction
  function automatic logic [31:0] b_t(int off, int rs2, int rs1, logic [2:0] f3);
    logic [12:0] m = 13'(off);
    return {m[12], m[10:5], 5'(rs2), 5'(rs1), f3, m[4:1], m[11], 7'b1100011};
  endfunction
  function automatic logic [31:0] u_t(int imm20, int rd, logic [6:0] op);
    return {20'(imm20), 5'(rd), op};
  endfunction
  function automatic logic [31:0] j_t(int off, int rd);
    logic [20:0] m = 21'(off);
    return {m[20], m[10:1], m[11], m[19:12], 5'(rd), 7'b1101111};
  endfunction
endpackage
