// hazard_forwarding_unit: data-hazard detection and forwarding selection.
//
// Operands are read in the fetch/decode stage.  For each source register the
// unit compares the index with the destinations of the instructions in the
// execute (EX) and memory/write-back (MW) stages and selects the youngest
// producer: the EX result, else the MW write data, else the register file.
// A load in EX cannot forward (its data appears in MW), so a dependent
// instruction in decode is held for one cycle: load_use_stall.  Stalls for
// busy multi-cycle units are raised by the core's stall logic, not here.
// Combinational.
module hazard_forwarding_unit
  import phoenix_pkg::*;
(
  input  logic [4:0] fd_rs1,
  input  logic       fd_rs1_en,
  input  logic [4:0] fd_rs2,
  input  logic       fd_rs2_en,
  input  logic       ex_valid,
  input  logic [4:0] ex_rd,
  input  logic       ex_rd_en,
  input  logic       ex_is_load,
  input  logic       mw_valid,
  input  logic [4:0] mw_rd,
  input  logic       mw_rd_en,
  output fwd_sel_e   fwd_1,
  output fwd_sel_e   fwd_2,
  output logic       load_use_stall
);
  function automatic fwd_sel_e pick(logic [4:0] rs, logic en, logic ex_hit_ok, logic mw_hit_ok);
    if (!en || rs == 5'd0)                                     return FWD_REGFILE;
    if (ex_hit_ok && rs == ex_rd)                              return FWD_EX;
    if (mw_hit_ok && rs == mw_rd)                              return FWD_MW;
    return FWD_REGFILE;
  endfunction

  logic ex_w, mw_w;
  always_comb begin
    ex_w  = ex_valid && ex_rd_en;
    mw_w  = mw_valid && mw_rd_en;
    fwd_1 = pick(fd_rs1, fd_rs1_en, ex_w, mw_w);
    fwd_2 = pick(fd_rs2, fd_rs2_en, ex_w, mw_w);
    load_use_stall = ex_is_load && ((fwd_1 == FWD_EX) || (fwd_2 == FWD_EX));
  end
endmodule
