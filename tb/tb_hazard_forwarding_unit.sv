// tb_hazard_forwarding_unit: random stage contents against the forwarding
// priority rule (EX before MW before register file, never for x0 or a
// disabled read, only from valid stages that write) and the load-use stall.
module tb_hazard_forwarding_unit;
  import phoenix_pkg::*;
  logic [4:0] fd_rs1, fd_rs2, ex_rd, mw_rd;
  logic       fd_rs1_en, fd_rs2_en, ex_valid, ex_rd_en, ex_is_load, mw_valid, mw_rd_en;
  fwd_sel_e   fwd_1, fwd_2;
  logic       load_use_stall;
  int checks = 0, failures = 0;

  hazard_forwarding_unit dut (.*);

  function automatic fwd_sel_e ref_sel(logic [4:0] r, logic en);
    if (en && r != 0 && ex_valid && ex_rd_en && ex_rd == r) return FWD_EX;
    if (en && r != 0 && mw_valid && mw_rd_en && mw_rd == r) return FWD_MW;
    return FWD_REGFILE;
  endfunction

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_ex = 0, n_mw = 0, n_st = 0;
    for (int i = 0; i < 5000; i++) begin
      fwd_sel_e e1, e2;
      fd_rs1 = 5'($urandom_range(0, 3)); fd_rs2 = 5'($urandom_range(0, 3));
      ex_rd = 5'($urandom_range(0, 3));  mw_rd = 5'($urandom_range(0, 3));
      {fd_rs1_en, fd_rs2_en, ex_valid, ex_rd_en, ex_is_load, mw_valid, mw_rd_en} = 7'($urandom);
      e1 = ref_sel(fd_rs1, fd_rs1_en); e2 = ref_sel(fd_rs2, fd_rs2_en);
      #1 checks += 3;
      if (fwd_1 != e1) failures++;
      if (fwd_2 != e2) failures++;
      if (load_use_stall != (ex_is_load && (e1 == FWD_EX || e2 == FWD_EX))) failures++;
      n_ex += (e1 == FWD_EX); n_mw += (e1 == FWD_MW); n_st += load_use_stall;
    end
    checks++;
    if (n_ex == 0 || n_mw == 0 || n_st == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
