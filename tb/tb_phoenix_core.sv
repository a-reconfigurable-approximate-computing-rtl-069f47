// tb_phoenix_core: end-to-end test of the core at its default parameters.
//
// A small program is assembled in the testbench (encoder functions below)
// into a word-addressed instruction memory; a separate byte-enabled data
// memory answers loads in the same cycle.  The program runs the paper's
// factorial example three times (mulcsr = 0 accurate, 0x007E0003 error level
// 6, 0x00000003 error level 0), sums an array with load-use hazards, uses
// byte loads/stores, exact and approximate DIV/REM, approximate and exact
// ADD/SUB under alucsr, a JAL/JALR call, AUIPC and MULH/MULHU, and stores
// every result to data memory.  The testbench computes the expected values
// independently (approximate results from reference models of the default
// circuits) and compares them.  It also counts each pipeline mechanism
// (load-use stall, multi-cycle stall, redirect/flush, EX and MW forwarding,
// CSR write, approximate multiply/divide/add) and fails any that never
// occurs, and checks the total multi-cycle stall time: 5 cycles per multiply,
// 33 per exact divide, 25 per divide at error level 8.
module tb_phoenix_core;
  import phoenix_pkg::*;

  logic        clk = 0, rst_n = 1;
  logic [31:0] imem_addr, imem_rdata, dmem_addr, dmem_wdata, dmem_rdata;
  logic        dmem_re, dmem_we;
  logic [3:0]  dmem_be;

  phoenix_core dut (.*);
  always #5 clk = ~clk;

  // ---------------- memories (behavioural, single cycle) ----------------
  logic [31:0] imem [1024];
  logic [31:0] dmem [1024];
  assign imem_rdata = imem[imem_addr[11:2]];
  assign dmem_rdata = dmem[dmem_addr[11:2]];
  always @(posedge clk)
    if (dmem_we)
      for (int b = 0; b < 4; b++)
        if (dmem_be[b]) dmem[dmem_addr[11:2]][8*b +: 8] <= dmem_wdata[8*b +: 8];

  // ---------------- assembler ----------------
  int pcw = 0;  // next instruction word index
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
  function automatic logic [31:0] j_t(int off, int rd);
    logic [20:0] m = 21'(off);
    return {m[20], m[10:1], m[11], m[19:12], 5'(rd), 7'b1101111};
  endfunction
  task automatic emit(logic [31:0] w); imem[pcw] = w; pcw++; endtask
  task automatic ADD(int rd, int a, int b);  emit(r_t(7'h00, b, a, 3'd0, rd, 7'b0110011)); endtask
  task automatic SUB(int rd, int a, int b);  emit(r_t(7'h20, b, a, 3'd0, rd, 7'b0110011)); endtask
  task automatic MULx(int f3, int rd, int a, int b); emit(r_t(7'h01, b, a, 3'(f3), rd, 7'b0110011)); endtask
  task automatic ADDI(int rd, int a, int imm); emit(i_t(imm, a, 3'd0, rd, 7'b0010011)); endtask
  task automatic LUI(int rd, int imm20); emit({20'(imm20), 5'(rd), 7'b0110111}); endtask
  task automatic AUIPC(int rd, int imm20); emit({20'(imm20), 5'(rd), 7'b0010111}); endtask
  task automatic LOAD(int f3, int rd, int a, int imm); emit(i_t(imm, a, 3'(f3), rd, 7'b0000011)); endtask
  task automatic STORE(int f3, int src, int a, int imm); emit(s_t(imm, src, a, 3'(f3))); endtask
  task automatic SW(int src, int imm); STORE(2, src, 1, imm); endtask
  task automatic BLT(int a, int b, int target); emit(b_t((target - pcw) * 4, b, a, 3'd4)); endtask
  task automatic CSRRW(int rd, int csr, int a); emit(i_t(csr, a, 3'd1, rd, 7'b1110011)); endtask
  task automatic CSRRS(int rd, int csr, int a); emit(i_t(csr, a, 3'd2, rd, 7'b1110011)); endtask
  task automatic JALR(int rd, int a, int imm); emit(i_t(imm, a, 3'd0, rd, 7'b1100111)); endtask

  // factorial of 10 in x2 (the loop of the paper's example), stored at off
  task automatic factorial(int off);
    int l1;
    ADDI(2, 0, 1); ADDI(3, 0, 1); ADDI(4, 0, 11);
    l1 = pcw;
    MULx(0, 2, 3, 2); ADDI(3, 3, 1); BLT(3, 4, l1);
    SW(2, off);
  endtask

  // ---------------- reference models ----------------
  function automatic logic [15:0] m8(logic [7:0] x, logic [7:0] y, logic apx, logic [7:0] e);
    int ex = 0;
    logic [15:0] orv = 0;
    for (int i = 0; i < 8; i++)
      for (int j = 0; j < 8; j++) begin
        int c = i + j;
        if (!apx || c >= 8 || (c >= 2 && e[c-1])) ex += int'(x[j] & y[i]) << c;
        else orv[c] = orv[c] | (x[j] & y[i]);
      end
    return 16'(ex) + orv;
  endfunction
  function automatic logic [31:0] mul_lo(logic [31:0] x, logic [31:0] y, logic apx, logic [7:0] e);
    logic [63:0] s = 0;
    for (int i = 0; i < 4; i++)
      for (int j = 0; j < 4; j++)
        s += 64'(m8(x[8*i +: 8], y[8*j +: 8], apx, e)) << (8 * (i + j));
    return s[31:0];
  endfunction
  function automatic logic [31:0] fact_ref(logic apx, logic [7:0] e);
    logic [31:0] acc = 1;
    for (int i = 1; i <= 10; i++) acc = mul_lo(32'(i), acc, apx, e);
    return acc;
  endfunction
  function automatic logic [31:0] add_apx(logic [31:0] x, logic [31:0] y, logic s);
    logic [31:0] yy = s ? ~y : y, r;
    logic c = s;
    logic [4:0] t;
    for (int k = 0; k < 8; k++) begin
      if (k < 4) begin r[4*k +: 4] = x[4*k +: 4] | yy[4*k +: 4]; c = x[4*k+3] & yy[4*k+3]; end
      else begin t = {1'b0, x[4*k +: 4]} + {1'b0, yy[4*k +: 4]} + {4'b0, c}; r[4*k +: 4] = t[3:0]; c = t[4]; end
    end
    return r;
  endfunction

  // ---------------- mechanism counters ----------------
  int checks = 0, failures = 0, cycles = 0, retired = 0;
  int n_load_use = 0, n_wait = 0, n_redirect = 0, n_fwd_ex = 0, n_fwd_mw = 0;
  int n_csr_write = 0, n_apx_mul = 0, n_apx_div = 0, n_apx_add = 0;
  always @(posedge clk) if (rst_n) begin
    cycles++;
    if (dut.exmw.valid) retired++;
    if (dut.load_use_stall) n_load_use++;
    if (dut.ex_wait) n_wait++;
    if (dut.ex_redirect) n_redirect++;
    if (!dut.fd_stall && (dut.fwd_1 == FWD_EX || dut.fwd_2 == FWD_EX)) n_fwd_ex++;
    if (!dut.fd_stall && (dut.fwd_1 == FWD_MW || dut.fwd_2 == FWD_MW)) n_fwd_mw++;
    if (dut.u_csu.do_write) n_csr_write++;
    if (dut.g_m.u_mul.start && approx_active(dut.mulcsr)) n_apx_mul++;
    if (dut.g_m.u_div.start && approx_active(dut.divcsr)) n_apx_div++;
    if (dut.fdex.valid && dut.d.opcode == OP_OP && dut.d.funct7 != 7'h01 && dut.d.funct3 == 0
        && approx_active(dut.alucsr)) n_apx_add++;
  end

  task automatic expect_mem(int off, logic [31:0] exp, string what);
    checks++;
    if (dmem[(32'h400 + off) >> 2] !== exp) begin
      failures++;
      $display("FAIL %s: mem[0x%0h] = %h, expected %h", what, 32'h400 + off, dmem[(32'h400 + off) >> 2], exp);
    end
  endtask

  task automatic expect_count(int n, string what);
    checks++;
    $display("  %-28s %0d", what, n);
    if (n == 0) begin failures++; $display("FAIL mechanism never happened: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int l2, l3, jal_at, func_at, auipc_at;
    foreach (imem[i]) imem[i] = 32'h0000_0013;   // nop
    foreach (dmem[i]) dmem[i] = 32'h0;

    // ----- program -----
    ADDI(1, 0, 12'h400);                          // x1 = data base
    factorial(0);                                 // accurate
    LUI(31, 20'h007E0); ADDI(31, 31, 3);          // x31 = 0x007E0003 (paper's mulcsr value)
    CSRRW(0, 12'h801, 31);
    factorial(4);                                 // error level 6
    CSRRS(5, 12'h801, 0); SW(5, 8);               // read back mulcsr
    ADDI(31, 0, 3); CSRRW(0, 12'h801, 31);        // error level 0
    factorial(12);
    CSRRW(0, 12'h801, 0);                         // back to accurate
    // array of 1..8, then sum it with a load-use hazard
    ADDI(6, 0, 0); ADDI(7, 0, 8); ADDI(8, 1, 64);
    l2 = pcw;
    ADDI(6, 6, 1); STORE(2, 6, 8, 0); ADDI(8, 8, 4); BLT(6, 7, l2);
    ADDI(8, 1, 64); ADDI(9, 0, 0); ADDI(6, 0, 0);
    l3 = pcw;
    LOAD(2, 12, 8, 0); ADD(9, 9, 12); ADDI(8, 8, 4); ADDI(6, 6, 1); BLT(6, 7, l3);
    SW(9, 16);
    // bytes
    ADDI(13, 0, -5); STORE(0, 13, 1, 21); LOAD(0, 14, 1, 21); LOAD(4, 15, 1, 21);
    SW(14, 24); SW(15, 28);
    // division, exact then error level 8
    LUI(16, 20'h12345); ADDI(16, 16, 12'h678); ADDI(17, 0, 100);
    MULx(4, 18, 16, 17); MULx(6, 19, 16, 17); SW(18, 32); SW(19, 36);
    LUI(31, 20'h00080); ADDI(31, 31, 3); CSRRW(0, 12'h802, 31);
    MULx(5, 18, 16, 17); MULx(7, 19, 16, 17); SW(18, 40); SW(19, 44);
    CSRRW(0, 12'h802, 0);
    // approximate then exact addition
    LUI(20, 20'h13579); ADDI(20, 20, 12'h2BD); LUI(21, 20'h2468A); ADDI(21, 21, 12'h1CF);
    ADDI(31, 0, 3); CSRRW(0, 12'h800, 31);
    ADD(22, 20, 21); SUB(23, 20, 21);
    CSRRW(0, 12'h800, 0);
    ADD(24, 20, 21);
    SW(22, 48); SW(23, 52); SW(24, 56);
    // call and return
    jal_at = pcw; emit(32'h0);                    // patched below: jal x25, func
    SW(26, 60);
    auipc_at = pcw; AUIPC(27, 1); SW(27, 64);
    // signed / unsigned high multiply
    ADDI(28, 0, -7); MULx(1, 29, 28, 16); MULx(3, 30, 28, 16); SW(29, 68); SW(30, 72);
    ADDI(31, 0, 1); STORE(2, 31, 0, 12'h7FC);     // done flag
    emit(j_t(0, 0));                              // spin
    func_at = pcw;
    ADDI(26, 0, 77); JALR(0, 25, 0);
    imem[jal_at] = j_t((func_at - jal_at) * 4, 25);

    // ----- run -----
    rst_n = 1; #1 rst_n = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    while (dmem[32'h7FC >> 2] != 1) @(posedge clk);
    repeat (3) @(posedge clk);

    expect_mem(0,  32'd3628800, "factorial accurate");
    expect_mem(4,  fact_ref(1'b1, 8'h7E), "factorial level 6");
    expect_mem(8,  32'h007E_0003, "mulcsr read back");
    expect_mem(12, fact_ref(1'b1, 8'h00), "factorial level 0");
    expect_mem(16, 32'd36, "array sum");
    expect_mem(24, 32'hFFFF_FFFB, "lb sign extend");
    expect_mem(28, 32'h0000_00FB, "lbu zero extend");
    expect_mem(32, 32'h12345678 / 100, "div");
    expect_mem(36, 32'h12345678 % 100, "rem");
    expect_mem(40, ((32'h12345678 / 100) >> 8) << 8, "divu level 8");
    expect_mem(44, 32'h12345678 - (((32'h12345678 / 100) >> 8) << 8) * 100, "remu level 8");
    expect_mem(48, add_apx(32'h135792BD, 32'h2468A1CF, 1'b0), "approximate add");
    expect_mem(52, add_apx(32'h135792BD, 32'h2468A1CF, 1'b1), "approximate sub");
    expect_mem(56, 32'h135792BD + 32'h2468A1CF, "exact add");
    expect_mem(60, 32'd77, "jal/jalr call");
    expect_mem(64, 32'(auipc_at * 4) + 32'h1000, "auipc");
    expect_mem(68, 32'((longint'(-7) * longint'(32'h12345678)) >>> 32), "mulh");
    expect_mem(72, 32'((64'(32'hFFFF_FFF9) * 64'(32'h12345678)) >> 32), "mulhu");
    checks++;
    if (fact_ref(1'b1, 8'h00) == 32'd3628800) begin failures++; $display("FAIL level 0 factorial is exact"); end

    $display("mechanisms:");
    expect_count(n_load_use, "load-use stall");
    expect_count(n_wait, "multi-cycle unit stall cycles");
    expect_count(n_redirect, "jump/branch redirect");
    expect_count(n_fwd_ex, "forward from EX");
    expect_count(n_fwd_mw, "forward from MW");
    expect_count(n_csr_write, "CSR write (mode switch)");
    expect_count(n_apx_mul, "approximate multiply");
    expect_count(n_apx_div, "approximate divide");
    expect_count(n_apx_add, "approximate add/sub");
    // 32 multiplies x 5 + 2 exact divides x 33 + 2 level-8 divides x 25
    checks++;
    if (n_wait != 32 * 5 + 2 * 33 + 2 * 25) begin
      failures++; $display("FAIL multi-cycle stall cycles %0d, expected %0d", n_wait, 32 * 5 + 2 * 33 + 2 * 25);
    end
    $display("cycles %0d, instructions retired %0d, CPI %0.3f", cycles, retired, real'(cycles) / real'(retired));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
