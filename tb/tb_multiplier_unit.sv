// tb_multiplier_unit: MUL/MULH/MULHSU/MULHU through the multiplier unit.
// With mulcsr = 0 (accurate) every result must match the exact 64-bit
// product; with mulcsr selecting the approximate slot (bit 0 = 1, bits 2:1 =
// 01) results must match a reference built from the column model of the 8-bit
// multiplier arranged as in the hierarchical scheme.  Reserved slots must be
// exact.  Latency from start to busy falling must be 4 cycles.
module tb_multiplier_unit;
  import phoenix_pkg::*;
  logic        clk = 0, rst_n = 0, start = 0, busy;
  logic [2:0]  funct3 = 0;
  logic [31:0] rs1 = 0, rs2 = 0, result;
  exec_csr_t   csr = '0;
  int checks = 0, failures = 0, cyc = 0, n_apx_diff = 0;

  multiplier_unit dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

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
  function automatic logic [63:0] m32(logic [31:0] x, logic [31:0] y, logic apx, logic [7:0] e);
    logic [63:0] s = 0;
    for (int i = 0; i < 4; i++)
      for (int j = 0; j < 4; j++)
        s += 64'(m8(x[8*i +: 8], y[8*j +: 8], apx, e)) << (8 * (i + j));
    return s;
  endfunction
  function automatic logic [31:0] ref_mul(logic [2:0] f, logic [31:0] x, logic [31:0] y,
                                          logic apx, logic [7:0] e);
    logic sx = (f[1:0] != 2'b11) && x[31];
    logic sy = (f[1:0] == 2'b01 || f[1:0] == 2'b00) && y[31];
    logic [63:0] p = m32(sx ? -x : x, sy ? -y : y, apx, e);
    if (sx ^ sy) p = -p;
    return (f[1:0] == 2'b00) ? p[31:0] : p[63:32];
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      int t0;
      logic [31:0] exp, exact;
      logic        apx;
      @(negedge clk);
      funct3 = 3'($urandom_range(0, 3));
      rs1 = $urandom; rs2 = $urandom;
      if (i % 7 == 0) rs1 = 32'h8000_0000;
      if (i % 11 == 0) rs2 = 32'hFFFF_FFFF;
      if (i % 13 == 0) rs2 = 32'($urandom_range(0, 20));
      csr = '0;
      unique case (i % 4)
        0: csr = '0;
        1: begin csr.approx_enable = 1; csr.circuit_select = 2'b01; csr.error_control = 16'($urandom & 8'h7E); end
        2: begin csr.approx_enable = 1; csr.circuit_select = 2'($urandom_range(2, 3)); csr.error_control = 16'h0; end
        3: begin csr.approx_enable = 0; csr.circuit_select = 2'b01; csr.error_control = 16'h0; end
      endcase
      apx   = (i % 4 == 1);
      exact = ref_mul(funct3, rs1, rs2, 1'b0, 8'h0);
      exp   = ref_mul(funct3, rs1, rs2, apx, csr.error_control[7:0]);
      if (apx && exp != exact) n_apx_diff++;
      start = 1;
      @(negedge clk);
      start = 0; t0 = cyc;
      csr = '0; rs1 = $urandom;          // settings are taken at start
      while (busy) @(negedge clk);
      checks++;
      if (cyc - t0 != 4) begin failures++; if (failures < 5) $display("FAIL latency %0d", cyc - t0); end
      checks++;
      if (result != exp) begin
        failures++;
        if (failures < 8) $display("FAIL f3=%0d apx=%0d got %h exp %h", funct3, apx, result, exp);
      end
    end
    checks++;
    if (n_apx_diff == 0) begin failures++; $display("FAIL approximate slot never differs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
