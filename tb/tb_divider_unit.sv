// tb_divider_unit: DIV/DIVU/REM/REMU through the divider unit.
// Accurate slot (divcsr = 0, or approximation selected with error level 0)
// must give the RISC-V results, including division by zero and signed
// overflow, in 32 cycles (0 for division by zero).  With error level e > 0 the
// busy time must shrink to 32 - min(e,31), the quotient magnitude must equal
// the exact one with its low min(e,31) bits cleared, and the remainder must
// satisfy dividend = quotient * divisor + remainder.
module tb_divider_unit;
  import phoenix_pkg::*;
  logic        clk = 0, rst_n = 0, start = 0, busy;
  logic [2:0]  funct3 = 0;
  logic [31:0] rs1 = 0, rs2 = 0, result;
  exec_csr_t   csr = '0;
  int checks = 0, failures = 0, cyc = 0;

  divider_unit dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  function automatic logic [31:0] ref_div(logic [2:0] f, logic [31:0] x, logic [31:0] y);
    longint sx, sy;
    if (y == 0) return f[1] ? x : 32'hFFFF_FFFF;
    if (!f[0]) begin
      sx = longint'($signed(x)); sy = longint'($signed(y));
      return f[1] ? 32'(sx % sy) : 32'(sx / sy);
    end
    return f[1] ? x % y : x / y;
  endfunction

  task automatic run(logic [2:0] f, logic [31:0] x, logic [31:0] y, exec_csr_t c);
    int t0, lat, skip;
    logic apx;
    logic [31:0] r;
    apx  = c.approx_enable && c.circuit_select == 2'b01;
    skip = !apx ? 0 : (c.error_control[7:0] > 31 ? 31 : int'(c.error_control[7:0]));
    @(negedge clk);
    funct3 = f; rs1 = x; rs2 = y; csr = c; start = 1;
    @(negedge clk);
    start = 0; t0 = cyc; csr = '0;
    while (busy) @(negedge clk);
    lat = cyc - t0; r = result;
    checks++;
    if (lat != ((y == 0) ? 0 : 32 - skip)) begin
      failures++; if (failures < 6) $display("FAIL latency %0d skip %0d", lat, skip);
    end
    checks++;
    if (skip == 0) begin
      if (r != ref_div(f, x, y)) begin
        failures++; if (failures < 6) $display("FAIL f3=%0d %h / %h got %h exp %h", f, x, y, r, ref_div(f, x, y));
      end
    end else begin
      // unsigned forms: check truncated quotient / consistent remainder
      logic [31:0] q_exact = x / y;
      logic [31:0] q_trunc = (q_exact >> skip) << skip;
      if (y == 0) begin
        if (r != ref_div(f, x, y)) failures++;
      end else if (!f[1]) begin
        if (r != q_trunc) begin failures++; if (failures < 6) $display("FAIL apx q %h exp %h", r, q_trunc); end
      end else begin
        if (r != x - q_trunc * y) begin failures++; if (failures < 6) $display("FAIL apx r %h exp %h", r, x - q_trunc * y); end
      end
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    exec_csr_t c;
    repeat (2) @(posedge clk);
    rst_n = 1;
    c = '0;
    run(3'b100, 32'h8000_0000, 32'hFFFF_FFFF, c);  // signed overflow
    run(3'b110, 32'h8000_0000, 32'hFFFF_FFFF, c);
    run(3'b100, 32'd1234, 32'd0, c);               // divide by zero
    run(3'b111, 32'd1234, 32'd0, c);
    for (int i = 0; i < 1500; i++) begin
      automatic logic [31:0] x = $urandom, y = $urandom;
      if (i % 3 == 0) y = y >> $urandom_range(0, 31);
      c = '0;
      if (i % 5 == 1) begin c.approx_enable = 1; c.circuit_select = 2'b01; c.error_control = 16'h0; end
      if (i % 5 == 2) begin c.approx_enable = 1; c.circuit_select = 2'b10; c.error_control = 16'h5; end
      run(3'($urandom_range(4, 7)), x, y, c);
    end
    for (int i = 0; i < 800; i++) begin
      automatic logic [31:0] x = $urandom, y = $urandom >> $urandom_range(0, 31);
      c = '0; c.approx_enable = 1; c.circuit_select = 2'b01;
      c.error_control = 16'($urandom_range(1, 40));
      run(($urandom & 1) ? 3'b101 : 3'b111, x, y, c);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
