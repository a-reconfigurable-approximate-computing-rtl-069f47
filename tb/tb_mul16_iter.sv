// tb_mul16_iter: checks the 16-bit multiplier built from one 8-bit unit over
// four cycles: exact products, the four-cycle busy time, approximate products
// against a byte-wise reference built from the exact 8-bit model, and that
// the result stays put after busy falls.
module tb_mul16_iter;
  logic        clk = 0, rst_n = 0, start = 0, approx = 0, busy;
  logic [15:0] a = 0, b = 0;
  logic [7:0]  err = 0;
  logic [31:0] product;
  int checks = 0, failures = 0, cyc = 0;

  mul16_iter dut (.*);
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

  function automatic logic [31:0] ref16(logic [15:0] x, logic [15:0] y, logic apx, logic [7:0] e);
    return 32'(m8(x[7:0], y[7:0], apx, e)) + (32'(m8(x[15:8], y[7:0], apx, e)) << 8)
         + (32'(m8(x[7:0], y[15:8], apx, e)) << 8) + (32'(m8(x[15:8], y[15:8], apx, e)) << 16);
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      int t0, lat;
      logic [31:0] exp;
      logic [15:0] a0, b0;
      @(negedge clk);
      a = 16'($urandom); b = 16'($urandom); approx = 1'($urandom); err = 8'($urandom);
      if (i < 5) begin a = 16'hFFFF; b = 16'hFFFF; end
      exp = ref16(a, b, approx, err);
      a0 = a; b0 = b;
      start = 1;
      @(negedge clk);
      start = 0; t0 = cyc;
      a = 16'($urandom); b = 16'($urandom);  // operands must be latched
      while (busy) @(negedge clk);
      lat = cyc - t0;
      checks++;
      if (lat != 4) begin failures++; if (failures < 5) $display("FAIL latency %0d", lat); end
      checks++;
      if (product != exp) begin failures++; if (failures < 5) $display("FAIL %h*%h apx=%0d got %h exp %h", a, b, approx, product, exp); end
      if (!approx) begin
        checks++;
        if (product != 32'(a0) * 32'(b0)) failures++;
      end
      @(negedge clk);
      checks++;
      if (product != exp) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
