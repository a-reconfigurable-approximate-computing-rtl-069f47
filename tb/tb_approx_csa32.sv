// tb_approx_csa32: checks the accuracy-controllable carry-select adder.
// Exact mode (approx = 0, or error field 0x0F) must match a + b / a - b.
// Approximate mode is compared with a reference model of the block scheme:
// blocks 0..3 whose error bit is clear give (a | b) per bit, carry out
// a[3] & b[3], and ignore their carry in.
module tb_approx_csa32;
  logic [31:0] a, b, sum;
  logic        sub, approx;
  logic [7:0]  err;
  int checks = 0, failures = 0;

  approx_csa32 dut (.*);

  function automatic logic [31:0] ref_add(logic [31:0] x, logic [31:0] y, logic s,
                                          logic apx, logic [7:0] e);
    logic [31:0] yy, r;
    logic        c;
    logic [4:0]  t;
    yy = s ? ~y : y;
    c  = s;
    for (int k = 0; k < 8; k++) begin
      if (apx && k < 4 && !e[k]) begin
        r[4*k +: 4] = x[4*k +: 4] | yy[4*k +: 4];
        c = x[4*k+3] & yy[4*k+3];
      end else begin
        t = {1'b0, x[4*k +: 4]} + {1'b0, yy[4*k +: 4]} + {4'b0, c};
        r[4*k +: 4] = t[3:0];
        c = t[4];
      end
    end
    return r;
  endfunction

  task automatic check(logic [31:0] exp, string what);
    checks++;
    if (sum !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s a=%h b=%h sub=%0d apx=%0d err=%h got %h exp %h",
                                  what, a, b, sub, approx, err, sum, exp);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_diff = 0;
    for (int i = 0; i < 3000; i++) begin
      a = $urandom; b = $urandom; sub = 1'($urandom);
      approx = 1'b0; err = 8'($urandom);
      #1 check(sub ? a - b : a + b, "exact");
      approx = 1'b1; err = 8'h0F;
      #1 check(sub ? a - b : a + b, "err=0x0F exact");
      approx = 1'b1; err = 8'($urandom);
      #1 check(ref_add(a, b, sub, 1'b1, err), "approx");
      if (sum != (sub ? a - b : a + b)) n_diff++;
    end
    // a carry that must ripple through every block in exact mode
    a = 32'hFFFF_FFFF; b = 32'h1; sub = 0; approx = 0; err = 0;
    #1 check(32'h0, "full carry chain");
    // the approximation must actually change some results
    checks++;
    if (n_diff == 0) begin failures++; $display("FAIL approximation never differs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
