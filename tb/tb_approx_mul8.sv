// tb_approx_mul8: exhaustive check of the 8x8 error-configurable multiplier.
// Exact mode must equal a*b for all 65536 operand pairs.  For each of the
// seven error-control codes 0x00..0x7E a reference column model is compared
// and the error metrics are computed: ER (share of wrong products), NMED
// (mean |error| divided by the largest exact product, 255*255) and MRED (mean
// |error| / exact product, over the pairs whose exact product is non-zero).
// ER and NMED must not rise as the level goes up, level 0 must be the worst
// and some level must be inexact.  The metrics are printed for comparison
// with published figures; they are not expected to match another cell's.
module tb_approx_mul8;
  logic [7:0]  a, b, err;
  logic        approx;
  logic [15:0] p;
  int checks = 0, failures = 0;

  approx_mul8 dut (.*);

  function automatic logic [15:0] ref_mul(logic [7:0] x, logic [7:0] y, logic [7:0] e);
    int ex = 0;
    logic [15:0] orv = 0;
    for (int i = 0; i < 8; i++)
      for (int j = 0; j < 8; j++) begin
        int c = i + j;
        logic bit_ = x[j] & y[i];
        logic exact = (c >= 8) || (c >= 2 && e[c-1]);
        if (exact) ex += int'(bit_) << c;
        else       orv[c] = orv[c] | bit_;
      end
    return 16'(ex) + orv;
  endfunction

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] codes [7] = '{8'h00, 8'h40, 8'h60, 8'h70, 8'h78, 8'h7C, 8'h7E};
    int er [7];
    real ed [7], red [7];
    approx = 0; err = 0;
    for (int x = 0; x < 256; x++)
      for (int y = 0; y < 256; y++) begin
        a = 8'(x); b = 8'(y);
        #1 checks++;
        if (p != 16'(x * y)) begin failures++; if (failures < 5) $display("FAIL exact %0d*%0d=%0d", x, y, p); end
      end
    approx = 1;
    for (int l = 0; l < 7; l++) begin
      err = codes[l]; er[l] = 0; ed[l] = 0.0; red[l] = 0.0;
      for (int x = 0; x < 256; x++)
        for (int y = 0; y < 256; y++) begin
          a = 8'(x); b = 8'(y);
          #1 checks++;
          if (p != ref_mul(a, b, err)) begin
            failures++; if (failures < 5) $display("FAIL apx lvl %0d %0d*%0d=%0d", l, x, y, p);
          end
          if (p != 16'(x * y)) begin
            automatic int d = (int'(p) > x * y) ? int'(p) - x * y : x * y - int'(p);
            er[l]++;
            ed[l] += real'(d);
            red[l] += real'(d) / real'(x * y);
          end
        end
      $display("error level %0d (code 0x%02h): ER = %0.2f %%  NMED = %0.3f %%  MRED = %0.2f %%", l, codes[l],
               100.0 * er[l] / 65536.0, 100.0 * ed[l] / 65536.0 / 65025.0, 100.0 * red[l] / 65536.0);
    end
    for (int l = 1; l < 7; l++) begin
      checks++;
      if (er[l] > er[l-1]) begin failures++; $display("FAIL ER rises at level %0d", l); end
      checks++;
      if (ed[l] > ed[l-1]) begin failures++; $display("FAIL NMED rises at level %0d", l); end
    end
    checks++;
    if (er[0] == 0 || er[0] <= er[6]) begin failures++; $display("FAIL level 0 not the least accurate"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
