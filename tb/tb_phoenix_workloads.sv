// tb_phoenix_workloads: the kinds of application the platform is evaluated
// with, run as programs on the core at its default parameters, at small sizes.
//
//  * image sharpening: 5x5 convolution of a 64x64 8-bit image (interior
//    60x60 pixels; images are one pixel per word), division by the kernel sum and clamping to 0..255, run
//    with mulcsr accurate and at error levels 0..6 (codes 0x00..0x7E); only
//    the multiplications are approximate.  The kernel (-1 everywhere, 49 in
//    the centre, sum 25) is an assumed sharpening kernel.  PSNR against the
//    accurate image is printed per level.
//  * 3x3 convolution of the same image (same program, 3x3 kernel), error
//    code 0x78.
//  * bubble sort of 16 words (code 0x00), Fibonacci numbers 0..24 (code
//    0x7E), maximum of 32 words (code 0x60), 8-tap FIR over 32 samples
//    (code 0x60): the error fields listed for these programs in the paper.
//
// Every output word is compared with a value computed here: exact results
// for programs without multiplication, and for the approximate runs the
// product model of the default multiplier (column-OR 8-bit units arranged
// hierarchically).  Cycle counts and CPI are printed for each run.
module tb_phoenix_workloads;
  import phoenix_pkg::*;
  import rv32_asm_pkg::*;

  logic        clk = 0, rst_n = 1;
  logic [31:0] imem_addr, imem_rdata, dmem_addr, dmem_wdata, dmem_rdata;
  logic        dmem_re, dmem_we;
  logic [3:0]  dmem_be;

  phoenix_core dut (.*);
  always #5 clk = ~clk;

  logic [31:0] imem [1024];
  logic [31:0] dmem [16384];
  assign imem_rdata = imem[imem_addr[11:2]];
  assign dmem_rdata = dmem[dmem_addr[15:2]];
  always @(posedge clk)
    if (dmem_we)
      for (int b = 0; b < 4; b++)
        if (dmem_be[b]) dmem[dmem_addr[15:2]][8*b +: 8] <= dmem_wdata[8*b +: 8];

  localparam int CFG = 32'h0FF0, DONE = 32'h0FFC, KER = 32'h1800, ARR = 32'h2000,
                 RES = 32'h2400, IMG = 32'h4000, OUT = 32'h8000;

  // ---------------- assembler ----------------
  int pcw;
  task automatic emit(logic [31:0] w); imem[pcw] = w; pcw++; endtask
  task automatic OPR(int f7, int f3, int rd, int a, int b); emit(r_t(7'(f7), b, a, 3'(f3), rd, 7'b0110011)); endtask
  task automatic ADD(int rd, int a, int b) ; OPR(0, 0, rd, a, b); endtask
  task automatic MUL(int rd, int a, int b) ; OPR(1, 0, rd, a, b); endtask
  task automatic DIV(int rd, int a, int b) ; OPR(1, 4, rd, a, b); endtask
  task automatic ADDI(int rd, int a, int imm); emit(i_t(imm, a, 3'd0, rd, 7'b0010011)); endtask
  task automatic SLLI(int rd, int a, int sh);  emit(i_t(sh, a, 3'd1, rd, 7'b0010011)); endtask
  task automatic LUI(int rd, int imm20); emit(u_t(imm20, rd, 7'b0110111)); endtask
  task automatic LW(int rd, int a, int imm); emit(i_t(imm, a, 3'd2, rd, 7'b0000011)); endtask
  task automatic SW(int src, int a, int imm); emit(s_t(imm, src, a, 3'd2)); endtask
  task automatic BR(int f3, int a, int b, int target); emit(b_t((target - pcw) * 4, b, a, 3'(f3))); endtask
  task automatic BLT(int a, int b, int target); BR(4, a, b, target); endtask
  task automatic BGE(int a, int b, int target); BR(5, a, b, target); endtask
  task automatic LI(int rd, int v);   // v < 2^31
    if (v >= -2048 && v < 2048) ADDI(rd, 0, v);
    else begin
      int hi = (v + 32'h800) >>> 12;
      LUI(rd, hi); ADDI(rd, rd, v - (hi << 12));
    end
  endtask
  task automatic prologue();  // mulcsr <- mem[CFG]
    pcw = 0;
    foreach (imem[i]) imem[i] = 32'h0000_0013;
    LI(31, CFG); LW(31, 31, 0); emit(i_t(12'h801, 31, 3'd1, 0, 7'b1110011));
  endtask
  task automatic epilogue();
    LI(31, 1); LI(30, DONE); SW(31, 30, 0); emit(j_t(0, 0));
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
  function automatic int mul_ref(int x, int y, logic apx, logic [7:0] e);   // MUL, signed
    logic [31:0] ax = (x < 0) ? 32'(-x) : 32'(x), ay = (y < 0) ? 32'(-y) : 32'(y);
    logic [63:0] s = 0;
    for (int i = 0; i < 4; i++)
      for (int j = 0; j < 4; j++)
        s += 64'(m8(ax[8*i +: 8], ay[8*j +: 8], apx, e)) << (8 * (i + j));
    if ((x < 0) != (y < 0)) s = -s;
    return int'(s[31:0]);
  endfunction

  int checks = 0, failures = 0;
  task automatic expect_word(int addr, int exp, string what);
    checks++;
    if (int'(dmem[addr >> 2]) != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: mem[0x%0h] = %0d, expected %0d", what, addr, int'(dmem[addr >> 2]), exp);
    end
  endtask

  task automatic run(logic [31:0] cfg, string name);
    int cyc = 0, ret = 0;
    dmem[CFG >> 2] = cfg; dmem[DONE >> 2] = 0;
    rst_n = 1; #1 rst_n = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    while (dmem[DONE >> 2] != 1 && cyc < 4000000) begin
      @(posedge clk); cyc++;
      if (dut.exmw.valid) ret++;
    end
    checks++;
    if (cyc >= 4000000) begin failures++; $display("FAIL %s did not finish", name); end
    $display("%-34s mulcsr=%08h  cycles %0d  instructions %0d  CPI %0.3f", name, cfg, cyc, ret,
             real'(cyc) / real'(ret));
  endtask

  // ---------------- programs ----------------
  // K x K convolution over an N x N image of words at IMG, interior result
  // (divided by DV and clamped to 0..255) to OUT; kernel words at KER.
  localparam int N = 64;                          // image side, a power of two
  localparam int ROW_SH = $clog2(N) + 2;          // log2 of the row stride in bytes
  task automatic prog_conv(int K, int DV);
    int lr, lc, lkr, lkc, h = K / 2;
    prologue();
    LI(1, IMG); LI(2, OUT); LI(3, KER); LI(15, DV); LI(16, 255); LI(18, K); LI(19, N - h);
    ADDI(5, 0, h);
    lr = pcw; ADDI(6, 0, h);
    lc = pcw; ADDI(9, 0, 0);
    ADDI(12, 5, -h); SLLI(12, 12, ROW_SH); ADDI(13, 6, -h); SLLI(13, 13, 2); ADD(12, 12, 13); ADD(10, 1, 12);
    ADD(11, 3, 0); ADDI(7, 0, 0);
    lkr = pcw; ADDI(8, 0, 0); ADD(17, 10, 0);
    lkc = pcw; LW(12, 17, 0); LW(13, 11, 0); MUL(12, 12, 13); ADD(9, 9, 12);
    ADDI(17, 17, 4); ADDI(11, 11, 4); ADDI(8, 8, 1); BLT(8, 18, lkc);
    ADDI(10, 10, 4 * N); ADDI(7, 7, 1); BLT(7, 18, lkr);
    DIV(9, 9, 15);
    emit(b_t(8, 0, 9, 3'd5));  ADDI(9, 0, 0);     // if (acc < 0)   acc = 0
    emit(b_t(8, 9, 16, 3'd5)); ADDI(9, 0, 255);   // if (acc > 255) acc = 255
    SLLI(12, 5, ROW_SH); SLLI(13, 6, 2); ADD(12, 12, 13); ADD(12, 2, 12); SW(9, 12, 0);
    ADDI(6, 6, 1); BLT(6, 19, lc);
    ADDI(5, 5, 1); BLT(5, 19, lr);
    epilogue();
  endtask

  int img [N*N];
  int ker [25];
  int golden [N*N];

  function automatic int conv_ref(int K, int DV, int r, int c, logic apx, logic [7:0] e);
    int acc = 0, h = K / 2, q;
    for (int kr = 0; kr < K; kr++)
      for (int kc = 0; kc < K; kc++)
        acc += mul_ref(img[(r + kr - h) * N + (c + kc - h)], ker[kr * K + kc], apx, e);
    q = acc / DV;
    return (q < 0) ? 0 : (q > 255) ? 255 : q;
  endfunction

  task automatic conv_test(int K, int DV, logic [7:0] code, logic apx, string name);
    int h = K / 2;
    real mse = 0.0;
    foreach (dmem[i]) dmem[i] = 0;
    for (int i = 0; i < N * N; i++) dmem[(IMG >> 2) + i] = img[i];
    for (int i = 0; i < K * K; i++) dmem[(KER >> 2) + i] = ker[i];
    run(apx ? {8'h00, code, 16'h0003} : 32'h0, name);
    for (int r = h; r < N - h; r++)
      for (int c = h; c < N - h; c++) begin
        int exp = conv_ref(K, DV, r, c, apx, code);
        int got = int'(dmem[(OUT >> 2) + r * N + c]);
        expect_word(OUT + 4 * (r * N + c), exp, name);
        if (!apx) golden[r * N + c] = got;
        mse += real'((got - golden[r * N + c]) ** 2);
      end
    mse = mse / real'((N - 2 * h) * (N - 2 * h));
    if (apx) begin
      if (mse == 0.0) $display("    PSNR vs accurate: infinite (identical)");
      else $display("    PSNR vs accurate: %0.2f dB", 10.0 * $log10(255.0 * 255.0 / mse));
    end
  endtask

  initial begin
    repeat (40000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] codes [7] = '{8'h7E, 8'h7C, 8'h78, 8'h70, 8'h60, 8'h40, 8'h00};

    // test image: gradient plus a bright square and a few edges
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++)
        img[r * N + c] = ((r * 13 + c * 7) % 200) + ((r > N / 4 && r < 3 * N / 4 && c > N / 3 && c < 3 * N / 4) ? 55 : 0);

    // ---- image sharpening, 5x5 ----
    for (int i = 0; i < 25; i++) ker[i] = -1;
    ker[12] = 49;
    prog_conv(5, 25);
    conv_test(5, 25, 8'h00, 1'b0, "sharpen 5x5 accurate");
    for (int l = 0; l < 7; l++)
      conv_test(5, 25, codes[l], 1'b1, $sformatf("sharpen 5x5 error level %0d", 6 - l));

    // ---- 3x3 convolution (mulcsr error field 0x78) ----
    for (int i = 0; i < 9; i++) ker[i] = 1;
    ker[4] = 8;
    prog_conv(3, 16);
    conv_test(3, 16, 8'h00, 1'b0, "conv 3x3 accurate");
    conv_test(3, 16, 8'h78, 1'b1, "conv 3x3 error field 0x78");

    // ---- bubble sort of 16 words (0x00) ----
    begin
      int a [16], lo, li, lskip;
      prologue();
      LI(1, ARR); LI(2, 15); ADDI(3, 0, 0);             // x3 = pass
      lo = pcw; ADDI(4, 0, 0); ADD(5, 1, 0);            // x4 = j, x5 = &a[j]
      li = pcw; LW(6, 5, 0); LW(7, 5, 4);
      lskip = pcw; emit(32'h0);                         // bge x7, x6, skip
      SW(7, 5, 0); SW(6, 5, 4);
      imem[lskip] = b_t((pcw - lskip) * 4, 6, 7, 3'd5);
      ADDI(5, 5, 4); ADDI(4, 4, 1); BLT(4, 2, li);
      ADDI(3, 3, 1); BLT(3, 2, lo);
      epilogue();
      foreach (dmem[i]) dmem[i] = 0;
      for (int i = 0; i < 16; i++) begin a[i] = int'($urandom_range(0, 100000)) - 50000; dmem[(ARR >> 2) + i] = a[i]; end
      for (int i = 0; i < 15; i++)                        // reference: signed order
        for (int j = 0; j < 15 - i; j++)
          if (a[j] > a[j + 1]) begin int t; t = a[j]; a[j] = a[j + 1]; a[j + 1] = t; end
      run({8'h00, 8'h00, 16'h0003}, "bubble sort 16");
      for (int i = 0; i < 16; i++) expect_word(ARR + 4 * i, a[i], "bubble sort");
    end

    // ---- Fibonacci 0..24 (0x7E) ----
    begin
      int f0 = 0, f1 = 1, lf;
      prologue();
      LI(1, ARR); ADDI(2, 0, 0); ADDI(3, 0, 1); ADDI(4, 0, 0); ADDI(5, 0, 25);
      lf = pcw; SW(2, 1, 0); ADD(6, 2, 3); ADD(2, 3, 0); ADD(3, 6, 0); ADDI(1, 1, 4); ADDI(4, 4, 1); BLT(4, 5, lf);
      epilogue();
      foreach (dmem[i]) dmem[i] = 0;
      run({8'h00, 8'h7E, 16'h0003}, "fibonacci 25");
      for (int i = 0; i < 25; i++) begin
        int t;
        expect_word(ARR + 4 * i, f0, "fibonacci");
        t = f0 + f1; f0 = f1; f1 = t;
      end
    end

    // ---- maximum of 32 words (0x60) ----
    begin
      int mx = -2147483647, lm, ls;
      prologue();
      LI(1, ARR); LW(2, 1, 0); ADDI(3, 0, 1); ADDI(4, 0, 32); ADDI(1, 1, 4);
      lm = pcw; LW(5, 1, 0);
      ls = pcw; emit(32'h0);                            // bge x2, x5, skip
      ADD(2, 5, 0);
      imem[ls] = b_t((pcw - ls) * 4, 5, 2, 3'd5);
      ADDI(1, 1, 4); ADDI(3, 3, 1); BLT(3, 4, lm);
      LI(6, RES); SW(2, 6, 0);
      epilogue();
      foreach (dmem[i]) dmem[i] = 0;
      for (int i = 0; i < 32; i++) begin
        automatic int v = int'($urandom) >>> 4;
        dmem[(ARR >> 2) + i] = v;
        if (v > mx) mx = v;
      end
      run({8'h00, 8'h60, 16'h0003}, "find max 32");
      expect_word(RES, mx, "find max");
    end

    // ---- 8-tap FIR over 32 samples (0x60) ----
    begin
      int x [40], hcoef [8], ln, lk;
      prologue();
      // x at ARR (8 leading zeros then 32 samples), h at KER, y at RES
      LI(1, ARR + 32); LI(2, RES); LI(10, KER); ADDI(3, 0, 0); ADDI(4, 0, 32); ADDI(9, 0, 8);
      ln = pcw; ADDI(5, 0, 0); ADD(6, 1, 0); ADD(7, 10, 0); ADDI(8, 0, 0);
      lk = pcw; LW(11, 6, 0); LW(12, 7, 0); MUL(11, 11, 12); ADD(5, 5, 11);
      ADDI(6, 6, -4); ADDI(7, 7, 4); ADDI(8, 8, 1); BLT(8, 9, lk);
      SW(5, 2, 0); ADDI(2, 2, 4); ADDI(1, 1, 4); ADDI(3, 3, 1); BLT(3, 4, ln);
      epilogue();
      foreach (dmem[i]) dmem[i] = 0;
      for (int i = 0; i < 8; i++) begin hcoef[i] = int'($urandom_range(0, 60)) - 20; dmem[(KER >> 2) + i] = hcoef[i]; end
      for (int i = 0; i < 40; i++) begin
        x[i] = (i < 8) ? 0 : int'($urandom_range(0, 255));
        dmem[(ARR >> 2) + i] = x[i];
      end
      run({8'h00, 8'h60, 16'h0003}, "FIR 8 taps x 32");
      for (int n = 0; n < 32; n++) begin
        automatic int y = 0;
        for (int k = 0; k < 8; k++) y += mul_ref(x[n + 8 - k], hcoef[k], 1'b1, 8'h60);
        expect_word(RES + 4 * n, y, "FIR");
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
