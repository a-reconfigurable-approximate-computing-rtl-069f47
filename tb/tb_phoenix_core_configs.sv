// tb_phoenix_core_configs: the core's two ISA parameters, checked end to end.
//
// Two cores run the same short program from their own copies of a single-
// cycle instruction and data memory:
//   * E_EXTENSION = 1 (RV32E, 16 registers) with the M extension: writes to
//     x16..x31 are dropped and reads of them give zero, including through
//     forwarding; MUL and DIV still work and stall the pipeline.
//   * M_EXTENSION = 0 (RV32I without M): MUL/DIV write zero to rd and take a
//     single cycle, and x16..x31 behave as normal registers.
// Each program stores its results to data memory; the testbench compares
// them with values worked out by hand for each configuration and counts the
// multi-cycle wait cycles of each core.
module tb_phoenix_core_configs;
  import rv32_asm_pkg::*;

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  // one memory pair and one core per configuration
  logic [31:0] imem [64];
  logic [31:0] imem_addr [2], imem_rdata [2], dmem_addr [2], dmem_wdata [2], dmem_rdata [2];
  logic        dmem_re [2], dmem_we [2];
  logic [3:0]  dmem_be [2];
  logic [31:0] dmem [2][64];

  phoenix_core #(.E_EXTENSION(1'b1), .M_EXTENSION(1'b1)) u_e (
    .clk, .rst_n, .imem_addr(imem_addr[0]), .imem_rdata(imem_rdata[0]),
    .dmem_addr(dmem_addr[0]), .dmem_re(dmem_re[0]), .dmem_we(dmem_we[0]), .dmem_be(dmem_be[0]),
    .dmem_wdata(dmem_wdata[0]), .dmem_rdata(dmem_rdata[0]));
  phoenix_core #(.E_EXTENSION(1'b0), .M_EXTENSION(1'b0)) u_nom (
    .clk, .rst_n, .imem_addr(imem_addr[1]), .imem_rdata(imem_rdata[1]),
    .dmem_addr(dmem_addr[1]), .dmem_re(dmem_re[1]), .dmem_we(dmem_we[1]), .dmem_be(dmem_be[1]),
    .dmem_wdata(dmem_wdata[1]), .dmem_rdata(dmem_rdata[1]));

  for (genvar k = 0; k < 2; k++) begin : g_mem
    assign imem_rdata[k] = imem[imem_addr[k][7:2]];
    assign dmem_rdata[k] = dmem[k][dmem_addr[k][7:2]];
    always @(posedge clk)
      if (dmem_we[k])
        for (int b = 0; b < 4; b++)
          if (dmem_be[k][b]) dmem[k][dmem_addr[k][7:2]][8*b +: 8] <= dmem_wdata[k][8*b +: 8];
  end

  int checks = 0, failures = 0;
  int n_wait [2] = '{0, 0};
  always @(posedge clk) begin
    if (u_e.ex_wait)   n_wait[0]++;
    if (u_nom.ex_wait) n_wait[1]++;
  end

  initial begin
    #20000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(int k, int idx, logic [31:0] exp, string what);
    checks++;
    if (dmem[k][idx] !== exp) begin
      failures++;
      $display("FAIL %s (%s): got %0d, expected %0d", k ? "RV32I no M" : "RV32E+M", what, dmem[k][idx], exp);
    end
  endtask

  initial begin
    int pc = 0;
    // program (words)
    imem[pc++] = i_t(7, 0, 3'd0, 5, 7'b0010011);              // addi x5, x0, 7
    imem[pc++] = i_t(99, 0, 3'd0, 20, 7'b0010011);            // addi x20, x0, 99
    imem[pc++] = r_t(7'd0, 20, 5, 3'd0, 6, 7'b0110011);       // add  x6, x5, x20  (forwarded x20)
    imem[pc++] = r_t(7'd1, 5, 5, 3'd0, 7, 7'b0110011);        // mul  x7, x5, x5
    imem[pc++] = i_t(3, 0, 3'd0, 8, 7'b0010011);              // addi x8, x0, 3
    imem[pc++] = r_t(7'd1, 8, 6, 3'd4, 9, 7'b0110011);        // div  x9, x6, x8
    imem[pc++] = r_t(7'd0, 20, 0, 3'd0, 10, 7'b0110011);      // add  x10, x0, x20 (from register file)
    imem[pc++] = s_t(0, 6, 0, 3'd2);                          // sw x6,  0(x0)
    imem[pc++] = s_t(4, 7, 0, 3'd2);                          // sw x7,  4(x0)
    imem[pc++] = s_t(8, 9, 0, 3'd2);                          // sw x9,  8(x0)
    imem[pc++] = s_t(12, 10, 0, 3'd2);                        // sw x10, 12(x0)
    imem[pc++] = s_t(16, 20, 0, 3'd2);                        // sw x20, 16(x0)
    imem[pc++] = b_t(0, 0, 0, 3'd0);                          // beq x0, x0, . (halt)
    for (int i = pc; i < 64; i++) imem[i] = 32'h0000_0013;    // nop
    for (int k = 0; k < 2; k++) for (int i = 0; i < 64; i++) dmem[k][i] = 32'hDEAD_BEEF;

    #2 rst_n = 0;
    #10 rst_n = 1;
    repeat (150) @(posedge clk);

    // RV32E with M: x20 does not exist
    check(0, 0, 7,  "x6 = x5 + x20");
    check(0, 1, 49, "x7 = 7 * 7");
    check(0, 2, 2,  "x9 = 7 / 3");
    check(0, 3, 0,  "x10 = x20 via register file");
    check(0, 4, 0,  "store of x20");
    // RV32I without M: M instructions write zero
    check(1, 0, 106, "x6 = x5 + x20");
    check(1, 1, 0,   "x7 = mul without M");
    check(1, 2, 0,   "x9 = div without M");
    check(1, 3, 99,  "x10 = x20 via register file");
    check(1, 4, 99,  "store of x20");
    // wait cycles: one multiply (5) and one exact divide (33) with M, none without
    checks++;
    if (n_wait[0] != 5 + 33) begin failures++; $display("FAIL RV32E+M wait cycles %0d, expected 38", n_wait[0]); end
    checks++;
    if (n_wait[1] != 0) begin failures++; $display("FAIL no-M wait cycles %0d, expected 0", n_wait[1]); end
    $display("wait cycles: RV32E+M %0d, RV32I without M %0d", n_wait[0], n_wait[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
