// tb_fetch_unit: PC starts at the reset address, advances by 4, holds on a
// stall, takes the jump/branch address on a redirect (also during a stall),
// and passes the instruction word through.
module tb_fetch_unit;
  logic        clk = 0, rst_n = 1, stall = 0, jump_branch_enable = 0;
  logic [31:0] jump_branch_address = 0, imem_addr, imem_rdata, pc, next_pc, instruction;
  int checks = 0, failures = 0;

  fetch_unit #(.RESET_ADDRESS(32'h0000_1000)) dut (.*);
  always #5 clk = ~clk;
  assign imem_rdata = imem_addr ^ 32'hA5A5_0000;

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] exp_pc;
    rst_n = 1; #1 rst_n = 0;
    #1 checks++;
    if (pc != 32'h1000) failures++;
    exp_pc = 32'h1000;
    @(negedge clk); rst_n = 1;
    exp_pc = 32'h1004;  // first edge after reset: no stall, no redirect
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      checks += 3;
      if (pc != exp_pc) begin failures++; if (failures < 25) $display("FAIL pc %h exp %h", pc, exp_pc); end
      if (imem_addr != pc || instruction != (pc ^ 32'hA5A5_0000)) failures++;
      if (next_pc != pc + 4) failures++;
      stall = ($urandom % 4) == 0;
      jump_branch_enable = ($urandom % 6) == 0;
      jump_branch_address = $urandom & ~32'h3;
      if (jump_branch_enable) exp_pc = jump_branch_address;
      else if (!stall)        exp_pc = exp_pc + 4;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
