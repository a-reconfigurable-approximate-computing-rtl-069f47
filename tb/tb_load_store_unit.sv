// tb_load_store_unit: byte enables and lane-shifted store data for SB/SH/SW
// at every legal offset, load alignment and sign/zero extension for
// LB/LBU/LH/LHU/LW, and no memory request when the stage is empty.
module tb_load_store_unit;
  import phoenix_pkg::*;
  logic        valid;
  logic [6:0]  opcode;
  logic [2:0]  funct3;
  logic [31:0] address, store_data, dmem_addr, dmem_wdata, dmem_rdata, load_data;
  logic        dmem_re, dmem_we;
  logic [3:0]  dmem_be;
  int checks = 0, failures = 0;

  load_store_unit dut (.*);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 3000; i++) begin
      int sz, off;
      logic [31:0] exp;
      valid = 1; dmem_rdata = $urandom; store_data = $urandom;
      sz = $urandom_range(0, 2);
      off = (sz == 0) ? $urandom_range(0, 3) : (sz == 1) ? 2 * $urandom_range(0, 1) : 0;
      address = ($urandom & ~32'h3) | 32'(off);
      if (i % 2 == 0) begin
        opcode = OP_STORE; funct3 = 3'(sz);
        #1 checks += 4;
        if (!dmem_we || dmem_re) failures++;
        if (dmem_addr != {address[31:2], 2'b00}) failures++;
        if (dmem_be != ((sz == 0 ? 4'b0001 : sz == 1 ? 4'b0011 : 4'b1111) << off)) failures++;
        for (int by = 0; by < 4; by++)
          if (dmem_be[by] && dmem_wdata[8*by +: 8] != store_data[8*(by-off) +: 8]) begin failures++; break; end
      end else begin
        automatic logic u = (sz < 2) && ($urandom & 1);
        opcode = OP_LOAD; funct3 = {u, 2'(sz)};
        case (sz)
          0: exp = u ? {24'b0, dmem_rdata[8*off +: 8]} : {{24{dmem_rdata[8*off+7]}}, dmem_rdata[8*off +: 8]};
          1: exp = u ? {16'b0, dmem_rdata[8*off +: 16]} : {{16{dmem_rdata[8*off+15]}}, dmem_rdata[8*off +: 16]};
          default: exp = dmem_rdata;
        endcase
        #1 checks += 2;
        if (!dmem_re || dmem_we) failures++;
        if (load_data != exp) begin failures++; if (failures < 5) $display("FAIL load f3 %0d off %0d got %h exp %h", funct3, off, load_data, exp); end
      end
    end
    valid = 0; opcode = OP_STORE;
    #1 checks++;
    if (dmem_we || dmem_re || dmem_be != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
