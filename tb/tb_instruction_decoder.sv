// tb_instruction_decoder: decodes hand-encoded RV32 instructions of every
// format and checks fields, read/write enables and the instruction type.
module tb_instruction_decoder;
  import phoenix_pkg::*;
  logic [31:0] instruction;
  decoded_t    dec;
  int checks = 0, failures = 0;

  instruction_decoder dut (.*);

  task automatic t(logic [31:0] ins, logic [4:0] rs1, logic r1e, logic [4:0] rs2, logic r2e,
                   logic [4:0] rd, logic rde, instr_type_e ty, string name);
    instruction = ins;
    #1 checks++;
    if (dec.opcode != ins[6:0] || dec.funct3 != ins[14:12] || dec.funct7 != ins[31:25] ||
        dec.rs1 != ins[19:15] || (r1e && dec.rs1 != rs1) || dec.rs1_en != r1e || dec.rs2 != ins[24:20] || (r2e && dec.rs2 != rs2) || dec.rs2_en != r2e ||
        dec.rd != rd || dec.rd_en != rde || dec.itype != ty || dec.funct12 != ins[31:20]) begin
      failures++;
      $display("FAIL %s: rs1=%0d/%0d rs2=%0d/%0d rd=%0d/%0d type=%0d", name, dec.rs1, dec.rs1_en,
               dec.rs2, dec.rs2_en, dec.rd, dec.rd_en, dec.itype);
    end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    t(32'h00c58533, 11, 1, 12, 1, 10, 1, TYPE_R, "add a0,a1,a2");
    t(32'h40c58533, 11, 1, 12, 1, 10, 1, TYPE_R, "sub a0,a1,a2");
    t(32'h02f70733, 14, 1, 15, 1, 14, 1, TYPE_R, "mul a4,a4,a5");
    t(32'h00150513, 10, 1, 0, 0, 10, 1, TYPE_I, "addi a0,a0,1");
    t(32'h0045a503, 11, 1, 0, 0, 10, 1, TYPE_I, "lw a0,4(a1)");
    t(32'h00a5a223, 11, 1, 10, 1, 4, 0, TYPE_S, "sw a0,4(a1)");
    t(32'hfec5c6e3, 11, 1, 12, 1, 13, 0, TYPE_B, "blt a1,a2,-20");
    t(32'h123452b7, 0, 0, 0, 0, 5, 1, TYPE_U, "lui t0");
    t(32'h00001297, 0, 0, 0, 0, 5, 1, TYPE_U, "auipc t0");
    t(32'h008000ef, 0, 0, 0, 0, 1, 1, TYPE_J, "jal ra,8");
    t(32'h00008067, 1, 1, 0, 0, 0, 0, TYPE_I, "ret");
    t(32'h801f9073, 31, 1, 0, 0, 0, 0, TYPE_I, "csrrw x0,0x801,x31");
    t(32'h80102573, 0, 1, 0, 0, 10, 1, TYPE_I, "csrrs a0,0x801,x0");
    t(32'h8002d573, 0, 0, 0, 0, 10, 1, TYPE_I, "csrrwi a0,0x800,5");
    t(32'h00000013, 0, 1, 0, 0, 0, 0, TYPE_I, "nop");
    t(32'h00000073, 0, 0, 0, 0, 0, 0, TYPE_I, "ecall");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
