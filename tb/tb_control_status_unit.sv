// tb_control_status_unit: CSRRW/S/C and immediate forms on 0x800..0x802
// against a shadow copy; the read value is the old one; rs1 = x0 suppresses
// the write for CSRRS/CSRRC; unknown addresses read zero; the value written
// by the paper's factorial example (0x007E0003 into mulcsr) decodes as
// approximation on, circuit slot 1 ("circuit 2"), error field 0x007E.
module tb_control_status_unit;
  import phoenix_pkg::*;
  logic        clk = 0, rst_n = 0, enable = 0;
  logic [2:0]  funct3 = 0;
  logic [11:0] csr_address = 0;
  logic [4:0]  rs1_index = 0;
  logic [31:0] rs1 = 0, rdata;
  exec_csr_t   alucsr, mulcsr, divcsr;
  logic [31:0] shadow [3];
  int checks = 0, failures = 0;

  control_status_unit dut (.*);
  always #5 clk = ~clk;

  task automatic op(logic [2:0] f3, logic [11:0] addr, logic [4:0] idx, logic [31:0] val);
    logic [31:0] old, src, nw;
    int k;
    @(negedge clk);
    enable = 1; funct3 = f3; csr_address = addr; rs1_index = idx; rs1 = val;
    k = (addr >= 12'h800 && addr <= 12'h802) ? int'(addr - 12'h800) : -1;
    old = (k >= 0) ? shadow[k] : 0;
    #1 checks++;
    if (rdata != old) begin failures++; if (failures < 5) $display("FAIL read %h got %h exp %h", addr, rdata, old); end
    src = f3[2] ? 32'(idx) : val;
    case (f3[1:0]) 1: nw = src; 2: nw = old | src; 3: nw = old & ~src; default: nw = old; endcase
    if (f3[1:0] != 1 && idx == 0) nw = old;
    @(posedge clk);
    if (k >= 0) shadow[k] = nw;
    #1 enable = 0;
    checks += 3;
    if (alucsr != shadow[0]) failures++;
    if (mulcsr != shadow[1]) failures++;
    if (divcsr != shadow[2]) failures++;
  endtask

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (shadow[k]) shadow[k] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    op(3'b001, 12'h801, 5'd31, 32'h007E_0003);
    checks += 4;
    if (!mulcsr.approx_enable) failures++;
    if (mulcsr.circuit_select != 2'b01) failures++;
    if (mulcsr.error_control != 16'h007E) failures++;
    if (!approx_active(mulcsr)) failures++;
    op(3'b001, 12'h801, 5'd0, 32'h0);
    for (int i = 0; i < 2000; i++) begin
      logic [2:0] f3s [6] = '{3'b001, 3'b010, 3'b011, 3'b101, 3'b110, 3'b111};
      op(f3s[$urandom_range(0, 5)], 12'h800 + 12'($urandom_range(0, 3)),
         ($urandom % 4 == 0) ? 5'd0 : 5'($urandom), $urandom);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
