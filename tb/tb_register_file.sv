// tb_register_file: random writes and reads against a shadow array for the
// default 32-register (RV32I) configuration; x0 stays zero, disabled reads
// give zero, a write is visible from the next cycle.
module tb_register_file;
  logic        clk = 0, rst_n = 0;
  logic [4:0]  read_index_1 = 0, read_index_2 = 0, write_index = 0;
  logic        read_enable_1 = 0, read_enable_2 = 0, write_enable = 0;
  logic [31:0] read_data_1, read_data_2, write_data = 0;
  logic [31:0] shadow [32];
  int checks = 0, failures = 0;

  register_file dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (shadow[r]) shadow[r] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      read_index_1 = 5'($urandom); read_index_2 = 5'($urandom);
      read_enable_1 = ($urandom % 8) != 0; read_enable_2 = ($urandom % 8) != 0;
      #1 checks += 2;
      if (read_data_1 != (read_enable_1 ? shadow[read_index_1] : 0)) begin failures++; if (failures < 5) $display("FAIL r1 x%0d", read_index_1); end
      if (read_data_2 != (read_enable_2 ? shadow[read_index_2] : 0)) begin failures++; if (failures < 5) $display("FAIL r2 x%0d", read_index_2); end
      write_index = 5'($urandom); write_enable = 1'($urandom); write_data = $urandom;
      @(posedge clk);
      if (write_enable && write_index != 0) shadow[write_index] = write_data;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
