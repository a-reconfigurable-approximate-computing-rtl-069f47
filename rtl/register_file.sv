// register_file: integer register file with two read ports and one write port.
//
// NUM_REGS is 32 for the I base ISA and 16 for the E base ISA; the paper makes
// the I/E choice an RTL parameter.  x0 reads as zero and ignores writes; an
// index at or above NUM_REGS reads as zero and is not written.  Reads are
// combinational (used in the fetch/decode stage); the write happens on the
// rising edge (from the memory/write-back stage).  A read of a register that
// is written in the same cycle returns the old value: the hazard unit's
// forwarding path supplies the new one.  All registers reset to zero.
module register_file #(
  parameter int unsigned NUM_REGS = 32
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [4:0]  read_index_1,
  input  logic        read_enable_1,
  output logic [31:0] read_data_1,
  input  logic [4:0]  read_index_2,
  input  logic        read_enable_2,
  output logic [31:0] read_data_2,
  input  logic [4:0]  write_index,
  input  logic        write_enable,
  input  logic [31:0] write_data
);
  logic [31:0] regs [NUM_REGS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < int'(NUM_REGS); r++) regs[r] <= '0;
    end else if (write_enable && write_index != 5'd0 && 32'(write_index) < NUM_REGS) begin
      regs[write_index] <= write_data;
    end
  end

  always_comb begin
    read_data_1 = '0;
    read_data_2 = '0;
    if (read_enable_1 && read_index_1 != 5'd0 && 32'(read_index_1) < NUM_REGS)
      read_data_1 = regs[read_index_1];
    if (read_enable_2 && read_index_2 != 5'd0 && 32'(read_index_2) < NUM_REGS)
      read_data_2 = regs[read_index_2];
  end
endmodule
