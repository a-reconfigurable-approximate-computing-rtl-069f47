// fetch_unit: program counter and next-pc selection.
//
// The PC register loads RESET_ADDRESS at reset.  Each cycle it advances to
// pc + 4 unless the jump & branch enable from the execute stage is set, in
// which case it takes the target address from the address generator; a stall
// holds it (a redirect wins over a stall).  The PC drives the instruction
// memory address directly; the instruction word returns combinationally
// (single-cycle instruction memory, this design's choice) and is passed on to
// the decoder together with pc and next pc.
module fetch_unit #(
  parameter logic [31:0] RESET_ADDRESS = 32'h0000_0000
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        stall,
  input  logic        jump_branch_enable,
  input  logic [31:0] jump_branch_address,
  output logic [31:0] imem_addr,
  input  logic [31:0] imem_rdata,
  output logic [31:0] pc,
  output logic [31:0] next_pc,
  output logic [31:0] instruction
);
  assign next_pc     = pc + 32'd4;
  assign imem_addr   = pc;
  assign instruction = imem_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                  pc <= RESET_ADDRESS;
    else if (jump_branch_enable) pc <= jump_branch_address;
    else if (!stall)             pc <= next_pc;
  end
endmodule
