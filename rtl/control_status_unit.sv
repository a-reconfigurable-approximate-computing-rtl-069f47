// control_status_unit: the execution-engine CSRs and the Zicsr instructions.
//
// Holds alucsr (0x800), mulcsr (0x801) and divcsr (0x802), the three
// registers through which software picks the circuit of each execution unit
// and its error level (layout in phoenix_pkg::exec_csr_t).  It executes
// CSRRW, CSRRS, CSRRC and their immediate forms in the execute stage: rdata is
// the old value (written to rd), and the new value is written on the rising
// edge at the end of that cycle, so the very next instruction already runs
// with the new setting.  CSRRS/CSRRC with x0 (or zimm = 0) as source do not
// write.  Other CSR addresses read as zero and ignore writes (the paper
// describes only these three).  All three reset to zero, that is, accurate
// circuits.
module control_status_unit
  import phoenix_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        enable,      // a valid CSR instruction is in execute
  input  logic [2:0]  funct3,
  input  logic [11:0] csr_address,
  input  logic [4:0]  rs1_index,   // also zimm for the immediate forms
  input  logic [31:0] rs1,
  output logic [31:0] rdata,
  output exec_csr_t   alucsr,
  output exec_csr_t   mulcsr,
  output exec_csr_t   divcsr
);
  logic [31:0] src, old, wval;
  logic        hit, do_write;

  always_comb begin
    src = funct3[2] ? {27'b0, rs1_index} : rs1;
    hit = 1'b1;
    unique case (csr_address)
      CSR_ALUCSR: old = alucsr;
      CSR_MULCSR: old = mulcsr;
      CSR_DIVCSR: old = divcsr;
      default: begin old = '0; hit = 1'b0; end
    endcase
    unique case (funct3[1:0])
      2'b01:   wval = src;
      2'b10:   wval = old | src;
      2'b11:   wval = old & ~src;
      default: wval = old;
    endcase
    do_write = enable && hit && (funct3[1:0] != 2'b00)
            && ((funct3[1:0] == 2'b01) || (rs1_index != 5'd0));
    rdata = enable ? old : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      alucsr <= '0;
      mulcsr <= '0;
      divcsr <= '0;
    end else if (do_write) begin
      unique case (csr_address)
        CSR_ALUCSR: alucsr <= wval;
        CSR_MULCSR: mulcsr <= wval;
        CSR_DIVCSR: divcsr <= wval;
        default: ;
      endcase
    end
  end
endmodule
