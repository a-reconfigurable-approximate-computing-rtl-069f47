// phoenix_core: 3-stage in-order RV32I(E)M core with reconfigurable
// accurate/approximate execution units.
//
// Stages: FD (fetch and decode), EX (execute), MW (memory and write-back),
// separated by the FD/EX and EX/MW pipeline registers, each with its own
// stall logic.  There is no central control unit: the decoder only extracts
// fields, and every execution unit (ALU, multiplier, divider, jump/branch
// unit, address generator, CSR unit) derives its own control from opcode,
// funct3 and funct7.  The ALU, multiplier and divider each read their own CSR
// (alucsr, mulcsr, divcsr) to pick one of four circuit slots and an error
// level; the execution-stage multiplexer then forwards the result of the
// unit that the instruction targets.  Software changes accuracy at run time
// with ordinary csrrw/csrrs/csrrc instructions.
//
// FD: the PC addresses the instruction memory; the instruction is decoded,
// its immediate built, and both source registers read.  Operands are taken
// from the forwarding multiplexers (EX result, MW write data or register
// file).  EX: ALU, address generation, branch decision, CSR access and the
// multi-cycle multiplier/divider.  Jumps and taken branches are resolved in
// EX: the PC is redirected and the instruction in FD is squashed (one bubble,
// not-taken prediction).  MW: load/store through the load-store unit; the
// write-back multiplexer picks next pc (JAL/JALR), immediate (LUI), load data
// or the execution result, and the register file is written.
//
// Stalls: a load followed by a dependent instruction holds FD for one cycle;
// a multiply or divide holds FD and EX until its unit drops busy, while a
// bubble enters MW.  Memories are single-cycle: instruction and data reads
// return combinationally, writes happen on the rising clock edge.
//
// Parameters: RESET_ADDRESS (first fetch), E_EXTENSION (1: 16 registers,
// RV32E; x16..x31 read as zero and are not written), M_EXTENSION (0 removes
// the multiplier and divider; an M instruction then writes zero to rd in one
// cycle, since there is no illegal-instruction trap).  The paper
// makes the I/E and M choices RTL parameters; the memory interface, the
// reset address and the stall/forwarding details are this design's choices.
module phoenix_core
  import phoenix_pkg::*;
#(
  parameter logic [31:0] RESET_ADDRESS = 32'h0000_0000,
  parameter bit          E_EXTENSION   = 1'b0,
  parameter bit          M_EXTENSION   = 1'b1
) (
  input  logic        clk,
  input  logic        rst_n,
  // instruction memory (I$)
  output logic [31:0] imem_addr,
  input  logic [31:0] imem_rdata,
  // data memory (D$)
  output logic [31:0] dmem_addr,
  output logic        dmem_re,
  output logic        dmem_we,
  output logic [3:0]  dmem_be,
  output logic [31:0] dmem_wdata,
  input  logic [31:0] dmem_rdata
);
  localparam int unsigned NUM_REGS = E_EXTENSION ? 16 : 32;

  // ------------------------------------------------------------------
  // pipeline registers
  // ------------------------------------------------------------------
  typedef struct packed {
    logic        valid;
    logic [31:0] pc;
    logic [31:0] next_pc;
    decoded_t    dec;
    logic [31:0] imm;
    logic [31:0] rs1;
    logic [31:0] rs2;
  } fd_ex_t;

  typedef struct packed {
    logic        valid;
    logic [6:0]  opcode;
    logic [2:0]  funct3;
    logic [4:0]  rd;
    logic        rd_en;
    wb_sel_e     wb_sel;
    logic [31:0] exec_result;
    logic [31:0] address;
    logic [31:0] store_data;
    logic [31:0] imm;
    logic [31:0] next_pc;
  } ex_mw_t;

  fd_ex_t fdex;
  ex_mw_t exmw;

  // cross-stage control
  logic        jb_enable, ex_redirect;
  logic [31:0] ex_address;
  logic        ex_wait, ex_started, load_use_stall, fd_stall;
  logic [31:0] ex_fwd_value, mw_write_data;

  // ------------------------------------------------------------------
  // FD stage
  // ------------------------------------------------------------------
  logic [31:0] fd_pc, fd_next_pc, fd_instr, fd_imm, rf_rd1, rf_rd2, fd_rs1, fd_rs2;
  decoded_t    fd_dec;
  fwd_sel_e    fwd_1, fwd_2;

  fetch_unit #(.RESET_ADDRESS(RESET_ADDRESS)) u_fetch (
    .clk, .rst_n, .stall(fd_stall), .jump_branch_enable(ex_redirect),
    .jump_branch_address(ex_address), .imem_addr, .imem_rdata,
    .pc(fd_pc), .next_pc(fd_next_pc), .instruction(fd_instr)
  );

  decoded_t    fd_dec_raw;
  instruction_decoder u_decoder (.instruction(fd_instr), .dec(fd_dec_raw));

  // RV32E: x16..x31 do not exist; an instruction naming one as destination
  // writes nothing, so neither the register file nor forwarding sees it.
  always_comb begin
    fd_dec = fd_dec_raw;
    if (E_EXTENSION && fd_dec_raw.rd[4]) fd_dec.rd_en = 1'b0;
  end

  immediate_generator u_immgen (.instruction(fd_instr), .itype(fd_dec.itype), .immediate(fd_imm));

  register_file #(.NUM_REGS(NUM_REGS)) u_regfile (
    .clk, .rst_n,
    .read_index_1(fd_dec.rs1), .read_enable_1(fd_dec.rs1_en), .read_data_1(rf_rd1),
    .read_index_2(fd_dec.rs2), .read_enable_2(fd_dec.rs2_en), .read_data_2(rf_rd2),
    .write_index(exmw.rd), .write_enable(exmw.valid && exmw.rd_en), .write_data(mw_write_data)
  );

  hazard_forwarding_unit u_hazard (
    .fd_rs1(fd_dec.rs1), .fd_rs1_en(fd_dec.rs1_en), .fd_rs2(fd_dec.rs2), .fd_rs2_en(fd_dec.rs2_en),
    .ex_valid(fdex.valid), .ex_rd(fdex.dec.rd), .ex_rd_en(fdex.dec.rd_en),
    .ex_is_load(fdex.dec.opcode == OP_LOAD),
    .mw_valid(exmw.valid), .mw_rd(exmw.rd), .mw_rd_en(exmw.rd_en),
    .fwd_1, .fwd_2, .load_use_stall
  );

  // register source buses
  always_comb begin
    unique case (fwd_1)
      FWD_EX:  fd_rs1 = ex_fwd_value;
      FWD_MW:  fd_rs1 = mw_write_data;
      default: fd_rs1 = rf_rd1;
    endcase
    unique case (fwd_2)
      FWD_EX:  fd_rs2 = ex_fwd_value;
      FWD_MW:  fd_rs2 = mw_write_data;
      default: fd_rs2 = rf_rd2;
    endcase
  end

  // FD/EX stall logic
  assign fd_stall = ex_wait || load_use_stall;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fdex <= '0;
    end else if (ex_wait) begin
      fdex <= fdex;                       // execute stage busy: hold
    end else if (load_use_stall || ex_redirect) begin
      fdex.valid <= 1'b0;                 // bubble
    end else begin
      fdex.valid   <= 1'b1;
      fdex.pc      <= fd_pc;
      fdex.next_pc <= fd_next_pc;
      fdex.dec     <= fd_dec;
      fdex.imm     <= fd_imm;
      fdex.rs1     <= fd_rs1;
      fdex.rs2     <= fd_rs2;
    end
  end

  // ------------------------------------------------------------------
  // EX stage
  // ------------------------------------------------------------------
  decoded_t    d;
  exec_csr_t   alucsr, mulcsr, divcsr;
  logic [31:0] alu_result, mul_result, div_result, csr_rdata;
  logic        mul_busy, div_busy;
  logic        is_muldiv, is_csr, start_unit;
  logic [31:0] exec_result;
  wb_sel_e     ex_wb_sel;

  assign d = fdex.dec;

  always_comb begin
    is_muldiv  = M_EXTENSION && fdex.valid && (d.opcode == OP_OP) && (d.funct7 == FUNCT7_MULDIV);
    is_csr     = fdex.valid && (d.opcode == OP_SYSTEM) && (d.funct3[1:0] != 2'b00);
    start_unit = is_muldiv && !ex_started;
  end

  arithmetic_logic_unit u_alu (
    .opcode(d.funct7 == FUNCT7_MULDIV && d.opcode == OP_OP ? 7'b0 : d.opcode),
    .funct3(d.funct3), .funct7(d.funct7), .rs1(fdex.rs1), .rs2(fdex.rs2),
    .immediate(fdex.imm), .csr(alucsr), .result(alu_result)
  );

  address_generator u_agen (
    .opcode(d.opcode), .pc(fdex.pc), .rs1(fdex.rs1), .immediate(fdex.imm), .address(ex_address)
  );

  jump_branch_unit u_jbu (
    .opcode(d.opcode), .funct3(d.funct3), .rs1(fdex.rs1), .rs2(fdex.rs2),
    .jump_branch_enable(jb_enable)
  );
  assign ex_redirect = fdex.valid && jb_enable;

  control_status_unit u_csu (
    .clk, .rst_n, .enable(is_csr), .funct3(d.funct3), .csr_address(d.funct12),
    .rs1_index(d.rs1), .rs1(fdex.rs1), .rdata(csr_rdata),
    .alucsr, .mulcsr, .divcsr
  );

  if (M_EXTENSION) begin : g_m
    multiplier_unit u_mul (
      .clk, .rst_n, .start(start_unit && !d.funct3[2]), .funct3(d.funct3),
      .rs1(fdex.rs1), .rs2(fdex.rs2), .csr(mulcsr), .busy(mul_busy), .result(mul_result)
    );
    divider_unit u_div (
      .clk, .rst_n, .start(start_unit && d.funct3[2]), .funct3(d.funct3),
      .rs1(fdex.rs1), .rs2(fdex.rs2), .csr(divcsr), .busy(div_busy), .result(div_result)
    );
  end else begin : g_no_m
    assign mul_busy = 1'b0;
    assign div_busy = 1'b0;
    assign mul_result = '0;
    assign div_result = '0;
  end

  // EX stall logic: a multi-cycle unit is started in the first EX cycle and
  // the instruction stays until the unit is no longer busy.
  assign ex_wait = is_muldiv && (!ex_started || mul_busy || div_busy);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ex_started <= 1'b0;
    else        ex_started <= ex_wait;
  end

  // execution-stage result multiplexer
  always_comb begin
    if (is_muldiv)                  exec_result = d.funct3[2] ? div_result : mul_result;
    else if (d.opcode == OP_AUIPC)  exec_result = ex_address;
    else if (d.opcode == OP_SYSTEM) exec_result = csr_rdata;
    else                            exec_result = alu_result;

    unique case (d.opcode)
      OP_JAL, OP_JALR: ex_wb_sel = WB_NEXT_PC;
      OP_LUI:          ex_wb_sel = WB_IMM;
      OP_LOAD:         ex_wb_sel = WB_LOAD;
      default:         ex_wb_sel = WB_EXEC;
    endcase

    unique case (ex_wb_sel)
      WB_NEXT_PC: ex_fwd_value = fdex.next_pc;
      WB_IMM:     ex_fwd_value = fdex.imm;
      default:    ex_fwd_value = exec_result;
    endcase
  end

  // EX/MW stall logic
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      exmw <= '0;
    end else if (ex_wait) begin
      exmw.valid <= 1'b0;                 // bubble while the unit works
    end else begin
      exmw.valid       <= fdex.valid;
      exmw.opcode      <= d.opcode;
      exmw.funct3      <= d.funct3;
      exmw.rd          <= d.rd;
      exmw.rd_en       <= d.rd_en;
      exmw.wb_sel      <= ex_wb_sel;
      exmw.exec_result <= exec_result;
      exmw.address     <= ex_address;
      exmw.store_data  <= fdex.rs2;
      exmw.imm         <= fdex.imm;
      exmw.next_pc     <= fdex.next_pc;
    end
  end

  // ------------------------------------------------------------------
  // MW stage
  // ------------------------------------------------------------------
  logic [31:0] load_data;

  load_store_unit u_lsu (
    .valid(exmw.valid), .opcode(exmw.opcode), .funct3(exmw.funct3), .address(exmw.address),
    .store_data(exmw.store_data), .dmem_addr, .dmem_re, .dmem_we, .dmem_be, .dmem_wdata,
    .dmem_rdata, .load_data
  );

  // write-back multiplexer
  always_comb begin
    unique case (exmw.wb_sel)
      WB_NEXT_PC: mw_write_data = exmw.next_pc;
      WB_IMM:     mw_write_data = exmw.imm;
      WB_LOAD:    mw_write_data = load_data;
      default:    mw_write_data = exmw.exec_result;
    endcase
  end

  // ------------------------------------------------------------------
  // pipeline rules
  // ------------------------------------------------------------------
  a_no_rw_same_cycle: assert property (@(posedge clk) disable iff (!rst_n) !(dmem_re && dmem_we));
  a_wait_only_muldiv: assert property (@(posedge clk) disable iff (!rst_n) ex_wait |-> is_muldiv);
  a_no_redirect_on_wait: assert property (@(posedge clk) disable iff (!rst_n) ex_wait |-> !ex_redirect);
endmodule
