// controller: per-cycle control of the ID/EX stage of the MAUPITI core.
//
// For the instruction held in ID/EX it decides whether it retires this cycle
// (id_ready_o), must wait (a load/store until the LSU reports done, a divide
// until the Mult/Div unit is done) or redirects the PC: pc_set_o with
// pc_mux_o = PC_JUMP for jal, jalr and taken branches, PC_TRAP for an
// exception (trap to mtvec) and PC_MRET for mret (return to mepc).
// Exceptions, in priority order: illegal instruction (2), ecall (11),
// ebreak (3), misaligned load (4) or store (6); exc_tval_o carries the
// instruction bits or the faulting address. An instruction that traps writes
// no register. There are no interrupts. The paper only names the controller;
// these rules follow the RISC-V privileged spec for machine mode. Combinational.
module controller
  import maupiti_pkg::*;
(
  input  logic        instr_valid_i,
  input  ctrl_t       ctrl_i,
  input  logic        illegal_i,      // decoder, compressed decoder or CSR
  input  logic [31:0] instr_raw_i,
  input  logic        branch_taken_i,
  input  logic        lsu_done_i,
  input  logic        lsu_misaligned_i,
  input  logic [31:0] lsu_addr_i,
  input  logic        md_done_i,
  output logic        id_ready_o,
  output logic        retire_o,       // completes without a trap
  output logic        rf_we_o,
  output logic        pc_set_o,
  output pc_sel_e     pc_mux_o,
  output logic        lsu_req_o,
  output logic        md_en_o,
  output logic        trap_o,
  output logic        mret_o,
  output logic [31:0] exc_cause_o,
  output logic [31:0] exc_tval_o
);
  always_comb begin
    trap_o      = 1'b0;
    exc_cause_o = '0;
    exc_tval_o  = '0;
    if (instr_valid_i) begin
      if (illegal_i) begin
        trap_o = 1'b1; exc_cause_o = EXC_ILLEGAL; exc_tval_o = instr_raw_i;
      end else if (ctrl_i.ecall) begin
        trap_o = 1'b1; exc_cause_o = EXC_ECALL_M;
      end else if (ctrl_i.ebreak) begin
        trap_o = 1'b1; exc_cause_o = EXC_BREAKPOINT;
      end else if (lsu_misaligned_i) begin
        trap_o = 1'b1; exc_tval_o = lsu_addr_i;
        exc_cause_o = ctrl_i.mem_we ? EXC_ST_MISALIGN : EXC_LD_MISALIGN;
      end
    end

    lsu_req_o = instr_valid_i && ctrl_i.mem_req && !illegal_i;
    md_en_o   = instr_valid_i && ctrl_i.md_en && !illegal_i;

    if (!instr_valid_i)      id_ready_o = 1'b0;
    else if (trap_o)         id_ready_o = 1'b1;
    else if (ctrl_i.mem_req) id_ready_o = lsu_done_i;
    else if (ctrl_i.md_en)   id_ready_o = md_done_i;
    else                     id_ready_o = 1'b1;

    retire_o = id_ready_o && !trap_o;
    rf_we_o  = retire_o && ctrl_i.rf_we;
    mret_o   = retire_o && ctrl_i.mret;

    pc_set_o = 1'b0;
    pc_mux_o = PC_JUMP;
    if (trap_o) begin
      pc_set_o = 1'b1; pc_mux_o = PC_TRAP;
    end else if (mret_o) begin
      pc_set_o = 1'b1; pc_mux_o = PC_MRET;
    end else if (retire_o && (ctrl_i.jal || ctrl_i.jalr || (ctrl_i.branch && branch_taken_i))) begin
      pc_set_o = 1'b1; pc_mux_o = PC_JUMP;
    end
  end
endmodule
