// maupiti_core: the customised Ibex-style RISC-V core of MAUPITI, RV32IMC plus
// two SIMD sum-of-dot-product instructions for INT8 and INT4 neural networks.
//
// Two stages. The IF stage (prefetch buffer, compressed decoder, IF/ID
// register) supplies one expanded instruction per cycle. The ID/EX stage
// decodes it, reads up to three registers (RdA = rs1, RdB = rs2 and, for
// SDOTP, RdC = rd), selects the operands (OpA from RF, PC or zero; OpB from
// RF or immediate), executes in the ALU, Mult/Div unit, LSU or CSR file and
// writes the register file in the same cycle. ALU, branch, jump and CSR
// instructions and multiplications take one cycle; loads and stores take two
// with a single-cycle memory; divisions 34; a taken branch or jump adds the
// refetch delay (three cycles with single-cycle memory). SDOTP takes one
// cycle: rd <= rd + dot(rs1, rs2) over 4 x INT8 or 8 x INT4 signed lanes.
// Both memory ports use a request/grant handshake with in-order responses.
// Following the paper, the decoder, register file (third read port RdC) and
// ALU (third operand OpC, SDOTP unit) are the modified parts; the rest is a
// plain implementation of the blocks the paper's core diagram names, written
// for this design. No interrupts and no debug mode.
module maupiti_core
  import maupiti_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic [31:0] boot_addr_i,
  input  logic        trace_en_i,
  // instruction memory
  output logic        instr_req_o,
  input  logic        instr_gnt_i,
  output logic [31:0] instr_addr_o,
  input  logic        instr_rvalid_i,
  input  logic [31:0] instr_rdata_i,
  // data memory
  output logic        data_req_o,
  input  logic        data_gnt_i,
  output logic        data_we_o,
  output logic [3:0]  data_be_o,
  output logic [31:0] data_addr_o,
  output logic [31:0] data_wdata_o,
  input  logic        data_rvalid_i,
  input  logic [31:0] data_rdata_i,
  // status
  output logic [31:0] instret_o
);
  // ------------------------------------------------------------- IF stage
  logic        instr_valid, is_comp, illegal_c, pc_set, id_ready;
  logic [31:0] instr, instr_raw, pc, pc_target;

  if_stage u_if (
    .clk_i, .rst_ni, .boot_addr_i,
    .pc_set_i                (pc_set),
    .pc_target_i             (pc_target),
    .id_ready_i              (id_ready),
    .instr_valid_id_o        (instr_valid),
    .instr_rdata_id_o        (instr),
    .instr_raw_id_o          (instr_raw),
    .instr_is_compressed_id_o(is_comp),
    .instr_illegal_c_id_o    (illegal_c),
    .pc_id_o                 (pc),
    .instr_req_o, .instr_gnt_i, .instr_addr_o, .instr_rvalid_i, .instr_rdata_i
  );

  // ------------------------------------------------------------- decode
  ctrl_t ctrl;
  decoder u_dec (.instr_i(instr), .ctrl_o(ctrl));

  logic [4:0]  rs1, rs2, rd;
  logic [31:0] rs1_data, rs2_data, rs3_data, wb_data;
  logic        rf_we;
  assign rs1 = instr[19:15];
  assign rs2 = instr[24:20];
  assign rd  = instr[11:7];

  register_file #(.NREGS(32)) u_rf (
    .clk_i, .rst_ni,
    .raddr_a_i(rs1), .rdata_a_o(rs1_data),
    .raddr_b_i(rs2), .rdata_b_o(rs2_data),
    .raddr_c_i(rd),  .rdata_c_o(rs3_data),
    .waddr_i  (rd),  .wdata_i  (wb_data), .we_i(rf_we)
  );

  // ------------------------------------------------------------- operands
  logic [31:0] op_a, op_b, op_c, alu_res;
  logic        alu_cmp;
  always_comb begin
    unique case (ctrl.opa_sel)
      OPA_PC:   op_a = pc;
      OPA_ZERO: op_a = '0;
      default:  op_a = rs1_data;
    endcase
    op_b = (ctrl.opb_sel == OPB_IMM) ? ctrl.imm : rs2_data;
    op_c = ctrl.use_rs3 ? rs3_data : '0;
  end

  // ------------------------------------------------------------- EX stage
  alu u_alu (
    .op_i(ctrl.alu_op), .op_a_i(op_a), .op_b_i(op_b), .op_c_i(op_c),
    .result_o(alu_res), .cmp_o(alu_cmp)
  );

  logic        md_en, md_done;
  logic [31:0] md_res;
  multdiv u_md (
    .clk_i, .rst_ni, .en_i(md_en), .op_i(ctrl.md_op),
    .op_a_i(rs1_data), .op_b_i(rs2_data), .done_o(md_done), .result_o(md_res)
  );

  logic        lsu_req, lsu_done, lsu_mis;
  logic [31:0] lsu_rdata;
  lsu u_lsu (
    .clk_i, .rst_ni,
    .req_i(lsu_req), .we_i(ctrl.mem_we), .size_i(ctrl.mem_size), .sign_i(ctrl.mem_signed),
    .addr_i(alu_res), .wdata_i(rs2_data),
    .done_o(lsu_done), .rdata_o(lsu_rdata), .misaligned_o(lsu_mis),
    .data_req_o, .data_gnt_i, .data_we_o, .data_be_o, .data_addr_o, .data_wdata_o,
    .data_rvalid_i, .data_rdata_i
  );

  logic        trap, mret, retire, csr_illegal;
  logic [31:0] csr_rdata, mtvec, mepc, exc_cause, exc_tval;
  pc_sel_e     pc_mux;
  csr u_csr (
    .clk_i, .rst_ni,
    .csr_addr_i  (instr[31:20]),
    .csr_op_i    (ctrl.csr_access ? ctrl.csr_op : CSR_NONE),
    .csr_wdata_i (ctrl.csr_imm ? ctrl.imm : rs1_data),
    .csr_we_i    (retire && ctrl.csr_access),
    .csr_rdata_o (csr_rdata),
    .csr_illegal_o(csr_illegal),
    .trap_i      (trap),
    .trap_pc_i   (pc),
    .trap_cause_i(exc_cause),
    .trap_tval_i (exc_tval),
    .mret_i      (mret),
    .instret_i   (retire),
    .mtvec_o     (mtvec),
    .mepc_o      (mepc)
  );

  controller u_ctrl (
    .instr_valid_i   (instr_valid),
    .ctrl_i          (ctrl),
    .illegal_i       (ctrl.illegal || illegal_c || (ctrl.csr_access && csr_illegal)),
    .instr_raw_i     (instr_raw),
    .branch_taken_i  (alu_cmp),
    .lsu_done_i      (lsu_done),
    .lsu_misaligned_i(lsu_mis),
    .lsu_addr_i      (alu_res),
    .md_done_i       (md_done),
    .id_ready_o      (id_ready),
    .retire_o        (retire),
    .rf_we_o         (rf_we),
    .pc_set_o        (pc_set),
    .pc_mux_o        (pc_mux),
    .lsu_req_o       (lsu_req),
    .md_en_o         (md_en),
    .trap_o          (trap),
    .mret_o          (mret),
    .exc_cause_o     (exc_cause),
    .exc_tval_o      (exc_tval)
  );

  // ------------------------------------------------------------- PC and WB
  logic [31:0] pc_next_seq;
  assign pc_next_seq = pc + (is_comp ? 32'd2 : 32'd4);

  always_comb begin
    unique case (pc_mux)
      PC_TRAP: pc_target = mtvec;
      PC_MRET: pc_target = mepc;
      default: pc_target = ctrl.jalr ? {alu_res[31:1], 1'b0} : pc + ctrl.imm;
    endcase
    unique case (ctrl.wb_sel)
      WB_MEM:  wb_data = lsu_rdata;
      WB_MD:   wb_data = md_res;
      WB_CSR:  wb_data = csr_rdata;
      WB_PCN:  wb_data = pc_next_seq;
      default: wb_data = alu_res;
    endcase
  end

  tracer u_tracer (
    .clk_i, .rst_ni, .trace_en_i,
    .valid_i(retire), .pc_i(pc), .instr_i(instr_raw),
    .rd_we_i(rf_we), .rd_i(rd), .rd_wdata_i(wb_data), .count_o(instret_o)
  );
endmodule
