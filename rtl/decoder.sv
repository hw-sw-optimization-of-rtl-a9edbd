// decoder: turns one 32-bit instruction into the control struct (ctrl_t) of
// the ID/EX stage of the MAUPITI core.
//
// It covers RV32I, the M extension and the machine-mode system instructions
// (ecall, ebreak, mret, wfi and fence are accepted, the last two as no-ops),
// plus the two SIMD sum-of-dot-product instructions that the paper adds:
//   sdotp8 rd, rs1, rs2 : rd += sum of 4 signed 8-bit lane products
//   sdotp4 rd, rs1, rs2 : rd += sum of 8 signed 4-bit lane products
// Both read rd through the register file's third port (use_rs3) and write
// it back. The paper does not give their encoding; here they are R-type on
// the custom-0 major opcode (0001011) with funct7 = 0 and funct3 = 000 (8-bit)
// or 001 (4-bit). Unsigned, mixed-width and 2-bit variants are absent, as in
// the paper. Anything else sets ctrl_o.illegal. Combinational.
module decoder
  import maupiti_pkg::*;
(
  input  logic [31:0] instr_i,
  output ctrl_t       ctrl_o
);
  logic [6:0] opc, f7;
  logic [2:0] f3;
  logic [31:0] imm_i, imm_s, imm_b, imm_u, imm_j;

  assign opc = instr_i[6:0];
  assign f3  = instr_i[14:12];
  assign f7  = instr_i[31:25];
  assign imm_i = {{20{instr_i[31]}}, instr_i[31:20]};
  assign imm_s = {{20{instr_i[31]}}, instr_i[31:25], instr_i[11:7]};
  assign imm_b = {{19{instr_i[31]}}, instr_i[31], instr_i[7], instr_i[30:25], instr_i[11:8], 1'b0};
  assign imm_u = {instr_i[31:12], 12'b0};
  assign imm_j = {{11{instr_i[31]}}, instr_i[31], instr_i[19:12], instr_i[20], instr_i[30:21], 1'b0};

  always_comb begin
    ctrl_o = '0;
    ctrl_o.alu_op  = ALU_ADD;
    ctrl_o.opa_sel = OPA_RF;
    ctrl_o.opb_sel = OPB_RF;
    ctrl_o.wb_sel  = WB_ALU;
    ctrl_o.md_op   = MD_MUL;
    ctrl_o.csr_op  = CSR_NONE;
    unique case (opc)
      OPC_LUI: begin
        ctrl_o.opa_sel = OPA_ZERO; ctrl_o.opb_sel = OPB_IMM; ctrl_o.imm = imm_u; ctrl_o.rf_we = 1'b1;
      end
      OPC_AUIPC: begin
        ctrl_o.opa_sel = OPA_PC; ctrl_o.opb_sel = OPB_IMM; ctrl_o.imm = imm_u; ctrl_o.rf_we = 1'b1;
      end
      OPC_JAL: begin
        ctrl_o.jal = 1'b1; ctrl_o.imm = imm_j; ctrl_o.rf_we = 1'b1; ctrl_o.wb_sel = WB_PCN;
      end
      OPC_JALR: begin
        ctrl_o.jalr = 1'b1; ctrl_o.imm = imm_i; ctrl_o.rf_we = 1'b1; ctrl_o.wb_sel = WB_PCN;
        ctrl_o.opb_sel = OPB_IMM;
        ctrl_o.illegal = (f3 != 3'b000);
      end
      OPC_BRANCH: begin
        ctrl_o.branch = 1'b1; ctrl_o.imm = imm_b;
        unique case (f3)
          3'b000: ctrl_o.alu_op = ALU_EQ;
          3'b001: ctrl_o.alu_op = ALU_NE;
          3'b100: ctrl_o.alu_op = ALU_LT;
          3'b101: ctrl_o.alu_op = ALU_GE;
          3'b110: ctrl_o.alu_op = ALU_LTU;
          3'b111: ctrl_o.alu_op = ALU_GEU;
          default: ctrl_o.illegal = 1'b1;
        endcase
      end
      OPC_LOAD: begin
        ctrl_o.mem_req = 1'b1; ctrl_o.opb_sel = OPB_IMM; ctrl_o.imm = imm_i; ctrl_o.rf_we = 1'b1;
        ctrl_o.wb_sel = WB_MEM; ctrl_o.mem_size = f3[1:0]; ctrl_o.mem_signed = ~f3[2];
        ctrl_o.illegal = (f3[1:0] == 2'b11) || (f3 == 3'b110);
      end
      OPC_STORE: begin
        ctrl_o.mem_req = 1'b1; ctrl_o.mem_we = 1'b1; ctrl_o.opb_sel = OPB_IMM; ctrl_o.imm = imm_s;
        ctrl_o.mem_size = f3[1:0];
        ctrl_o.illegal = f3[2] || (f3[1:0] == 2'b11);
      end
      OPC_OP_IMM: begin
        ctrl_o.opb_sel = OPB_IMM; ctrl_o.imm = imm_i; ctrl_o.rf_we = 1'b1;
        unique case (f3)
          3'b000: ctrl_o.alu_op = ALU_ADD;
          3'b010: ctrl_o.alu_op = ALU_SLT;
          3'b011: ctrl_o.alu_op = ALU_SLTU;
          3'b100: ctrl_o.alu_op = ALU_XOR;
          3'b110: ctrl_o.alu_op = ALU_OR;
          3'b111: ctrl_o.alu_op = ALU_AND;
          3'b001: begin ctrl_o.alu_op = ALU_SLL; ctrl_o.illegal = (f7 != 7'b0); end
          default: begin
            ctrl_o.alu_op  = f7[5] ? ALU_SRA : ALU_SRL;
            ctrl_o.illegal = ({f7[6], f7[4:0]} != 6'b0);
          end
        endcase
      end
      OPC_OP: begin
        ctrl_o.rf_we = 1'b1;
        if (f7 == 7'b0000001) begin
          ctrl_o.md_en = 1'b1; ctrl_o.wb_sel = WB_MD; ctrl_o.md_op = md_op_e'(f3);
        end else begin
          unique case (f3)
            3'b000: ctrl_o.alu_op = f7[5] ? ALU_SUB : ALU_ADD;
            3'b001: ctrl_o.alu_op = ALU_SLL;
            3'b010: ctrl_o.alu_op = ALU_SLT;
            3'b011: ctrl_o.alu_op = ALU_SLTU;
            3'b100: ctrl_o.alu_op = ALU_XOR;
            3'b101: ctrl_o.alu_op = f7[5] ? ALU_SRA : ALU_SRL;
            3'b110: ctrl_o.alu_op = ALU_OR;
            default: ctrl_o.alu_op = ALU_AND;
          endcase
          ctrl_o.illegal = !((f7 == 7'b0) || (f7 == 7'b0100000 && (f3 == 3'b000 || f3 == 3'b101)));
        end
      end
      OPC_CUSTOM0: begin
        ctrl_o.rf_we = 1'b1; ctrl_o.use_rs3 = 1'b1;
        ctrl_o.alu_op = (f3 == F3_SDOTP4) ? ALU_SDOTP4 : ALU_SDOTP8;
        ctrl_o.illegal = (f7 != 7'b0) || !(f3 == F3_SDOTP8 || f3 == F3_SDOTP4);
      end
      OPC_MISC_MEM: ;  // fence / fence.i: nothing to order in this core
      OPC_SYSTEM: begin
        if (f3 == 3'b000) begin
          unique case (instr_i[31:20])
            12'h000: ctrl_o.ecall  = 1'b1;
            12'h001: ctrl_o.ebreak = 1'b1;
            12'h302: ctrl_o.mret   = 1'b1;
            12'h105: ;  // wfi: no interrupts, so a no-op
            default: ctrl_o.illegal = 1'b1;
          endcase
          ctrl_o.illegal = ctrl_o.illegal || (instr_i[19:7] != 13'b0);
        end else begin
          ctrl_o.csr_access = 1'b1; ctrl_o.rf_we = 1'b1; ctrl_o.wb_sel = WB_CSR;
          ctrl_o.csr_imm = f3[2];
          ctrl_o.imm = {27'b0, instr_i[19:15]};
          unique case (f3[1:0])
            2'b01: ctrl_o.csr_op = CSR_WRITE;
            2'b10: ctrl_o.csr_op = (instr_i[19:15] == 5'b0) ? CSR_NONE : CSR_SET;
            2'b11: ctrl_o.csr_op = (instr_i[19:15] == 5'b0) ? CSR_NONE : CSR_CLEAR;
            default: ctrl_o.illegal = 1'b1;
          endcase
        end
      end
      default: ctrl_o.illegal = 1'b1;
    endcase
    if (ctrl_o.illegal) begin
      ctrl_o.rf_we = 1'b0; ctrl_o.mem_req = 1'b0; ctrl_o.md_en = 1'b0; ctrl_o.csr_access = 1'b0;
      ctrl_o.csr_op = CSR_NONE; ctrl_o.branch = 1'b0; ctrl_o.jal = 1'b0; ctrl_o.jalr = 1'b0;
    end
  end
endmodule
