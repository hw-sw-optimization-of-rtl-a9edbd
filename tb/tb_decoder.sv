// tb_decoder: decodes a directed list of instructions (RV32I, M, system,
// and the two SDOTP opcodes) and checks the control fields that matter for
// each: operation, operand sources, immediate, register write, memory and
// Mult/Div requests, and the illegal flag for reserved encodings.
module tb_decoder;
  import maupiti_pkg::*;
  import rv_asm_pkg::*;
  logic [31:0] instr;
  ctrl_t c;
  int checks = 0, failures = 0;

  decoder dut (.instr_i(instr), .ctrl_o(c));

  task automatic chk(string what, logic cond);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (instr %h)", what, instr); end
  endtask

  initial begin
    instr = sdotp8(5, 6, 7); #1;
    chk("sdotp8", c.alu_op == ALU_SDOTP8 && c.use_rs3 && c.rf_we && !c.illegal && c.opb_sel == OPB_RF && c.wb_sel == WB_ALU);
    instr = sdotp4(5, 6, 7); #1;
    chk("sdotp4", c.alu_op == ALU_SDOTP4 && c.use_rs3 && c.rf_we && !c.illegal);
    instr = r_type(7'b0, 7, 6, 3'b010, 5, 7'b0001011); #1;
    chk("custom-0 funct3=2 illegal", c.illegal && !c.rf_we);
    instr = r_type(7'b0000001, 7, 6, 3'b000, 5, 7'b0001011); #1;
    chk("custom-0 funct7!=0 illegal", c.illegal);
    instr = add(1, 2, 3); #1;
    chk("add", c.alu_op == ALU_ADD && c.rf_we && !c.use_rs3 && !c.md_en && !c.illegal);
    instr = sub(1, 2, 3); #1;
    chk("sub", c.alu_op == ALU_SUB && c.rf_we);
    instr = addi(1, 2, -5); #1;
    chk("addi", c.alu_op == ALU_ADD && c.opb_sel == OPB_IMM && c.imm == -32'sd5);
    instr = lui(3, 32'hABCDE000); #1;
    chk("lui", c.opa_sel == OPA_ZERO && c.imm == 32'hABCDE000 && c.rf_we);
    instr = lw(4, 2, 12); #1;
    chk("lw", c.mem_req && !c.mem_we && c.mem_size == 2 && c.wb_sel == WB_MEM && c.imm == 12);
    instr = lb(4, 2, -1); #1;
    chk("lb", c.mem_req && c.mem_size == 0 && c.mem_signed && c.imm == 32'hFFFF_FFFF);
    instr = lhu(4, 2, 2); #1;
    chk("lhu", c.mem_req && c.mem_size == 1 && !c.mem_signed);
    instr = sw(4, 2, -8); #1;
    chk("sw", c.mem_req && c.mem_we && !c.rf_we && c.imm == -32'sd8);
    instr = beq(1, 2, -16); #1;
    chk("beq", c.branch && c.alu_op == ALU_EQ && c.imm == -32'sd16 && !c.rf_we);
    instr = blt(1, 2, 2048); #1;
    chk("blt", c.branch && c.alu_op == ALU_LT && c.imm == 32'd2048);
    instr = jal(1, -2048); #1;
    chk("jal", c.jal && c.rf_we && c.wb_sel == WB_PCN && c.imm == -32'sd2048);
    instr = jalr(0, 1, 4); #1;
    chk("jalr", c.jalr && c.imm == 4);
    instr = mul(1, 2, 3); #1;
    chk("mul", c.md_en && c.md_op == MD_MUL && c.wb_sel == WB_MD);
    instr = rem(1, 2, 3); #1;
    chk("rem", c.md_en && c.md_op == MD_REM);
    instr = csrrw(1, 12'h340, 2); #1;
    chk("csrrw", c.csr_access && c.csr_op == CSR_WRITE && c.wb_sel == WB_CSR);
    instr = csrrs(1, 12'hB00, 0); #1;
    chk("csrr (no write)", c.csr_access && c.csr_op == CSR_NONE);
    instr = ECALL; #1;  chk("ecall", c.ecall && !c.illegal);
    instr = MRET;  #1;  chk("mret", c.mret && !c.illegal);
    instr = 32'h0000_0000; #1; chk("zero illegal", c.illegal);
    instr = 32'hFFFF_FFFF; #1; chk("ones illegal", c.illegal);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
