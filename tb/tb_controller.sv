// tb_controller: directed cases for the ID/EX control decisions: plain
// retire, load/store and divide stalls released by their done signals,
// taken and not-taken branches, jumps, mret, and the priority and cause
// codes of illegal-instruction, ecall, ebreak and misaligned-access traps
// (which must suppress the register write).
module tb_controller;
  import maupiti_pkg::*;
  logic valid, illegal, taken, lsu_done, mis, md_done;
  logic [31:0] raw, laddr, cause, tval;
  ctrl_t c;
  logic id_ready, retire, rf_we, pc_set, lsu_req, md_en, trap, mret;
  pc_sel_e pc_mux;
  int checks = 0, failures = 0;

  controller dut (.instr_valid_i(valid), .ctrl_i(c), .illegal_i(illegal), .instr_raw_i(raw),
                  .branch_taken_i(taken), .lsu_done_i(lsu_done), .lsu_misaligned_i(mis),
                  .lsu_addr_i(laddr), .md_done_i(md_done), .id_ready_o(id_ready), .retire_o(retire),
                  .rf_we_o(rf_we), .pc_set_o(pc_set), .pc_mux_o(pc_mux), .lsu_req_o(lsu_req),
                  .md_en_o(md_en), .trap_o(trap), .mret_o(mret), .exc_cause_o(cause), .exc_tval_o(tval));

  task automatic chk(string what, logic cond);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s rdy=%b set=%b mux=%0d trap=%b cause=%0d we=%b md=%b", what, id_ready, pc_set, pc_mux, trap, cause, rf_we, md_en); end
  endtask

  task automatic clear();
    c = '0; c.alu_op = ALU_ADD; c.opa_sel = OPA_RF; c.opb_sel = OPB_RF; c.wb_sel = WB_ALU;
    c.md_op = MD_MUL; c.csr_op = CSR_NONE;
    valid = 1; illegal = 0; taken = 0; lsu_done = 0; mis = 0; md_done = 0;
    raw = 32'h1234_5678; laddr = 32'h0002_0003;
  endtask

  initial begin
    clear(); valid = 0;
    #1 chk("idle", !id_ready && !pc_set && !rf_we && !trap);
    clear(); c.rf_we = 1;
    #1 chk("alu retires", id_ready && retire && rf_we && !pc_set);
    clear(); c.mem_req = 1; c.rf_we = 1;
    #1 chk("load stalls", !id_ready && lsu_req && !rf_we);
    lsu_done = 1;
    #1 chk("load done", id_ready && rf_we);
    clear(); c.md_en = 1; c.rf_we = 1;
    #1 chk("div stalls", !id_ready && md_en);
    md_done = 1;
    #1 chk("div done", id_ready && rf_we);
    clear(); c.branch = 1; taken = 0;
    #1 chk("branch not taken", id_ready && !pc_set);
    taken = 1;
    #1 chk("branch taken", pc_set && pc_mux == PC_JUMP);
    clear(); c.jal = 1; c.rf_we = 1;
    #1 chk("jal", pc_set && pc_mux == PC_JUMP && rf_we);
    clear(); c.mret = 1;
    #1 chk("mret", pc_set && pc_mux == PC_MRET && mret);
    clear(); illegal = 1; c.ecall = 1; c.rf_we = 1;
    #1 chk("illegal first", trap && cause == EXC_ILLEGAL && tval == raw && !rf_we && pc_mux == PC_TRAP && id_ready);
    clear(); c.ecall = 1;
    #1 chk("ecall", trap && cause == EXC_ECALL_M && pc_set && pc_mux == PC_TRAP);
    clear(); c.ebreak = 1;
    #1 chk("ebreak", trap && cause == EXC_BREAKPOINT);
    clear(); c.mem_req = 1; c.rf_we = 1; mis = 1;
    #1 chk("load misaligned", trap && cause == EXC_LD_MISALIGN && tval == laddr && !rf_we && id_ready);
    c.mem_we = 1; c.rf_we = 0;
    #1 chk("store misaligned", trap && cause == EXC_ST_MISALIGN);
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
