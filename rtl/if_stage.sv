// if_stage: instruction fetch stage of the MAUPITI core.
//
// The prefetch buffer streams raw instructions from instruction memory; the
// compressed decoder expands 16-bit ones; the IF/ID pipeline register then
// hands one expanded instruction, its PC, its raw bits and whether it was
// compressed or an illegal compressed encoding to the ID/EX stage. The
// register is refilled whenever it is empty or the ID/EX stage takes its
// instruction (id_ready_i). pc_set_i redirects fetch to pc_target_i and
// empties the register, so a taken branch costs the cycles the memory needs
// to return the target. Right after reset the stage redirects itself to
// boot_addr_i. The split into fetch stage and pipeline register follows the
// core diagram of the paper; the details are this design's own.
module if_stage (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic [31:0] boot_addr_i,
  input  logic        pc_set_i,
  input  logic [31:0] pc_target_i,
  input  logic        id_ready_i,
  output logic        instr_valid_id_o,
  output logic [31:0] instr_rdata_id_o,
  output logic [31:0] instr_raw_id_o,
  output logic        instr_is_compressed_id_o,
  output logic        instr_illegal_c_id_o,
  output logic [31:0] pc_id_o,
  // instruction memory bus
  output logic        instr_req_o,
  input  logic        instr_gnt_i,
  output logic [31:0] instr_addr_o,
  input  logic        instr_rvalid_i,
  input  logic [31:0] instr_rdata_i
);
  logic        boot_q;
  logic        pf_branch, pf_valid, pf_ready;
  logic [31:0] pf_rdata, pf_addr, pf_target, dec_instr;
  logic        dec_comp, dec_illegal;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) boot_q <= 1'b1;
    else         boot_q <= 1'b0;
  end

  assign pf_branch = boot_q || pc_set_i;
  assign pf_target = boot_q ? boot_addr_i : pc_target_i;
  assign pf_ready  = !instr_valid_id_o || id_ready_i;

  prefetch_buffer u_pf (
    .clk_i, .rst_ni,
    .req_i         (!boot_q),
    .branch_i      (pf_branch),
    .addr_i        (pf_target),
    .ready_i       (pf_ready),
    .valid_o       (pf_valid),
    .rdata_o       (pf_rdata),
    .addr_o        (pf_addr),
    .instr_req_o, .instr_gnt_i, .instr_addr_o, .instr_rvalid_i, .instr_rdata_i
  );

  compressed_decoder u_cdec (
    .instr_i        (pf_rdata),
    .instr_o        (dec_instr),
    .is_compressed_o(dec_comp),
    .illegal_o      (dec_illegal)
  );

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      instr_valid_id_o <= 1'b0; instr_rdata_id_o <= '0; instr_raw_id_o <= '0;
      instr_is_compressed_id_o <= 1'b0; instr_illegal_c_id_o <= 1'b0; pc_id_o <= '0;
    end else if (pf_branch) begin
      instr_valid_id_o <= 1'b0;
    end else if (pf_ready) begin
      instr_valid_id_o <= pf_valid;
      if (pf_valid) begin
        instr_rdata_id_o         <= dec_instr;
        instr_raw_id_o           <= dec_comp ? {16'b0, pf_rdata[15:0]} : pf_rdata;
        instr_is_compressed_id_o <= dec_comp;
        instr_illegal_c_id_o     <= dec_illegal;
        pc_id_o                  <= pf_addr;
      end
    end
  end
endmodule
