// tb_if_stage: the fetch stage runs from a behavioural one-cycle instruction
// memory holding a stream of random 32-bit instructions mixed with the
// compressed "c.li a0, 5" at all alignments. A random ID/EX stage accepts
// instructions and redirects to random instruction starts. Every instruction
// leaving the IF/ID register is checked: first PC equals the boot address,
// PC sequence, raw bits, compressed flag and the expansion of c.li a0,5 into
// addi a0, x0, 5 (0x00500513, worked out from the ISA manual).
module tb_if_stage;
  localparam logic [31:0] BOOT = 32'h0000_0000;
  logic clk = 0, rst_n = 1;
  logic pc_set, id_ready, valid, comp, ill, req, gnt, rvalid;
  logic [31:0] target, instr, raw, pc, maddr, mrdata;
  logic [15:0] img [512];
  int starts [$];
  int checks = 0, failures = 0, fires = 0, ncomp = 0;
  logic [31:0] exp_pc;

  if_stage dut (.clk_i(clk), .rst_ni(rst_n), .boot_addr_i(BOOT), .pc_set_i(pc_set), .pc_target_i(target),
                .id_ready_i(id_ready), .instr_valid_id_o(valid), .instr_rdata_id_o(instr),
                .instr_raw_id_o(raw), .instr_is_compressed_id_o(comp), .instr_illegal_c_id_o(ill),
                .pc_id_o(pc), .instr_req_o(req), .instr_gnt_i(gnt), .instr_addr_o(maddr),
                .instr_rvalid_i(rvalid), .instr_rdata_i(mrdata));
  always #5 clk = ~clk;
  initial #1 rst_n = 0;  // reset needs an edge: async reset flops react to negedge
  assign gnt = 1'b1;

  always @(posedge clk) begin
    rvalid <= req;
    mrdata <= {img[(maddr[9:1] + 1) % 512], img[maddr[9:1]]};
  end

  always @(posedge clk) begin
    if (rst_n && valid && id_ready) begin
      logic [15:0] h0;
      h0 = img[exp_pc[9:1]];
      checks++;
      if (h0 == 16'h4515) begin
        ncomp++;
        if (pc !== exp_pc || !comp || raw !== 32'h4515 || instr !== 32'h0050_0513 || ill) begin
          failures++; $display("FAIL compressed at %h: pc %h instr %h", exp_pc, pc, instr);
        end
        exp_pc += 2;
      end else begin
        if (pc !== exp_pc || comp || instr !== {img[exp_pc[9:1] + 1], h0} || raw !== instr) begin
          failures++; $display("FAIL at %h: pc %h instr %h", exp_pc, pc, instr);
        end
        exp_pc += 4;
      end
      fires++;
    end
    if (pc_set) exp_pc = target;
  end

  initial begin
    int a = 0;
    // instruction stream from address 0 to 1024
    while (a < 1020) begin
      starts.push_back(a);
      if ($urandom % 3 == 0) begin img[a/2] = 16'h4515; a += 2; end
      else begin img[a/2] = 16'($urandom) | 16'h3; img[a/2 + 1] = 16'($urandom); a += 4; end
    end
    while (a < 1024) begin img[a/2] = 16'h4515; a += 2; end
    exp_pc = BOOT;
    pc_set = 0; id_ready = 0; target = 0; rvalid = 0; mrdata = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      id_ready = ($urandom % 10 < 8);
      pc_set = valid && id_ready && ($urandom % 25 == 0);
      target = starts[$urandom % starts.size()];
      if (target > 1000) target = 0;
    end
    checks++;
    if (fires < 2000 || ncomp < 300) begin failures++; $display("FAIL too few: %0d %0d", fires, ncomp); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
