// tb_maupiti_workload: runs a small mixed-precision people-counting network
// on the complete MAUPITI digital block at its default parameters and checks
// every stored result against a reference computed in the testbench.
//
// The network has the shape of the deployed counting networks: 8-bit first
// layer, 4-bit later layer, fully connected layers done as dot products:
//   input   8x8 thermal frame, INT8 (values 0..127), 16 words in data RAM
//   layer 1 64 -> 16, INT8 weights, SDOTP8; ReLU, >> 13, clamp to 7,
//           packed as INT4 (eight activations per word)
//   layer 2 16 -> 4, INT4 weights, SDOTP4; four class scores
//   argmax  index of the first maximum score = estimated people count 0..3
// The weights and the input are random; the host writes them, and the
// program, through the load port while the chip is held in reset. The
// program's results (packed layer-1 word pair, four scores, class) are
// compared word by word with the reference, the SDOTP8/SDOTP4 instruction
// counts must be 256 and 8, and the cycle count of the whole inference is
// reported. The published networks' exact layer shapes are not available,
// so this network is representative only; its weights and input total
// 1,120 bytes, the order of the published data sizes (416 to 1,104 bytes).
module tb_maupiti_workload;
  import maupiti_pkg::*;
  import rv_asm_pkg::*;
  localparam int SH1 = 13;
  logic clk = 0, rst_n = 1;
  logic load_req;
  logic [31:0] load_addr, load_wdata, instret;
  logic [3:0]  load_be;
  logic afe_start, afe_step, frame_ready;
  logic [7:0][15:0][15:0] afe_data;
  logic [15:0][31:0] calib;
  logic [31:0] prog [$];
  logic [7:0]  x_in [64];
  logic [7:0]  w1 [16][64];
  logic [3:0]  w2 [4][16];
  int checks = 0, failures = 0, cycle = 0, pa = 0, start_cycle = 0, n_sd8 = 0, n_sd4 = 0;

  maupiti_top dut (
    .clk_i(clk), .rst_ni(rst_n), .trace_en_i(1'b0),
    .load_req_i(load_req), .load_addr_i(load_addr), .load_be_i(load_be), .load_wdata_i(load_wdata),
    .otp_prog_en_i(1'b0), .otp_prog_addr_i(7'd0), .otp_prog_data_i(8'd0),
    .afe_start_o(afe_start), .afe_step_o(afe_step), .afe_done_i(1'b0), .afe_data_i(afe_data),
    .calib_o(calib), .frame_ready_o(frame_ready), .instret_o(instret));
  always #5 clk = ~clk;
  initial #1 rst_n = 0;
  always @(posedge clk) cycle <= cycle + 1;
  always @(posedge clk) if (rst_n && dut.u_core.retire && dut.u_core.instr[6:0] == 7'b0001011) begin
    if (dut.u_core.instr[14:12] == 3'b000) n_sd8++; else n_sd4++;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------------------------------------------------------- assembler helpers
  task automatic e32(logic [31:0] w); prog.push_back(w); pa += 4; endtask
  function automatic logic [31:0] andi(int rd, int rs1, int imm); return i_type(imm, rs1, 3'b111, rd, 7'b0010011); endfunction
  function automatic logic [31:0] srai(int rd, int rs1, int sh); return i_type(32'h400 | sh, rs1, 3'b101, rd, 7'b0010011); endfunction
  function automatic logic [31:0] sll(int rd, int rs1, int rs2); return r_type(7'b0, rs2, rs1, 3'b001, rd, 7'b0110011); endfunction
  function automatic logic [31:0] or_(int rd, int rs1, int rs2); return r_type(7'b0, rs2, rs1, 3'b110, rd, 7'b0110011); endfunction
  function automatic logic [31:0] bge(int rs1, int rs2, int off); return b_type(off, rs2, rs1, 3'b101); endfunction
  function automatic logic [31:0] rdw(int off); return dut.u_dram.mem[off / 4]; endfunction

  task automatic host_write(logic [31:0] a, logic [31:0] d);
    @(negedge clk) begin load_req = 1; load_addr = a; load_be = 4'hF; load_wdata = d; end
    @(negedge clk) load_req = 0;
  endtask

  int l1i, l1o, l2o, skip;
  int a1 [16];
  int score [4];
  int best, cls;
  logic [31:0] l1w [2];

  initial begin
    load_req = 0; load_addr = 0; load_be = 0; load_wdata = 0; afe_data = '0;
    for (int i = 0; i < 64; i++) x_in[i] = 8'($urandom_range(127));
    for (int o = 0; o < 16; o++) for (int i = 0; i < 64; i++) w1[o][i] = 8'($urandom);
    for (int o = 0; o < 4; o++) for (int i = 0; i < 16; i++) w2[o][i] = 4'($urandom);

    // ----- program (x1 = data RAM base)
    e32(lui(1, DRAM_BASE));
    e32(addi(2, 1, 32'h100)); e32(addi(3, 0, 0)); e32(addi(10, 0, 0)); e32(addi(11, 1, 32'h600));
    e32(addi(20, 0, 7));
    l1o = pa;
    e32(addi(4, 0, 0)); e32(addi(5, 1, 0)); e32(addi(6, 0, 16));
    l1i = pa;
    e32(lw(7, 5, 0)); e32(lw(8, 2, 0)); e32(sdotp8(4, 7, 8));
    e32(addi(5, 5, 4)); e32(addi(2, 2, 4)); e32(addi(6, 6, -1)); e32(bne(6, 0, l1i - pa));
    e32(srai(4, 4, SH1));
    e32(bge(4, 0, 8)); e32(addi(4, 0, 0));            // ReLU
    e32(blt(4, 20, 8)); e32(addi(4, 0, 7));           // clamp to 7
    e32(andi(9, 3, 7)); e32(slli(9, 9, 2)); e32(sll(12, 4, 9)); e32(or_(10, 10, 12));
    e32(andi(9, 3, 7)); e32(addi(13, 0, 7));
    e32(bne(9, 13, 16));
    e32(sw(10, 11, 0)); e32(addi(11, 11, 4)); e32(addi(10, 0, 0));
    e32(addi(3, 3, 1)); e32(addi(14, 0, 16)); e32(bne(3, 14, l1o - pa));
    e32(addi(2, 1, 32'h500)); e32(addi(3, 0, 0)); e32(addi(15, 1, 32'h700));
    e32(lui(16, 32'h8000_0000)); e32(addi(17, 0, 0));
    l2o = pa;
    e32(addi(4, 0, 0));
    e32(lw(7, 1, 32'h600)); e32(lw(8, 2, 0)); e32(sdotp4(4, 7, 8));
    e32(lw(7, 1, 32'h604)); e32(lw(8, 2, 4)); e32(sdotp4(4, 7, 8));
    e32(addi(2, 2, 8)); e32(sw(4, 15, 0)); e32(addi(15, 15, 4));
    e32(bge(16, 4, 12)); e32(addi(16, 4, 0)); e32(addi(17, 3, 0));
    e32(addi(3, 3, 1)); e32(addi(14, 0, 4)); e32(bne(3, 14, l2o - pa));
    e32(sw(17, 15, 0));
    e32(lui(18, REGS_BASE)); e32(lui(19, 32'h6000)); e32(addi(19, 19, 32'h00D)); e32(sw(19, 18, 60));
    e32(jal(0, 0));

    // ----- reference
    foreach (a1[o]) begin
      int acc = 0;
      for (int i = 0; i < 64; i++) acc += int'($signed(x_in[i])) * int'($signed(w1[o][i]));
      acc = acc >>> SH1;
      a1[o] = acc < 0 ? 0 : acc > 7 ? 7 : acc;
    end
    l1w = '{0, 0};
    foreach (a1[o]) l1w[o / 8][4 * (o % 8) +: 4] = 4'(a1[o]);
    best = 32'h8000_0000; cls = 0;
    foreach (score[o]) begin
      score[o] = 0;
      for (int i = 0; i < 16; i++) score[o] += a1[i] * int'($signed(w2[o][i]));
      if (score[o] > best) begin best = score[o]; cls = o; end
    end

    // ----- host: program and data during reset
    repeat (2) @(posedge clk);
    foreach (prog[i]) host_write(IRAM_BASE + 4*i, prog[i]);
    for (int w = 0; w < 16; w++)
      host_write(DRAM_BASE + 4*w, {x_in[4*w+3], x_in[4*w+2], x_in[4*w+1], x_in[4*w]});
    for (int o = 0; o < 16; o++) for (int w = 0; w < 16; w++)
      host_write(DRAM_BASE + 32'h100 + 64*o + 4*w, {w1[o][4*w+3], w1[o][4*w+2], w1[o][4*w+1], w1[o][4*w]});
    for (int o = 0; o < 4; o++) for (int w = 0; w < 2; w++) begin
      logic [31:0] d;
      for (int k = 0; k < 8; k++) d[4*k +: 4] = w2[o][8*w + k];
      host_write(DRAM_BASE + 32'h500 + 8*o + 4*w, d);
    end
    @(negedge clk) rst_n = 1;
    start_cycle = cycle;
    while (calib[15] !== 32'h600D) @(posedge clk);
    $display("inference: %0d cycles, %0d instructions, 1088 MACs", cycle - start_cycle, instret);
    $display("layer 1 activations %h %h, scores %0d %0d %0d %0d, class %0d", l1w[1], l1w[0], score[0], score[1], score[2], score[3], cls);
    chk(rdw(32'h600) === l1w[0] && rdw(32'h604) === l1w[1],
        $sformatf("layer 1 INT4 activations %h %h exp %h %h", rdw(32'h600), rdw(32'h604), l1w[0], l1w[1]));
    for (int o = 0; o < 4; o++)
      chk(rdw(32'h700 + 4*o) === score[o], $sformatf("score %0d = %0d exp %0d", o, $signed(rdw(32'h700 + 4*o)), score[o]));
    chk(rdw(32'h710) === cls, $sformatf("class %0d exp %0d", rdw(32'h710), cls));
    chk(n_sd8 == 256 && n_sd4 == 8, $sformatf("SDOTP counts %0d %0d", n_sd8, n_sd4));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
