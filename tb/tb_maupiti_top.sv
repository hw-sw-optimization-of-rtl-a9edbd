// tb_maupiti_top: end-to-end test of the MAUPITI digital block at its default
// parameters (16 KB IRAM and DRAM, 16 calibration registers, 2,000,000-cycle
// frame period, i.e. 10 frames per second at 20 MHz).
//
// The host side of the test plays the roles of the serial host interface and
// of the analog parts: it programs eight OTP bytes, writes the application
// into the instruction RAM through the load port while the chip is held in
// reset, releases reset, and then writes a 128-word INT8/INT4 weight vector
// into the data RAM through the same port while the core is already running
// (so load-port writes collide with core accesses). A behavioural analog
// front end answers each conversion request with rows of random pixels.
//
// The application boots from the ROM, copies two OTP words into calibration
// registers, takes an ecall and a misaligned-load trap (the handler adds up
// mcause and skips the instruction), runs compressed code with a 32-bit
// instruction at a halfword address, enables the readout, polls for a frame,
// then runs a 128-iteration SDOTP8/SDOTP4 loop over the frame buffer and the
// weights (a dot-product layer of the kind the counting networks are made
// of), divides and multiplies the results and writes everything to
// calibration registers, where the testbench compares it with values it
// computes itself from the same OTP bytes, pixels and weights.
//
// Mechanisms counted (each must occur at least once): ID/EX stalls, PC
// redirects (taken branches, jumps, traps), retired compressed instructions,
// SDOTP8 and SDOTP4 instructions, multiply/divide instructions, traps,
// load-port writes that took the memory from the core, AFE conversion steps
// and completed frames.
module tb_maupiti_top;
  import maupiti_pkg::*;
  import rv_asm_pkg::*;
  localparam int NW = 128;                      // words in a frame / weight vector
  logic clk = 0, rst_n = 1;
  logic load_req, otp_en, afe_start, afe_step, afe_done, frame_ready;
  logic [31:0] load_addr, load_wdata, instret;
  logic [3:0]  load_be;
  logic [6:0]  otp_addr;
  logic [7:0]  otp_data;
  logic [7:0][15:0][15:0] afe_data;
  logic [15:0][31:0] calib;
  logic [31:0] prog [$];
  logic [7:0]  otp_bytes [8];
  logic [15:0] pix [256];
  logic [31:0] wgt [NW];
  int checks = 0, failures = 0, cycle = 0, pa = 0;

  maupiti_top dut (
    .clk_i(clk), .rst_ni(rst_n), .trace_en_i(1'b0),
    .load_req_i(load_req), .load_addr_i(load_addr), .load_be_i(load_be), .load_wdata_i(load_wdata),
    .otp_prog_en_i(otp_en), .otp_prog_addr_i(otp_addr), .otp_prog_data_i(otp_data),
    .afe_start_o(afe_start), .afe_step_o(afe_step), .afe_done_i(afe_done), .afe_data_i(afe_data),
    .calib_o(calib), .frame_ready_o(frame_ready), .instret_o(instret));
  always #5 clk = ~clk;
  initial #1 rst_n = 0;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------------------------------------------------------- counters
  int n_stall = 0, n_redirect = 0, n_comp = 0, n_sd8 = 0, n_sd4 = 0, n_md = 0, n_trap = 0,
      n_load_prio = 0, n_afe = 0, n_frame = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_core.instr_valid && !dut.u_core.id_ready) n_stall++;
    if (dut.u_core.pc_set) n_redirect++;
    if (dut.u_core.retire && dut.u_core.is_comp) n_comp++;
    if (dut.u_core.retire && dut.u_core.instr[6:0] == 7'b0001011 && dut.u_core.instr[14:12] == 3'b000) n_sd8++;
    if (dut.u_core.retire && dut.u_core.instr[6:0] == 7'b0001011 && dut.u_core.instr[14:12] == 3'b001) n_sd4++;
    if (dut.u_core.retire && dut.u_core.instr[6:0] == 7'b0110011 && dut.u_core.instr[31:25] == 7'b1) n_md++;
    if (dut.u_core.trap) n_trap++;
    if ((dut.u_dmem_if.load_hit && dut.data_req) || (dut.u_imem_if.load_hit && dut.instr_req)) n_load_prio++;
    if (afe_start) n_afe++;
  end
  always @(posedge frame_ready) n_frame++;

  // ---------------------------------------------------------------- AFE model
  initial begin
    afe_done = 0; afe_data = '0;
    forever begin
      @(posedge clk);
      if (afe_start === 1'b1) begin
        int st;
        st = int'(afe_step);
        repeat (25) @(negedge clk);              // conversion time of the model
        for (int c = 0; c < 8; c++)
          for (int x = 0; x < 16; x++) afe_data[c][x] = pix[(st * 8 + c) * 16 + x];
        afe_done = 1;
        @(negedge clk) afe_done = 0;
      end
    end
  end

  // ---------------------------------------------------------------- program
  task automatic e32(logic [31:0] w);
    if (pa % 4 == 0) prog.push_back(w);
    else begin prog[$][31:16] = w[15:0]; prog.push_back({16'h0001, w[31:16]}); end
    pa += 4;
  endtask
  task automatic e16(logic [15:0] h);
    if (pa % 4 == 0) prog.push_back({16'h0001, h}); else prog[$][31:16] = h;
    pa += 2;
  endtask
  task automatic li(int rd, logic [31:0] v);
    logic [31:0] hi = v + 32'h800;
    e32(lui(rd, {hi[31:12], 12'b0}));
    e32(addi(rd, rd, int'($signed(v[11:0]))));
  endtask
  function automatic logic [31:0] andi(int rd, int rs1, int imm);
    return i_type(imm, rs1, 3'b111, rd, 7'b0010011);
  endfunction

  function automatic int dot8(logic [31:0] a, logic [31:0] b);
    int s = 0;
    for (int i = 0; i < 4; i++) s += int'($signed(a[8*i +: 8])) * int'($signed(b[8*i +: 8]));
    return s;
  endfunction
  function automatic int dot4(logic [31:0] a, logic [31:0] b);
    int s = 0;
    for (int i = 0; i < 8; i++) s += int'($signed(a[4*i +: 4])) * int'($signed(b[4*i +: 4]));
    return s;
  endfunction

  task automatic host_write(logic [31:0] a, logic [31:0] d);
    @(negedge clk) begin load_req = 1; load_addr = a; load_be = 4'hF; load_wdata = d; end
    @(negedge clk) load_req = 0;
  endtask

  int poll_pc, loop_pc, handler_pc;
  logic [31:0] otp0, otp1, acc8, acc4, e_div, e_rem, e_mul;

  initial begin
    load_req = 0; load_addr = 0; load_be = 0; load_wdata = 0;
    otp_en = 0; otp_addr = 0; otp_data = 0;
    for (int i = 0; i < 256; i++) pix[i] = 16'($urandom);
    for (int i = 0; i < NW; i++) wgt[i] = $urandom;
    for (int i = 0; i < 8; i++) otp_bytes[i] = 8'($urandom);

    // ----- application (x25 collects trap causes; registers reset to zero)
    handler_pc = 32'h200;                          // offset in IRAM
    e32(lui(1, OTP_BASE)); e32(lui(2, REGS_BASE)); e32(lui(3, FRAME_BASE)); e32(lui(4, DRAM_BASE));
    e32(lw(5, 1, 0)); e32(sw(5, 2, 0));
    e32(lw(5, 1, 4)); e32(sw(5, 2, 4));
    li(6, IRAM_BASE + handler_pc);
    e32(csrrw(0, 12'h305, 6));
    e32(ECALL);
    e16(c_li(7, 3));
    e16(c_add(7, 5));
    e16(c_li(8, 1));
    e32(add(8, 7, 8));                             // 32-bit at a halfword address
    e16(c_add(8, 8));                              // x8 = 2 * (otp1 + 4)
    e32(lw(9, 4, 2));                              // misaligned: trap, skipped
    e32(sw(8, 2, 8));
    e32(addi(10, 0, 1)); e32(sw(10, 3, 32'h200)); // enable readout
    poll_pc = pa;
    e32(lw(11, 3, 32'h200)); e32(andi(11, 11, 1)); e32(beq(11, 0, poll_pc - pa));
    e32(addi(12, 0, 0)); e32(addi(13, 0, 0)); e32(addi(14, 3, 0)); e32(addi(15, 4, 32'h100));
    e32(addi(16, 0, NW));
    loop_pc = pa;
    e32(lw(17, 14, 0)); e32(lw(18, 15, 0));
    e32(sdotp8(12, 17, 18)); e32(sdotp4(13, 17, 18));
    e32(addi(14, 14, 4)); e32(addi(15, 15, 4)); e32(addi(16, 16, -1));
    e32(bne(16, 0, loop_pc - pa));
    e32(addi(20, 0, 7));
    e32(div(19, 12, 20)); e32(rem(21, 12, 20)); e32(mul(22, 12, 13));
    e32(sw(12, 2, 12)); e32(sw(13, 2, 16)); e32(sw(19, 2, 20)); e32(sw(21, 2, 24));
    e32(sw(22, 2, 28)); e32(sw(25, 2, 32)); e32(sw(9, 2, 36));
    e32(addi(10, 0, 2)); e32(sw(10, 3, 32'h200));  // clear ready, disable
    li(23, 32'h600D); e32(sw(23, 2, 60));
    e32(jal(0, 0));
    while (pa < handler_pc) e32(NOP);
    e32(csrrs(24, 12'h342, 0)); e32(add(25, 25, 24));
    e32(csrrs(26, 12'h341, 0)); e32(addi(26, 26, 4)); e32(csrrw(0, 12'h341, 26));
    e32(MRET);

    // ----- expected results
    otp0 = {otp_bytes[3], otp_bytes[2], otp_bytes[1], otp_bytes[0]};
    otp1 = {otp_bytes[7], otp_bytes[6], otp_bytes[5], otp_bytes[4]};
    acc8 = 0; acc4 = 0;
    for (int w = 0; w < NW; w++) begin
      acc8 += dot8({pix[2*w+1], pix[2*w]}, wgt[w]);
      acc4 += dot4({pix[2*w+1], pix[2*w]}, wgt[w]);
    end
    e_div = $signed(acc8) / 7;
    e_rem = $signed(acc8) % 7;
    e_mul = acc8 * acc4;

    // ----- host: OTP, program (chip in reset), then weights while running
    repeat (2) @(posedge clk);
    for (int i = 0; i < 8; i++) begin
      @(negedge clk) begin otp_en = 1; otp_addr = 7'(i); otp_data = otp_bytes[i]; end
    end
    @(negedge clk) otp_en = 0;
    foreach (prog[i]) host_write(IRAM_BASE + 4*i, prog[i]);
    @(negedge clk) rst_n = 1;
    for (int w = 0; w < NW; w++) host_write(DRAM_BASE + 32'h100 + 4*w, wgt[w]);
    for (int w = 0; w < 16; w++) host_write(IRAM_BASE + 32'h3000 + 4*w, 32'h0);  // spare IRAM words

    while (calib[15] !== 32'h600D) @(posedge clk);
    repeat (5) @(posedge clk);
    chk(calib[0] === otp0, $sformatf("calib0 = OTP word 0: %h exp %h", calib[0], otp0));
    chk(calib[1] === otp1, $sformatf("calib1 = OTP word 1: %h exp %h", calib[1], otp1));
    chk(calib[2] === 2 * (otp1 + 4), $sformatf("compressed arithmetic %h", calib[2]));
    chk(calib[3] === acc8, $sformatf("SDOTP8 layer %h exp %h", calib[3], acc8));
    chk(calib[4] === acc4, $sformatf("SDOTP4 layer %h exp %h", calib[4], acc4));
    chk(calib[5] === e_div, $sformatf("div %h exp %h", calib[5], e_div));
    chk(calib[6] === e_rem, $sformatf("rem %h exp %h", calib[6], e_rem));
    chk(calib[7] === e_mul, $sformatf("mul %h exp %h", calib[7], e_mul));
    chk(calib[8] === 32'd15, $sformatf("trap causes ecall(11)+misaligned load(4) = %0d", calib[8]));
    chk(calib[9] === 32'd0, "misaligned load did not write its register");
    chk(frame_ready === 1'b0, "frame ready cleared by software");
    chk(instret > 1000, "instructions retired");
    $display("cycles %0d instret %0d", cycle, instret);
    $display("stall %0d redirect %0d compressed %0d sdotp8 %0d sdotp4 %0d muldiv %0d trap %0d load_prio %0d afe_steps %0d frames %0d",
             n_stall, n_redirect, n_comp, n_sd8, n_sd4, n_md, n_trap, n_load_prio, n_afe, n_frame);
    chk(n_stall > 0, "stall happened");
    chk(n_redirect > 0, "redirect happened");
    chk(n_comp == 4, "compressed instructions retired");
    chk(n_sd8 == NW && n_sd4 == NW, "SDOTP count");
    chk(n_md == 3, "mul/div count");
    chk(n_trap == 2, "traps");
    chk(n_load_prio > 0, "load port took the memory from the core");
    chk(n_afe == 2, "two AFE steps per frame");
    chk(n_frame == 1, "one frame");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2_100_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
