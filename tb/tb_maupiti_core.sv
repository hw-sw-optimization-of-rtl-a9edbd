// tb_maupiti_core: runs a small program on the core with behavioural
// instruction and data memories (one-cycle answers; the data side grants at
// random) and checks the values the program stores against results computed
// here from the same constants. The program covers a counted loop (taken and
// not-taken branches), word and byte stores and loads, both SDOTP forms, MUL,
// DIV and REM, compressed instructions with a 32-bit instruction at a
// halfword address, an ecall trap whose handler reads mcause/mepc and returns
// with mret, and a jal that skips an instruction. It also checks the
// single-cycle SDOTP: eight back-to-back SDOTP instructions must retire in
// eight consecutive cycles.
module tb_maupiti_core;
  import rv_asm_pkg::*;
  localparam logic [31:0] DBASE   = 32'h0002_0000;
  localparam logic [31:0] HANDLER = 32'h0000_0600;
  logic clk = 0, rst_n = 1;
  logic ireq, igrant, irvalid, dreq, dgnt, dwe, drvalid;
  logic [3:0]  dbe;
  logic [31:0] iaddr, irdata, daddr, dwdata, drdata, instret;
  logic [15:0] imem [2048];
  logic [7:0]  dmem [16384];
  int checks = 0, failures = 0, pa = 0, cycle = 0;
  bit done = 0;

  maupiti_core dut (
    .clk_i(clk), .rst_ni(rst_n), .boot_addr_i(32'h0), .trace_en_i(1'b0),
    .instr_req_o(ireq), .instr_gnt_i(igrant), .instr_addr_o(iaddr), .instr_rvalid_i(irvalid),
    .instr_rdata_i(irdata), .data_req_o(dreq), .data_gnt_i(dgnt), .data_we_o(dwe), .data_be_o(dbe),
    .data_addr_o(daddr), .data_wdata_o(dwdata), .data_rvalid_i(drvalid), .data_rdata_i(drdata),
    .instret_o(instret));
  always #5 clk = ~clk;
  initial #1 rst_n = 0;  // reset needs an edge: async reset flops react to negedge

  // ---------------------------------------------------------------- memories
  assign igrant = 1'b1;
  always @(posedge clk) begin
    cycle <= cycle + 1;
    irvalid <= ireq && igrant;
    irdata  <= {imem[iaddr[11:1] + 1], imem[iaddr[11:1]]};
    drvalid <= dreq && dgnt;
    if (dreq && dgnt) begin
      logic [13:0] w;
      w = {daddr[13:2], 2'b00};
      drdata <= {dmem[w + 3], dmem[w + 2], dmem[w + 1], dmem[w]};
      if (dwe) for (int b = 0; b < 4; b++) if (dbe[b]) dmem[w + b] <= dwdata[8*b +: 8];
      if (dwe && daddr == DBASE + 32'h3FFC) done = 1;
    end
  end
  always @(negedge clk) dgnt <= 1'($urandom);

  // ---------------------------------------------------------------- program
  task automatic e32(logic [31:0] w); imem[pa/2] = w[15:0]; imem[pa/2 + 1] = w[31:16]; pa += 4; endtask
  task automatic e16(logic [15:0] h); imem[pa/2] = h; pa += 2; endtask
  task automatic li(int rd, logic [31:0] v);
    logic [31:0] hi = v + 32'h800;
    e32(lui(rd, {hi[31:12], 12'b0}));
    e32(addi(rd, rd, int'($signed(v[11:0]))));
  endtask

  function automatic logic [31:0] dot8(logic [31:0] a, logic [31:0] b);
    int s = 0;
    for (int i = 0; i < 4; i++) s += int'($signed(a[8*i +: 8])) * int'($signed(b[8*i +: 8]));
    return s;
  endfunction
  function automatic logic [31:0] dot4(logic [31:0] a, logic [31:0] b);
    int s = 0;
    for (int i = 0; i < 8; i++) s += int'($signed(a[4*i +: 4])) * int'($signed(b[4*i +: 4]));
    return s;
  endfunction
  function automatic logic [31:0] rdw(logic [31:0] a);
    return {dmem[a[13:0] + 3], dmem[a[13:0] + 2], dmem[a[13:0] + 1], dmem[a[13:0]]};
  endfunction

  // SDOTP timing
  int sd_cycles [$];
  always @(posedge clk) if (dut.retire && dut.instr[6:0] == 7'b0001011) sd_cycles.push_back(cycle);

  int loop_pc, ecall_pc, jal_pc;
  logic [31:0] A = 32'h7F80_FF01, B = 32'h02FF_8081;
  logic [31:0] x3, x4, x7, x8, x9, x10, x11, x12, x13;

  task automatic expect_word(int off, logic [31:0] v, string what);
    checks++;
    if (rdw(DBASE + off) !== v) begin
      failures++; $display("FAIL %s: got %h exp %h", what, rdw(DBASE + off), v);
    end
  endtask

  initial begin
    for (int i = 0; i < 2048; i++) imem[i] = 16'h0001;  // c.nop
    for (int i = 0; i < 16384; i++) dmem[i] = 8'h00;
    irvalid = 0; drvalid = 0; irdata = 0; drdata = 0; dgnt = 0;
    // ----- assemble
    e32(lui(1, DBASE));
    e32(addi(2, 0, 10));
    e32(addi(3, 0, 0));
    loop_pc = pa;
    e32(add(3, 3, 2));
    e32(addi(2, 2, -1));
    e32(bne(2, 0, loop_pc - pa));
    e32(sw(3, 1, 0));
    e32(lw(4, 1, 0));
    li(5, A);
    li(6, B);
    e32(addi(7, 0, 100));
    e32(addi(8, 0, -3));
    e32(sdotp8(7, 5, 6)); e32(sdotp4(8, 5, 6)); e32(sdotp8(7, 6, 6)); e32(sdotp4(8, 6, 5));
    e32(sdotp8(7, 5, 5)); e32(sdotp4(8, 5, 5)); e32(sdotp8(7, 6, 5)); e32(sdotp4(8, 6, 6));
    e32(mul(9, 4, 7));
    e32(div(10, 9, 8));
    e32(rem(11, 9, 8));
    e16(c_li(12, 5));
    e32(addi(13, 12, 1000));      // at a halfword address
    e16(c_add(12, 4));
    li(14, HANDLER);
    e32(csrrw(0, 12'h305, 14));
    ecall_pc = pa;
    e32(ECALL);
    e32(addi(19, 0, 1));
    e32(sb(7, 1, 64));
    e32(lb(17, 1, 64));
    jal_pc = pa;
    e32(jal(18, 8));
    e32(addi(19, 0, 99));          // skipped
    e32(sw(3, 1, 4));  e32(sw(4, 1, 8));  e32(sw(7, 1, 12)); e32(sw(8, 1, 16));
    e32(sw(9, 1, 20)); e32(sw(10, 1, 24)); e32(sw(11, 1, 28)); e32(sw(12, 1, 32));
    e32(sw(13, 1, 36)); e32(sw(15, 1, 40)); e32(sw(16, 1, 44)); e32(sw(17, 1, 48));
    e32(sw(19, 1, 52)); e32(sw(18, 1, 56));
    e32(lui(20, DBASE + 32'h4000));
    e32(sw(0, 20, -4));            // end marker
    e32(jal(0, 0));
    pa = HANDLER;
    e32(csrrs(15, 12'h342, 0));
    e32(csrrs(16, 12'h341, 0));
    e32(addi(21, 16, 4));
    e32(csrrw(0, 12'h341, 21));
    e32(MRET);
    // ----- reference results
    x3 = 55; x4 = 55;
    x7 = 100 + dot8(A, B) + dot8(B, B) + dot8(A, A) + dot8(B, A);
    x8 = -3 + dot4(A, B) + dot4(B, A) + dot4(A, A) + dot4(B, B);
    x9 = x4 * x7;
    x10 = $signed(x9) / $signed(x8);
    x11 = $signed(x9) % $signed(x8);
    x12 = 60; x13 = 1005;
    // ----- run
    repeat (3) @(posedge clk); rst_n = 1;
    while (!done && cycle < 5000) @(posedge clk);
    repeat (2) @(posedge clk);
    checks++;
    if (!done) begin failures++; $display("FAIL program did not finish"); end
    expect_word(0, x3, "loop sum stored");
    expect_word(4, x3, "x3");
    expect_word(8, x4, "lw");
    expect_word(12, x7, "sdotp8 chain");
    expect_word(16, x8, "sdotp4 chain");
    expect_word(20, x9, "mul");
    expect_word(24, x10, "div");
    expect_word(28, x11, "rem");
    expect_word(32, x12, "c.li/c.add");
    expect_word(36, x13, "misaligned 32-bit addi");
    expect_word(40, 32'd11, "mcause ecall");
    expect_word(44, ecall_pc, "mepc");
    expect_word(48, {{24{x7[7]}}, x7[7:0]}, "sb/lb sign extension");
    expect_word(52, 32'd1, "jal skipped instruction");
    expect_word(56, jal_pc + 4, "jal link");
    checks++;
    if (sd_cycles.size() != 8 || sd_cycles[7] - sd_cycles[0] != 7) begin
      failures++; $display("FAIL SDOTP not one per cycle: %p", sd_cycles);
    end
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
