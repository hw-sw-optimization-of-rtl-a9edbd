// tb_csr: writes, sets and clears machine CSRs and reads them back, checks
// that unknown addresses and writes to read-only counters are flagged
// illegal, that mcycle advances every cycle and minstret on retire pulses,
// and that a trap saves pc/cause/tval and moves MIE to MPIE while mret
// restores it.
module tb_csr;
  import maupiti_pkg::*;
  logic clk = 0, rst_n = 1;
  logic [11:0] addr;
  csr_op_e op;
  logic [31:0] wdata, rdata, mtvec, mepc, tpc, tcause, ttval;
  logic we, ill, trap, mret, instret;
  int checks = 0, failures = 0;

  csr dut (.clk_i(clk), .rst_ni(rst_n), .csr_addr_i(addr), .csr_op_i(op), .csr_wdata_i(wdata),
           .csr_we_i(we), .csr_rdata_o(rdata), .csr_illegal_o(ill), .trap_i(trap), .trap_pc_i(tpc),
           .trap_cause_i(tcause), .trap_tval_i(ttval), .mret_i(mret), .instret_i(instret),
           .mtvec_o(mtvec), .mepc_o(mepc));
  always #5 clk = ~clk;
  initial #1 rst_n = 0;  // reset needs an edge: async reset flops react to negedge

  task automatic chk(string what, logic cond);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic access(logic [11:0] a, csr_op_e o, logic [31:0] d);
    @(negedge clk); addr = a; op = o; wdata = d; we = 1;
    @(negedge clk); we = 0; op = CSR_NONE;
  endtask

  logic [31:0] rv, r0, r1, c0, c1;
  task automatic rd(logic [11:0] a);
    addr = a; op = CSR_NONE;
    #1;
    rv = rdata;
  endtask

  initial begin
    
    addr = 0; op = CSR_NONE; wdata = 0; we = 0; trap = 0; mret = 0; instret = 0;
    tpc = 0; tcause = 0; ttval = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk);
    rd(CSR_MTVEC); r0 = rv; chk("mtvec reset", r0 == 32'h0001_0000);
    rd(CSR_MISA); r0 = rv; chk("misa", r0 == 32'h4080_1104);
    access(CSR_MSCRATCH, CSR_WRITE, 32'hCAFE_F00D);
    rd(CSR_MSCRATCH); r0 = rv; chk("mscratch write", r0 == 32'hCAFE_F00D);
    access(CSR_MSCRATCH, CSR_CLEAR, 32'h0000_F00D);
    rd(CSR_MSCRATCH); r0 = rv; chk("mscratch clear", r0 == 32'hCAFE_0000);
    access(CSR_MSCRATCH, CSR_SET, 32'h0000_0011);
    rd(CSR_MSCRATCH); r0 = rv; chk("mscratch set", r0 == 32'hCAFE_0011);
    access(CSR_MTVEC, CSR_WRITE, 32'h0001_0103);
    rd(CSR_MTVEC); r0 = rv; chk("mtvec aligned", r0 == 32'h0001_0100 && mtvec == 32'h0001_0100);
    access(CSR_MSTATUS, CSR_SET, 32'h8);
    rd(CSR_MSTATUS); r0 = rv; chk("mstatus.MIE", r0 == 32'h0000_1808);
    // illegal
    addr = 12'h7C0; op = CSR_NONE; #1; chk("unknown illegal", ill);
    addr = CSR_CYCLE; op = CSR_WRITE; #1; chk("write ro illegal", ill);
    addr = CSR_CYCLE; op = CSR_NONE; #1; chk("read ro ok", !ill);
    // counters
    @(negedge clk); rd(CSR_MCYCLE); c0 = rv;
    repeat (10) @(negedge clk);
    rd(CSR_MCYCLE); r0 = rv; c1 = r0;
    chk("mcycle +10", c1 - c0 == 10);
    rd(CSR_MINSTRET); r0 = rv; c0 = r0;
    instret = 1; repeat (5) @(negedge clk); instret = 0;
    rd(CSR_MINSTRET); r0 = rv; chk("minstret +5", r0 - c0 == 5);
    // trap and mret
    @(negedge clk); trap = 1; tpc = 32'h0001_0040; tcause = 32'd11; ttval = 32'h1234;
    @(negedge clk); trap = 0;
    rd(CSR_MEPC); r0 = rv; chk("mepc", mepc == 32'h0001_0040 && r0 == 32'h0001_0040);
    rd(CSR_MCAUSE); r0 = rv; chk("mcause", r0 == 32'd11);
    rd(CSR_MTVAL); r0 = rv; chk("mtval", r0 == 32'h1234);
    rd(CSR_MSTATUS); r0 = rv; chk("trap MIE->MPIE", r0 == 32'h0000_1880);
    mret = 1; @(negedge clk); mret = 0;
    rd(CSR_MSTATUS); r0 = rv; chk("mret restores MIE", r0 == 32'h0000_1888);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
