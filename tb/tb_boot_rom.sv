// tb_boot_rom: reads every word of the boot ROM over its bus port and checks
// the two-instruction boot program (lui t0, IRAM base; jalr x0, 0(t0)) and
// the nop filling, plus the one-cycle response timing.
module tb_boot_rom;
  import maupiti_pkg::*;
  logic clk = 0, rst_n = 1;
  bus_req_t req;
  bus_rsp_t rsp;
  int checks = 0, failures = 0;

  boot_rom dut (.clk_i(clk), .rst_ni(rst_n), .req_i(req), .rsp_o(rsp));
  always #5 clk = ~clk;
  initial #1 rst_n = 0;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    logic [31:0] exp_w;
    req = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 64; i++) begin
      @(negedge clk) req = '{req: 1, we: 0, be: 4'hF, addr: BOOT_BASE + 4*i, wdata: '0};
      // independent encodings: lui x5, 0x10 and jalr x0, 0(x5)
      exp_w = (i == 0) ? 32'h0001_02B7 : (i == 1) ? 32'h0002_8067 : 32'h0000_0013;
      @(negedge clk) req = '0;
      chk(rsp.rvalid === 1'b1, "rvalid");
      chk(rsp.rdata === exp_w, $sformatf("word %0d got %h exp %h", i, rsp.rdata, exp_w));
    end
    @(negedge clk);
    chk(rsp.rvalid === 1'b0, "no request no rvalid");
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
