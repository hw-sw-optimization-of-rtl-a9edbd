// tb_calib_regs: checks the calibration register file. Random byte-enabled
// bus writes and reads over the 16 registers are compared with a shadow
// copy; the parallel output calib_o must always equal the shadow, reads
// answer one cycle after the request, and addresses beyond the last register
// read as zero and change nothing.
module tb_calib_regs;
  import maupiti_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 1;
  bus_req_t req;
  bus_rsp_t rsp;
  logic [N-1:0][31:0] regs, shadow;
  int checks = 0, failures = 0;

  calib_regs #(.NREGS(N)) dut (.clk_i(clk), .rst_ni(rst_n), .req_i(req), .rsp_o(rsp), .regs_o(regs));
  always #5 clk = ~clk;
  initial #1 rst_n = 0;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    req = '0; shadow = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk) chk(regs === '0, "reset value");
    for (int n = 0; n < 3000; n++) begin
      int i;
      logic [31:0] exp_d;
      i = $urandom_range(N + 7);                  // some addresses past the end
      @(negedge clk);
      if ($urandom_range(1)) begin
        req = '{req: 1, we: 1, be: 4'($urandom), addr: REGS_BASE + 4*i, wdata: $urandom};
        if (i < N) for (int b = 0; b < 4; b++) if (req.be[b]) shadow[i][8*b +: 8] = req.wdata[8*b +: 8];
        @(negedge clk) req = '0;
      end else begin
        req = '{req: 1, we: 0, be: 4'hF, addr: REGS_BASE + 4*i, wdata: '0};
        exp_d = (i < N) ? shadow[i] : 32'h0;
        @(negedge clk) req = '0;
        chk(rsp.rvalid === 1'b1, "rvalid");
        chk(rsp.rdata === exp_d, $sformatf("reg %0d got %h exp %h", i, rsp.rdata, exp_d));
      end
      chk(regs === shadow, "calib_o matches");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
