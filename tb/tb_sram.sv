// tb_sram: checks the single-port SRAM used for the 16 KB instruction and
// data memories. Random word reads and byte-enabled writes are compared with
// a shadow copy kept in the testbench; every read must come back exactly one
// cycle after its request (rvalid one cycle later, data matching the shadow).
module tb_sram;
  import maupiti_pkg::*;
  localparam int BYTES = 16384;
  logic clk = 0, rst_n = 1;
  bus_req_t req;
  bus_rsp_t rsp;
  logic [31:0] shadow [BYTES/4];
  bit          known  [BYTES/4];
  int checks = 0, failures = 0;

  sram #(.BYTES(BYTES)) dut (.clk_i(clk), .rst_ni(rst_n), .req_i(req), .rsp_o(rsp));
  always #5 clk = ~clk;
  initial #1 rst_n = 0;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    req = '0;
    for (int i = 0; i < BYTES/4; i++) known[i] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    // write every word once so all later reads are defined
    for (int i = 0; i < BYTES/4; i++) begin
      @(negedge clk);
      req = '{req: 1, we: 1, be: 4'hF, addr: IRAM_BASE + 4*i, wdata: $urandom};
      shadow[i] = req.wdata; known[i] = 1;
    end
    @(negedge clk) req = '0;
    for (int n = 0; n < 4000; n++) begin
      int i;
      logic [31:0] exp_d;
      i = $urandom_range(BYTES/4 - 1);
      @(negedge clk);
      if ($urandom_range(1)) begin
        req = '{req: 1, we: 1, be: 4'($urandom), addr: DRAM_BASE + 4*i, wdata: $urandom};
        for (int b = 0; b < 4; b++) if (req.be[b]) shadow[i][8*b +: 8] = req.wdata[8*b +: 8];
        @(negedge clk) req = '0;
        chk(rsp.rvalid === 1'b1, "rvalid after write");
      end else begin
        req = '{req: 1, we: 0, be: 4'hF, addr: DRAM_BASE + 4*i, wdata: '0};
        exp_d = shadow[i];
        @(negedge clk) req = '0;
        chk(rsp.rvalid === 1'b1, "rvalid one cycle after read");
        chk(rsp.rdata === exp_d, $sformatf("read word %0d got %h exp %h", i, rsp.rdata, exp_d));
        @(negedge clk);
        chk(rsp.rvalid === 1'b0, "rvalid lasts one cycle");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
