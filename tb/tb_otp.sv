// tb_otp: checks the behavioural model of the 80-byte one-time-programmable
// memory. Bytes are programmed through the programming port (more than once,
// to show that programming can only set bits), read back as words over the
// bus one cycle after the request, bus writes must change nothing, and
// addresses past the 80 bytes read as zero.
module tb_otp;
  import maupiti_pkg::*;
  localparam int BYTES = 80;
  logic clk = 0, rst_n = 1;
  logic prog_en;
  logic [6:0] prog_addr;
  logic [7:0] prog_data;
  logic [7:0] shadow [BYTES];
  bus_req_t req;
  bus_rsp_t rsp;
  int checks = 0, failures = 0;

  otp #(.BYTES(BYTES)) dut (.clk_i(clk), .rst_ni(rst_n), .prog_en_i(prog_en), .prog_addr_i(prog_addr),
    .prog_data_i(prog_data), .req_i(req), .rsp_o(rsp));
  always #5 clk = ~clk;
  initial #1 rst_n = 0;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  task automatic prog(int a, logic [7:0] d);
    @(negedge clk) begin prog_en = 1; prog_addr = 7'(a); prog_data = d; end
    if (a < BYTES) shadow[a] |= d;
    @(negedge clk) prog_en = 0;
  endtask

  task automatic read_all();
    for (int w = 0; w < 24; w++) begin
      logic [31:0] exp_w;
      @(negedge clk) req = '{req: 1, we: 0, be: 4'hF, addr: OTP_BASE + 4*w, wdata: '0};
      for (int b = 0; b < 4; b++) exp_w[8*b +: 8] = (4*w + b < BYTES) ? shadow[4*w + b] : 8'h00;
      @(negedge clk) req = '0;
      chk(rsp.rvalid === 1'b1, "rvalid");
      chk(rsp.rdata === exp_w, $sformatf("otp word %0d got %h exp %h", w, rsp.rdata, exp_w));
    end
  endtask

  initial begin
    req = '0; prog_en = 0; prog_addr = 0; prog_data = 0;
    for (int i = 0; i < BYTES; i++) shadow[i] = 8'h00;
    repeat (2) @(posedge clk); rst_n = 1;
    read_all();                                   // blank
    for (int i = 0; i < BYTES; i++) prog(i, 8'($urandom));
    read_all();
    for (int i = 0; i < 200; i++) prog($urandom_range(127), 8'($urandom));  // OR more bits, some out of range
    read_all();
    for (int w = 0; w < 20; w++) begin            // bus writes are ignored
      @(negedge clk) req = '{req: 1, we: 1, be: 4'hF, addr: OTP_BASE + 4*w, wdata: 32'h0};
    end
    @(negedge clk) req = '0;
    read_all();
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
