// tb_inst_mem_if: checks the instruction-memory interface with behavioural
// boot ROM and IRAM models that answer one cycle after a request with a word
// tagged by memory and address. Random core fetches go to the ROM, the IRAM
// or unmapped space, mixed with writes from the host load port. Checked:
// each fetch reaches the right memory only, the answer arrives one cycle
// after the grant with the right tagged word, unmapped fetches answer zero,
// a load-port write to the IRAM takes the IRAM port and withholds the grant,
// and a load-port write outside the IRAM does not disturb fetching.
module tb_inst_mem_if;
  import maupiti_pkg::*;
  logic clk = 0, rst_n = 1;
  logic req, gnt, rvalid;
  logic [31:0] addr, rdata;
  bus_req_t load, rom_req, iram_req;
  bus_rsp_t rom_rsp, iram_rsp;
  int checks = 0, failures = 0, n_load = 0;

  inst_mem_if dut (.clk_i(clk), .rst_ni(rst_n), .instr_req_i(req), .instr_gnt_o(gnt),
    .instr_addr_i(addr), .instr_rvalid_o(rvalid), .instr_rdata_o(rdata), .load_i(load),
    .rom_o(rom_req), .rom_i(rom_rsp), .iram_o(iram_req), .iram_i(iram_rsp));
  always #5 clk = ~clk;
  initial #1 rst_n = 0;

  always_ff @(posedge clk) begin
    rom_rsp  <= '{rvalid: rom_req.req,  rdata: {8'hA0, rom_req.addr[23:0]}};
    iram_rsp <= '{rvalid: iram_req.req, rdata: {8'hB1, iram_req.addr[23:0]}};
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    bit          pend;
    logic [31:0] exp_d;
    req = 0; addr = 0; load = '0; pend = 0; exp_d = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      int r;
      @(negedge clk);
      // response of the previous cycle's grant
      chk(rvalid === pend, "rvalid one cycle after grant");
      if (pend) chk(rdata === exp_d, $sformatf("rdata %h exp %h", rdata, exp_d));
      r = $urandom_range(3);
      req  = 1'($urandom_range(3) != 0);
      addr = (r == 0) ? BOOT_BASE + 4 * $urandom_range(63) :
             (r == 3) ? 32'h0005_0000 + 4 * $urandom_range(63) :
                        IRAM_BASE + 4 * $urandom_range(4095);
      load = '0;
      if ($urandom_range(4) == 0) begin
        load = '{req: 1, we: 1, be: 4'hF, addr: ($urandom_range(1) ? IRAM_BASE : DRAM_BASE) + 4 * $urandom_range(4095),
                 wdata: $urandom};
      end
      #1;
      if (load.req && load.addr[31:14] == IRAM_BASE[31:14]) begin
        n_load++;
        chk(gnt === 1'b0, "load port has priority");
        chk(iram_req === load, "load write reaches IRAM");
        chk(rom_req.req === 1'b0, "no ROM access while load port owns the bus");
      end else begin
        chk(gnt === 1'b1, "granted");
        chk(rom_req.req === (req && r == 0), "ROM request decode");
        chk(iram_req.req === (req && (r == 1 || r == 2)), "IRAM request decode");
        chk(!iram_req.we, "fetch does not write");
      end
      pend  = req && gnt;
      exp_d = (r == 0) ? {8'hA0, addr[23:0]} : (r == 3) ? 32'h0 : {8'hB1, addr[23:0]};
    end
    chk(n_load > 100, "load-port writes exercised");
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
