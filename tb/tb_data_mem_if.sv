// tb_data_mem_if: checks the data-memory interface with four behavioural
// slaves (DRAM, registers, OTP, frame buffer) that answer one cycle after a
// request with a word tagged by slave and address. Random core reads and
// writes go to all regions and to unmapped space, mixed with host load-port
// writes. Checked: only the addressed slave sees the request, write data,
// byte enables and address pass through, the answer comes back one cycle
// after the grant from the right slave, unmapped reads answer zero, and a
// load-port write to the DRAM takes the DRAM port and withholds the grant.
module tb_data_mem_if;
  import maupiti_pkg::*;
  logic clk = 0, rst_n = 1;
  logic req, gnt, we, rvalid;
  logic [3:0] be;
  logic [31:0] addr, wdata, rdata;
  bus_req_t load;
  bus_req_t s_req [4];
  bus_rsp_t s_rsp [4];
  int checks = 0, failures = 0, n_load = 0;
  localparam logic [31:0] BASES [4] = '{DRAM_BASE, REGS_BASE, OTP_BASE, FRAME_BASE};

  data_mem_if dut (.clk_i(clk), .rst_ni(rst_n), .data_req_i(req), .data_gnt_o(gnt), .data_we_i(we),
    .data_be_i(be), .data_addr_i(addr), .data_wdata_i(wdata), .data_rvalid_o(rvalid),
    .data_rdata_o(rdata), .load_i(load),
    .dram_o(s_req[0]), .dram_i(s_rsp[0]), .regs_o(s_req[1]), .regs_i(s_rsp[1]),
    .otp_o(s_req[2]), .otp_i(s_rsp[2]), .frame_o(s_req[3]), .frame_i(s_rsp[3]));
  always #5 clk = ~clk;
  initial #1 rst_n = 0;

  for (genvar s = 0; s < 4; s++) begin : g_slave
    always_ff @(posedge clk) s_rsp[s] <= '{rvalid: s_req[s].req, rdata: {4'(s), 4'hC, s_req[s].addr[23:0]}};
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    bit          pend;
    logic [31:0] exp_d;
    req = 0; we = 0; be = 0; addr = 0; wdata = 0; load = '0; pend = 0; exp_d = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 6000; n++) begin
      int r;
      @(negedge clk);
      chk(rvalid === pend, "rvalid one cycle after grant");
      if (pend) chk(rdata === exp_d, $sformatf("rdata %h exp %h", rdata, exp_d));
      r = $urandom_range(4);
      req = 1'($urandom_range(3) != 0); we = 1'($urandom); be = 4'($urandom); wdata = $urandom;
      addr = (r == 4) ? 32'h0004_0000 + 4 * $urandom_range(255) : BASES[r] + 4 * $urandom_range(255);
      load = '0;
      if ($urandom_range(4) == 0)
        load = '{req: 1, we: 1, be: 4'hF, addr: ($urandom_range(1) ? DRAM_BASE : IRAM_BASE) + 4 * $urandom_range(4095),
                 wdata: $urandom};
      #1;
      if (load.req && load.addr[31:14] == DRAM_BASE[31:14]) begin
        n_load++;
        chk(gnt === 1'b0, "load port has priority");
        chk(s_req[0] === load, "load write reaches DRAM");
        for (int s = 1; s < 4; s++) chk(s_req[s].req === 1'b0, "other slaves idle during load");
      end else begin
        chk(gnt === 1'b1, "granted");
        for (int s = 0; s < 4; s++) begin
          chk(s_req[s].req === (req && r == s), $sformatf("slave %0d request decode", s));
          if (req && r == s)
            chk(s_req[s].we === we && s_req[s].be === be && s_req[s].addr === addr && s_req[s].wdata === wdata,
                "request fields pass through");
        end
      end
      pend  = req && gnt;
      exp_d = (r == 4) ? 32'h0 : {4'(r), 4'hC, addr[23:0]};
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
