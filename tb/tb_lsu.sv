// tb_lsu: runs random byte/halfword/word loads and stores through the LSU
// into a behavioural memory that grants after a random delay and answers
// after another, and compares every memory word and every load result
// (sign/zero extension) with a byte-array model. Misaligned accesses must
// raise misaligned_o and never reach the bus. With a memory that grants at
// once and answers next cycle, an access must take exactly two cycles.
module tb_lsu;
  logic clk = 0, rst_n = 1;
  logic req, we, sign, done, mis;
  logic [1:0]  size;
  logic [31:0] addr, wdata, rdata;
  logic        d_req, d_gnt, d_we, d_rvalid;
  logic [3:0]  d_be;
  logic [31:0] d_addr, d_wdata, d_rdata;
  logic [7:0]  model [64];
  logic [31:0] mem [16];
  int checks = 0, failures = 0, fast = 0;

  lsu dut (.clk_i(clk), .rst_ni(rst_n), .req_i(req), .we_i(we), .size_i(size), .sign_i(sign),
           .addr_i(addr), .wdata_i(wdata), .done_o(done), .rdata_o(rdata), .misaligned_o(mis),
           .data_req_o(d_req), .data_gnt_i(d_gnt), .data_we_o(d_we), .data_be_o(d_be),
           .data_addr_o(d_addr), .data_wdata_o(d_wdata), .data_rvalid_i(d_rvalid), .data_rdata_i(d_rdata));
  always #5 clk = ~clk;
  initial #1 rst_n = 0;  // reset needs an edge: async reset flops react to negedge

  // memory: random grant, response 1..3 cycles after grant
  int pend_delay = -1;
  always @(posedge clk) begin
    d_rvalid <= 1'b0;
    if (pend_delay == 0) begin d_rvalid <= 1'b1; pend_delay <= -1; end
    else if (pend_delay > 0) pend_delay <= pend_delay - 1;
    if (d_req && d_gnt) begin
      d_rdata <= mem[d_addr[5:2]];
      if (d_we) for (int b = 0; b < 4; b++) if (d_be[b]) mem[d_addr[5:2]][8*b +: 8] <= d_wdata[8*b +: 8];
      if (fast) begin d_rvalid <= 1'b1; pend_delay <= -1; end
      else pend_delay <= $urandom % 3;
    end
  end
  always @(negedge clk) d_gnt <= fast ? 1'b1 : 1'($urandom);

  initial begin
    d_rvalid = 0; d_gnt = 0; d_rdata = 0;
    req = 0; we = 0; sign = 0; size = 0; addr = 0; wdata = 0;
    for (int i = 0; i < 16; i++) mem[i] = '0;
    for (int i = 0; i < 64; i++) model[i] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 1500; n++) begin
      logic [31:0] exp; int cyc; logic misal;
      if (n == 1200) fast = 1;
      @(negedge clk);
      size = 2'($urandom % 3); we = 1'($urandom); sign = 1'($urandom);
      addr = {26'b0, 6'($urandom)}; wdata = $urandom;
      misal = (size == 1 && addr[0]) || (size == 2 && addr[1:0] != 0);
      req = 1;
      #1;
      if (misal) begin
        checks++;
        if (!mis || d_req) begin failures++; $display("FAIL misaligned not caught %h", addr); end
        @(negedge clk); req = 0; continue;
      end
      cyc = 1;
      while (!done) begin @(negedge clk); #1; cyc++; if (cyc > 50) break; end
      if (!we) begin
        exp = 0;
        for (int b = 0; b < (1 << size); b++) exp[8*b +: 8] = model[addr + b];
        if (sign && size == 0) exp = {{24{exp[7]}}, exp[7:0]};
        if (sign && size == 1) exp = {{16{exp[15]}}, exp[15:0]};
        checks++;
        if (rdata !== exp) begin failures++; $display("FAIL load %h size %0d got %h exp %h", addr, size, rdata, exp); end
      end else begin
        for (int b = 0; b < (1 << size); b++) model[addr + b] = wdata[8*b +: 8];
      end
      if (fast) begin
        checks++;
        if (cyc != 2) begin failures++; $display("FAIL latency %0d", cyc); end
      end
      @(negedge clk); req = 0;
    end
    for (int i = 0; i < 64; i++) begin
      checks++;
      if (mem[i/4][8*(i%4) +: 8] !== model[i]) begin failures++; $display("FAIL mem byte %0d", i); end
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
