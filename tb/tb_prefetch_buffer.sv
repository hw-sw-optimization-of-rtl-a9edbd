// tb_prefetch_buffer: a behavioural instruction memory with random grant and
// random in-order response latency (1..6 cycles) holds a random halfword
// image, so 16- and 32-bit instructions mix at arbitrary alignments. A
// consumer with random ready and random redirects to random halfword
// addresses walks the image with its own model of instruction lengths and
// checks every instruction handed over: its address and its bits. It also
// checks that with a memory answering in one cycle the buffer delivers one
// aligned 32-bit instruction per cycle in steady state.
module tb_prefetch_buffer;
  logic clk = 0, rst_n = 1;
  logic branch, ready, valid, req, gnt, rvalid;
  logic [31:0] baddr, rdata, addr, maddr, mrdata;
  logic [15:0] img [256];
  int checks = 0, failures = 0, fires = 0, cycle = 0, fast = 0;
  logic [31:0] exp_pc;

  prefetch_buffer dut (.clk_i(clk), .rst_ni(rst_n), .req_i(1'b1), .branch_i(branch), .addr_i(baddr),
                       .ready_i(ready), .valid_o(valid), .rdata_o(rdata), .addr_o(addr),
                       .instr_req_o(req), .instr_gnt_i(gnt), .instr_addr_o(maddr),
                       .instr_rvalid_i(rvalid), .instr_rdata_i(mrdata));
  always #5 clk = ~clk;
  initial #1 rst_n = 0;  // reset needs an edge: async reset flops react to negedge

  function automatic logic [15:0] hw(logic [31:0] a);
    return img[a[8:1]];
  endfunction

  // in-order memory
  logic [31:0] q_data [$];
  int          q_due  [$];
  int          last_due = 0;
  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (req && gnt) begin
      int due;
      due = cycle + (fast ? 1 : 1 + $urandom % 6);
      if (due <= last_due) due = last_due + 1;
      last_due = due;
      q_data.push_back({hw(maddr + 2), hw(maddr)});
      q_due.push_back(due);
    end
    if (q_due.size() > 0 && q_due[0] <= cycle + 1) begin
      rvalid <= 1'b1; mrdata <= q_data.pop_front(); void'(q_due.pop_front());
    end else begin
      rvalid <= 1'b0;
    end
  end

  // consumer check
  always @(posedge clk) begin
    if (rst_n && valid && ready && !branch) begin
      logic [15:0] h0;
      h0 = hw(exp_pc);
      checks++;
      if (addr !== exp_pc || rdata[15:0] !== h0 || (h0[1:0] == 2'b11 && rdata[31:16] !== hw(exp_pc + 2))) begin
        failures++;
        $display("FAIL at %h: got addr %h data %h exp %h%h", exp_pc, addr, rdata, hw(exp_pc + 2), h0);
      end
      exp_pc = exp_pc + ((h0[1:0] == 2'b11) ? 4 : 2);
      fires++;
    end
    if (branch) exp_pc = baddr;
  end

  initial begin
    int streak = 0, best = 0;
    for (int i = 0; i < 256; i++) img[i] = 16'($urandom);
    branch = 0; ready = 0; gnt = 0; baddr = 0; rvalid = 0; mrdata = 0; exp_pc = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); branch = 1; baddr = 32'h0;
    for (int n = 0; n < 20000; n++) begin
      @(negedge clk);
      branch = ($urandom % 40 == 0);
      baddr = {23'b0, 8'($urandom), 1'b0};
      ready = ($urandom % 10 < 9);
      gnt = ($urandom % 10 < 7);
    end
    // steady state: only aligned 32-bit instructions, single-cycle memory
    @(negedge clk); branch = 0; ready = 0; gnt = 0;
    repeat (10) @(negedge clk);
    for (int i = 0; i < 256; i++) img[i] = (i % 2 == 0) ? {16'($urandom)} | 16'h3 : 16'($urandom);
    wait (q_due.size() == 0);
    fast = 1; gnt = 1; ready = 1;
    @(negedge clk); branch = 1; baddr = 32'h0;
    @(negedge clk); branch = 0;
    for (int n = 0; n < 100; n++) begin
      @(posedge clk);
      if (valid) begin streak++; if (streak > best) best = streak; end else streak = 0;
    end
    checks++;
    if (best < 90) begin failures++; $display("FAIL throughput: longest run %0d", best); end
    checks++;
    if (fires < 5000) begin failures++; $display("FAIL only %0d instructions", fires); end
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
