// tb_tracer: pulses the retire input a random number of times with tracing
// on and off and checks the retired-instruction count after every clock
// edge (it must rise by one in the cycle after each retire pulse); the
// printed lines appear in the log while tracing is on.
module tb_tracer;
  logic clk = 0, rst_n = 1, en = 0, valid = 0;
  logic [31:0] count;
  int checks = 0, failures = 0, n = 0;

  tracer dut (.clk_i(clk), .rst_ni(rst_n), .trace_en_i(en), .valid_i(valid), .pc_i(32'h0001_0000 + 4 * n),
              .instr_i(32'h0000_0013), .rd_we_i(1'b1), .rd_i(5'd3), .rd_wdata_i(n), .count_o(count));
  always #5 clk = ~clk;
  initial #1 rst_n = 0;  // reset needs an edge: async reset flops react to negedge

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      checks++;
      if (count != n) begin failures++; if (failures < 5) $display("FAIL count %0d exp %0d", count, n); end
      en = (i < 5);
      valid = 1'($urandom);
      if (valid) n++;
    end
    @(negedge clk); valid = 0;
    @(negedge clk);
    checks++;
    if (count != n) begin failures++; $display("FAIL count %0d exp %0d", count, n); end
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
