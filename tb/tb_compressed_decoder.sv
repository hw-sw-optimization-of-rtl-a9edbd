// tb_compressed_decoder: feeds hand-encoded RV32C instructions, covering every
// quadrant and format, and compares the expansion with the 32-bit encoding of
// the equivalent base instruction (both worked out from the ISA manual).
// Also checks the pass-through of 32-bit instructions and illegal encodings.
module tb_compressed_decoder;
  logic [31:0] in, out;
  logic comp, ill;
  int checks = 0, failures = 0;

  compressed_decoder dut (.instr_i(in), .instr_o(out), .is_compressed_o(comp), .illegal_o(ill));

  task automatic expand(logic [15:0] c, logic [31:0] exp, string what);
    in = {16'hDEAD, c}; #1;
    checks++;
    if (out !== exp || !comp || ill) begin
      failures++;
      $display("FAIL %s: %h -> %h exp %h (comp=%b ill=%b)", what, c, out, exp, comp, ill);
    end
  endtask

  task automatic illegal(logic [15:0] c);
    in = {16'h0, c}; #1;
    checks++;
    if (!ill) begin failures++; $display("FAIL %h not flagged illegal", c); end
  endtask

  initial begin
    expand(16'h0001, 32'h0000_0013, "c.nop");
    expand(16'h4515, 32'h0050_0513, "c.li a0,5");
    expand(16'h852E, 32'h00B0_0533, "c.mv a0,a1");
    expand(16'h952E, 32'h00B5_0533, "c.add a0,a1");
    expand(16'h8082, 32'h0000_8067, "c.jr ra");
    expand(16'h9002, 32'h0010_0073, "c.ebreak");
    expand(16'h41C8, 32'h0045_A503, "c.lw a0,4(a1)");
    expand(16'hC588, 32'h00A5_A423, "c.sw a0,8(a1)");
    expand(16'hA001, 32'h0000_006F, "c.j 0");
    expand(16'h6141, 32'h0101_0113, "c.addi16sp 16");
    expand(16'hC101, 32'h0005_0063, "c.beqz a0,0");
    expand(16'h050E, 32'h0035_1513, "c.slli a0,3");
    expand(16'h8C05, 32'h4094_0433, "c.sub s0,s1");
    expand(16'h4532, 32'h00C1_2503, "c.lwsp a0,12(sp)");
    expand(16'hC62A, 32'h00A1_2623, "c.swsp a0,12(sp)");
    illegal(16'h0000);
    illegal(16'h6000);  // c.flw: no F extension
    // 32-bit instructions pass unchanged
    for (int i = 0; i < 200; i++) begin
      logic [31:0] w = {$urandom} | 32'h3;
      in = w; #1;
      checks++;
      if (out !== w || comp) begin failures++; $display("FAIL passthrough %h", w); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
