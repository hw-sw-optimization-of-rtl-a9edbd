// tb_alu: drives every ALU operation with random and corner-case operands and
// compares result and branch comparison with a reference written from the
// RV32I definitions; the two SDOTP operations are checked against an
// independent lane-by-lane sum that uses OpC as accumulator.
module tb_alu;
  import maupiti_pkg::*;
  alu_op_e     op;
  logic [31:0] a, b, c, r;
  logic        cmp;
  int checks = 0, failures = 0;

  alu dut (.op_i(op), .op_a_i(a), .op_b_i(b), .op_c_i(c), .result_o(r), .cmp_o(cmp));

  function automatic logic [32:0] model(alu_op_e op, logic [31:0] a, logic [31:0] b, logic [31:0] c);
    logic [31:0] res; logic cm; longint s;
    cm = 1'b0; res = '0;
    case (op)
      ALU_ADD:  res = a + b;
      ALU_SUB:  res = a - b;
      ALU_XOR:  res = a ^ b;
      ALU_OR:   res = a | b;
      ALU_AND:  res = a & b;
      ALU_SLL:  res = a << b[4:0];
      ALU_SRL:  res = a >> b[4:0];
      ALU_SRA:  res = $signed(a) >>> b[4:0];
      ALU_SLT:  begin cm = $signed(a) < $signed(b); res = {31'b0, cm}; end
      ALU_SLTU: begin cm = a < b; res = {31'b0, cm}; end
      ALU_EQ:   begin cm = a == b; res = {31'b0, cm}; end
      ALU_NE:   begin cm = a != b; res = {31'b0, cm}; end
      ALU_LT:   begin cm = $signed(a) < $signed(b); res = {31'b0, cm}; end
      ALU_GE:   begin cm = $signed(a) >= $signed(b); res = {31'b0, cm}; end
      ALU_LTU:  begin cm = a < b; res = {31'b0, cm}; end
      ALU_GEU:  begin cm = a >= b; res = {31'b0, cm}; end
      ALU_SDOTP8: begin
        s = longint'($signed(c));
        for (int i = 0; i < 4; i++) s += longint'($signed(a[8*i +: 8])) * longint'($signed(b[8*i +: 8]));
        res = s[31:0];
      end
      ALU_SDOTP4: begin
        s = longint'($signed(c));
        for (int i = 0; i < 8; i++) s += longint'($signed(a[4*i +: 4])) * longint'($signed(b[4*i +: 4]));
        res = s[31:0];
      end
      default: ;
    endcase
    return {cm, res};
  endfunction

  task automatic check(alu_op_e top, logic [31:0] ta, logic [31:0] tb_, logic [31:0] tc);
    logic [32:0] e;
    op = top; a = ta; b = tb_; c = tc; #1;
    e = model(top, ta, tb_, tc);
    checks++;
    if (r !== e[31:0] || (top inside {[ALU_SLT:ALU_GEU]} && cmp !== e[32])) begin
      failures++;
      $display("FAIL op=%s a=%h b=%h c=%h got %h/%b exp %h/%b", top.name(), ta, tb_, tc, r, cmp, e[31:0], e[32]);
    end
  endtask

  initial begin
    logic [31:0] corner [6] = '{32'h0, 32'h1, 32'h7FFF_FFFF, 32'h8000_0000, 32'hFFFF_FFFF, 32'h0000_001F};
    for (int o = 0; o <= int'(ALU_SDOTP4); o++) begin
      for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++)
        check(alu_op_e'(o), corner[i], corner[j], 32'd100);
      for (int k = 0; k < 300; k++) check(alu_op_e'(o), $urandom, $urandom, $urandom);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
