// tb_sdotp_unit: checks the SIMD sum-of-dot-products unit against a lane-by-
// lane reference model, for directed corner cases (most negative lanes,
// accumulator wrap-around) and random operands in both modes. The unit is
// combinational: results are checked in the cycle the operands are applied.
module tb_sdotp_unit;
  logic [31:0] a, b, c, r;
  logic        m4;
  int checks = 0, failures = 0;

  sdotp_unit dut (.op_a_i(a), .op_b_i(b), .op_c_i(c), .mode4_i(m4), .result_o(r));

  function automatic logic [31:0] ref_model(logic [31:0] a, logic [31:0] b, logic [31:0] c, logic m4);
    longint s = longint'($signed(c));
    if (m4) for (int i = 0; i < 8; i++) s += longint'($signed(a[4*i +: 4])) * longint'($signed(b[4*i +: 4]));
    else    for (int i = 0; i < 4; i++) s += longint'($signed(a[8*i +: 8])) * longint'($signed(b[8*i +: 8]));
    return s[31:0];
  endfunction

  task automatic check(logic [31:0] ta, logic [31:0] tb_, logic [31:0] tc, logic tm);
    a = ta; b = tb_; c = tc; m4 = tm;
    #1;
    checks++;
    if (r !== ref_model(ta, tb_, tc, tm)) begin
      failures++;
      $display("FAIL a=%h b=%h c=%h m4=%0d got %h exp %h", ta, tb_, tc, tm, r, ref_model(ta, tb_, tc, tm));
    end
  endtask

  initial begin
    // directed: (-128)*(-128)*4 = 65536; (-8)*(-8)*8 = 512
    check(32'h8080_8080, 32'h8080_8080, 32'd0, 1'b0);
    if (r != 32'd65536) failures++;
    checks++;
    check(32'h8888_8888, 32'h8888_8888, 32'd0, 1'b1);
    if (r != 32'd512) failures++;
    checks++;
    // 1*2 + 3*(-4) + ... accumulate into -10
    check(32'h7F01_FF02, 32'h7F81_0203, -32'sd10, 1'b0);
    check(32'h1234_5678, 32'h9ABC_DEF0, 32'hFFFF_FFFF, 1'b1);
    check(32'hFFFF_FFFF, 32'h0101_0101, 32'h7FFF_FFFF, 1'b0);  // wrap
    for (int i = 0; i < 2000; i++) check($urandom, $urandom, $urandom, 1'($urandom));
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
