// tb_multdiv: all eight RV32M operations on random and corner operands
// (zero divisor, -2^31 / -1, extreme values) against 64-bit reference
// arithmetic; also checks the latency: multiplications complete in the
// issue cycle, divisions 33 cycles after it (34 cycles in all).
module tb_multdiv;
  import maupiti_pkg::*;
  logic clk = 0, rst_n = 1, en = 0, done;
  md_op_e op;
  logic [31:0] a, b, r;
  int checks = 0, failures = 0;

  multdiv dut (.clk_i(clk), .rst_ni(rst_n), .en_i(en), .op_i(op), .op_a_i(a), .op_b_i(b),
               .done_o(done), .result_o(r));
  always #5 clk = ~clk;
  initial #1 rst_n = 0;  // reset needs an edge: async reset flops react to negedge

  function automatic logic [31:0] model(md_op_e op, logic [31:0] a, logic [31:0] b);
    longint sa = longint'($signed(a)), sb = longint'($signed(b));
    longint ua = longint'({32'b0, a}), ub = longint'({32'b0, b});
    longint p;
    case (op)
      MD_MUL:    begin p = sa * sb; return p[31:0]; end
      MD_MULH:   begin p = sa * sb; return p[63:32]; end
      MD_MULHSU: begin p = sa * ub; return p[63:32]; end
      MD_MULHU:  begin p = ua * ub; return p[63:32]; end
      MD_DIV:    if (b == 0) return 32'hFFFF_FFFF; else if (a == 32'h8000_0000 && b == 32'hFFFF_FFFF) return a; else begin p = sa / sb; return p[31:0]; end
      MD_DIVU:   if (b == 0) return 32'hFFFF_FFFF; else begin p = ua / ub; return p[31:0]; end
      MD_REM:    if (b == 0) return a; else if (a == 32'h8000_0000 && b == 32'hFFFF_FFFF) return 0; else begin p = sa % sb; return p[31:0]; end
      default:   if (b == 0) return a; else begin p = ua % ub; return p[31:0]; end
    endcase
  endfunction

  task automatic run(md_op_e top, logic [31:0] ta, logic [31:0] tb_);
    int cyc = 0;
    @(negedge clk);
    op = top; a = ta; b = tb_; en = 1;
    #1;
    while (!done) begin @(negedge clk); cyc++; #1; if (cyc > 100) break; end
    checks += 2;
    if (r !== model(top, ta, tb_)) begin
      failures++; $display("FAIL %s %h %h -> %h exp %h", top.name(), ta, tb_, r, model(top, ta, tb_));
    end
    if (cyc != ((top inside {MD_DIV, MD_DIVU, MD_REM, MD_REMU}) ? 33 : 0)) begin
      failures++; $display("FAIL %s latency %0d", top.name(), cyc);
    end
    @(negedge clk); en = 0;
  endtask

  initial begin
    logic [31:0] corner [5] = '{32'h0, 32'h1, 32'hFFFF_FFFF, 32'h8000_0000, 32'h7FFF_FFFF};
    op = MD_MUL; a = 0; b = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int o = 0; o < 8; o++) begin
      for (int i = 0; i < 5; i++) for (int j = 0; j < 5; j++) run(md_op_e'(o), corner[i], corner[j]);
      for (int k = 0; k < 60; k++) run(md_op_e'(o), $urandom, (k % 3 == 0) ? $urandom % 100 : $urandom);
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
