// tb_register_file: random writes and reads on all three read ports against
// a shadow array; checks that register 0 stays zero, that a write shows on
// the next cycle and that the three ports read independently.
module tb_register_file;
  logic clk = 0, rst_n = 1;
  logic [4:0]  ra, rb, rc, wa;
  logic [31:0] da, db, dc, wd;
  logic        we;
  logic [31:0] shadow [32];
  int checks = 0, failures = 0;

  register_file dut (.clk_i(clk), .rst_ni(rst_n), .raddr_a_i(ra), .rdata_a_o(da), .raddr_b_i(rb),
                     .rdata_b_o(db), .raddr_c_i(rc), .rdata_c_o(dc), .waddr_i(wa), .wdata_i(wd), .we_i(we));

  always #5 clk = ~clk;
  initial #1 rst_n = 0;  // reset needs an edge: async reset flops react to negedge

  initial begin
    for (int i = 0; i < 32; i++) shadow[i] = '0;
    we = 0; wa = 0; wd = 0; ra = 0; rb = 0; rc = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      ra = 5'($urandom); rb = 5'($urandom); rc = 5'($urandom);
      #1;
      checks += 3;
      if (da !== shadow[ra]) begin failures++; $display("FAIL A x%0d %h exp %h", ra, da, shadow[ra]); end
      if (db !== shadow[rb]) begin failures++; $display("FAIL B x%0d %h exp %h", rb, db, shadow[rb]); end
      if (dc !== shadow[rc]) begin failures++; $display("FAIL C x%0d %h exp %h", rc, dc, shadow[rc]); end
      we = 1'($urandom); wa = 5'($urandom); wd = $urandom;
      @(posedge clk);
      if (we && wa != 0) shadow[wa] = wd;
    end
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
