// rv_asm_pkg: instruction encoders used by the core and system testbenches
// to build test programs in SystemVerilog (no external assembler needed).
// Encodings follow the RISC-V base ISA; sdotp8/sdotp4 use the custom-0
// encoding chosen for this design (funct3 000 / 001, funct7 0).
package rv_asm_pkg;
  function automatic logic [31:0] r_type(input logic [6:0] f7, input int rs2, input int rs1,
                                         input logic [2:0] f3, input int rd, input logic [6:0] opc);
    return {f7, 5'(rs2), 5'(rs1), f3, 5'(rd), opc};
  endfunction
  function automatic logic [31:0] i_type(input int imm, input int rs1, input logic [2:0] f3,
                                         input int rd, input logic [6:0] opc);
    return {12'(imm), 5'(rs1), f3, 5'(rd), opc};
  endfunction
  function automatic logic [31:0] s_type(input int imm, input int rs2, input int rs1, input logic [2:0] f3);
    logic [11:0] i = 12'(imm);
    return {i[11:5], 5'(rs2), 5'(rs1), f3, i[4:0], 7'b0100011};
  endfunction
  function automatic logic [31:0] b_type(input int off, input int rs2, input int rs1, input logic [2:0] f3);
    logic [12:0] o = 13'(off);
    return {o[12], o[10:5], 5'(rs2), 5'(rs1), f3, o[4:1], o[11], 7'b1100011};
  endfunction
  function automatic logic [31:0] addi(input int rd, input int rs1, input int imm);
    return i_type(imm, rs1, 3'b000, rd, 7'b0010011);
  endfunction
  function automatic logic [31:0] slli(input int rd, input int rs1, input int sh);
    return i_type(sh, rs1, 3'b001, rd, 7'b0010011);
  endfunction
  function automatic logic [31:0] lui(input int rd, input logic [31:0] imm);
    return {imm[31:12], 5'(rd), 7'b0110111};
  endfunction
  function automatic logic [31:0] add(input int rd, input int rs1, input int rs2);
    return r_type(7'b0, rs2, rs1, 3'b000, rd, 7'b0110011);
  endfunction
  function automatic logic [31:0] sub(input int rd, input int rs1, input int rs2);
    return r_type(7'b0100000, rs2, rs1, 3'b000, rd, 7'b0110011);
  endfunction
  function automatic logic [31:0] mul(input int rd, input int rs1, input int rs2);
    return r_type(7'b0000001, rs2, rs1, 3'b000, rd, 7'b0110011);
  endfunction
  function automatic logic [31:0] div(input int rd, input int rs1, input int rs2);
    return r_type(7'b0000001, rs2, rs1, 3'b100, rd, 7'b0110011);
  endfunction
  function automatic logic [31:0] rem(input int rd, input int rs1, input int rs2);
    return r_type(7'b0000001, rs2, rs1, 3'b110, rd, 7'b0110011);
  endfunction
  function automatic logic [31:0] sdotp8(input int rd, input int rs1, input int rs2);
    return r_type(7'b0, rs2, rs1, 3'b000, rd, 7'b0001011);
  endfunction
  function automatic logic [31:0] sdotp4(input int rd, input int rs1, input int rs2);
    return r_type(7'b0, rs2, rs1, 3'b001, rd, 7'b0001011);
  endfunction
  function automatic logic [31:0] lw(input int rd, input int rs1, input int imm);
    return i_type(imm, rs1, 3'b010, rd, 7'b0000011);
  endfunction
  function automatic logic [31:0] lb(input int rd, input int rs1, input int imm);
    return i_type(imm, rs1, 3'b000, rd, 7'b0000011);
  endfunction
  function automatic logic [31:0] lhu(input int rd, input int rs1, input int imm);
    return i_type(imm, rs1, 3'b101, rd, 7'b0000011);
  endfunction
  function automatic logic [31:0] sw(input int rs2, input int rs1, input int imm);
    return s_type(imm, rs2, rs1, 3'b010);
  endfunction
  function automatic logic [31:0] sb(input int rs2, input int rs1, input int imm);
    return s_type(imm, rs2, rs1, 3'b000);
  endfunction
  function automatic logic [31:0] beq(input int rs1, input int rs2, input int off);
    return b_type(off, rs2, rs1, 3'b000);
  endfunction
  function automatic logic [31:0] bne(input int rs1, input int rs2, input int off);
    return b_type(off, rs2, rs1, 3'b001);
  endfunction
  function automatic logic [31:0] blt(input int rs1, input int rs2, input int off);
    return b_type(off, rs2, rs1, 3'b100);
  endfunction
  function automatic logic [31:0] jal(input int rd, input int off);
    logic [20:0] o = 21'(off);
    return {o[20], o[10:1], o[11], o[19:12], 5'(rd), 7'b1101111};
  endfunction
  function automatic logic [31:0] jalr(input int rd, input int rs1, input int imm);
    return i_type(imm, rs1, 3'b000, rd, 7'b1100111);
  endfunction
  function automatic logic [31:0] csrrw(input int rd, input logic [11:0] csr, input int rs1);
    return {csr, 5'(rs1), 3'b001, 5'(rd), 7'b1110011};
  endfunction
  function automatic logic [31:0] csrrs(input int rd, input logic [11:0] csr, input int rs1);
    return {csr, 5'(rs1), 3'b010, 5'(rd), 7'b1110011};
  endfunction
  localparam logic [31:0] ECALL = 32'h0000_0073;
  localparam logic [31:0] MRET  = 32'h3020_0073;
  localparam logic [31:0] NOP   = 32'h0000_0013;
  // compressed: c.li rd, imm (-32..31) and c.add rd, rs2
  function automatic logic [15:0] c_li(input int rd, input int imm);
    logic [5:0] i = 6'(imm);
    return {3'b010, i[5], 5'(rd), i[4:0], 2'b01};
  endfunction
  function automatic logic [15:0] c_add(input int rd, input int rs2);
    return {3'b100, 1'b1, 5'(rd), 5'(rs2), 2'b10};
  endfunction
endpackage
