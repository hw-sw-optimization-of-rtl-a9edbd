// alu: single-cycle RV32I arithmetic/logic unit of the MAUPITI core, extended
// with a third operand OpC.
//
// The standard operations (add, sub, logic, shifts, set-less-than and the six
// branch comparisons) use OpA and OpB. The two SDOTP operations also use OpC,
// which comes straight from the register file's third read port (RdC) and
// carries the accumulator held in the destination register; the work is done
// by the embedded sdotp_unit. The third operand and the SDOTP unit inside
// the ALU follow the paper; the rest is a plain RV32I ALU, this design's own.
// cmp_o is the branch condition for ALU_EQ..ALU_GEU. Combinational.
module alu
  import maupiti_pkg::*;
(
  input  alu_op_e     op_i,
  input  logic [31:0] op_a_i,
  input  logic [31:0] op_b_i,
  input  logic [31:0] op_c_i,
  output logic [31:0] result_o,
  output logic        cmp_o
);
  logic [31:0] sdotp_res;
  logic [4:0]  shamt;

  sdotp_unit u_sdotp (
    .op_a_i  (op_a_i),
    .op_b_i  (op_b_i),
    .op_c_i  (op_c_i),
    .mode4_i (op_i == ALU_SDOTP4),
    .result_o(sdotp_res)
  );

  assign shamt = op_b_i[4:0];

  always_comb begin
    unique case (op_i)
      ALU_EQ:  cmp_o = (op_a_i == op_b_i);
      ALU_NE:  cmp_o = (op_a_i != op_b_i);
      ALU_LT, ALU_SLT: cmp_o = ($signed(op_a_i) < $signed(op_b_i));
      ALU_GE:  cmp_o = ($signed(op_a_i) >= $signed(op_b_i));
      ALU_LTU, ALU_SLTU: cmp_o = (op_a_i < op_b_i);
      ALU_GEU: cmp_o = (op_a_i >= op_b_i);
      default: cmp_o = 1'b0;
    endcase
    unique case (op_i)
      ALU_ADD:  result_o = op_a_i + op_b_i;
      ALU_SUB:  result_o = op_a_i - op_b_i;
      ALU_XOR:  result_o = op_a_i ^ op_b_i;
      ALU_OR:   result_o = op_a_i | op_b_i;
      ALU_AND:  result_o = op_a_i & op_b_i;
      ALU_SLL:  result_o = op_a_i << shamt;
      ALU_SRL:  result_o = op_a_i >> shamt;
      ALU_SRA:  result_o = 32'($signed(op_a_i) >>> shamt);
      ALU_SDOTP8, ALU_SDOTP4: result_o = sdotp_res;
      default:  result_o = {31'b0, cmp_o};
    endcase
  end
endmodule
