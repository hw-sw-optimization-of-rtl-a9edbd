// sdotp_unit: signed SIMD sum of dot products, the new arithmetic block of
// the MAUPITI core.
//
// result = acc + sum_i a[i]*b[i], where the two 32-bit source registers are
// read either as four signed 8-bit lanes (mode4_i = 0) or as eight signed
// 4-bit lanes (mode4_i = 1). Lane i sits at bits [8i+7:8i] or [4i+3:4i].
// As the paper describes, there are two separate multiplier sets, four 8x8
// and eight 4x4 multipliers, each followed by an adder tree that also adds the
// 32-bit accumulator operand; mode4_i only picks which tree drives the
// output. Sharing the multipliers would save area but put the unit on the
// core's critical path, which is why they are replicated.
// Purely combinational: the result is ready in the same cycle (single-cycle
// latency). The sum wraps modulo 2^32, a choice of this design.
module sdotp_unit (
  input  logic [31:0] op_a_i,   // RS1
  input  logic [31:0] op_b_i,   // RS2
  input  logic [31:0] op_c_i,   // RD, accumulator
  input  logic        mode4_i,  // 1: 8 x INT4, 0: 4 x INT8
  output logic [31:0] result_o
);
  logic signed [15:0] prod8 [4];
  logic signed [7:0]  prod4 [8];
  logic signed [17:0] sum8_l1 [2];
  logic signed [17:0] sum8;
  logic signed [8:0]  sum4_l1 [4];
  logic signed [9:0]  sum4_l2 [2];
  logic signed [10:0] sum4;

  always_comb begin
    for (int i = 0; i < 4; i++)
      prod8[i] = $signed(op_a_i[8*i +: 8]) * $signed(op_b_i[8*i +: 8]);
    for (int i = 0; i < 8; i++)
      prod4[i] = $signed(op_a_i[4*i +: 4]) * $signed(op_b_i[4*i +: 4]);
    // adder trees
    for (int i = 0; i < 2; i++)
      sum8_l1[i] = 18'(prod8[2*i]) + 18'(prod8[2*i+1]);
    sum8 = sum8_l1[0] + sum8_l1[1];
    for (int i = 0; i < 4; i++)
      sum4_l1[i] = 9'(prod4[2*i]) + 9'(prod4[2*i+1]);
    for (int i = 0; i < 2; i++)
      sum4_l2[i] = 10'(sum4_l1[2*i]) + 10'(sum4_l1[2*i+1]);
    sum4 = 11'(sum4_l2[0]) + 11'(sum4_l2[1]);
    result_o = mode4_i ? op_c_i + 32'(sum4) : op_c_i + 32'(sum8);
  end
endmodule
