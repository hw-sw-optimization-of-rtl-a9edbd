// multdiv: RV32M multiply/divide unit in the EX stage of the MAUPITI core.
//
// Multiplications (MUL, MULH, MULHSU, MULHU) use one 33x33-bit signed
// multiplier and finish in the cycle they are issued: done_o = en_i.
// Divisions and remainders (DIV, DIVU, REM, REMU) run a radix-2 restoring
// divider on the operand magnitudes: one load cycle, 32 iteration cycles,
// then one cycle with done_o = 1 and the sign-corrected result (34 cycles).
// en_i must stay high, with stable operands, until done_o; the unit then
// returns to idle. Division by zero and the -2^31 / -1 overflow give the
// results the RISC-V spec prescribes. The paper only names this unit; this
// structure is this design's own.
module multdiv
  import maupiti_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        en_i,
  input  md_op_e      op_i,
  input  logic [31:0] op_a_i,
  input  logic [31:0] op_b_i,
  output logic        done_o,
  output logic [31:0] result_o
);
  typedef enum logic [1:0] {MD_IDLE, MD_BUSY, MD_DONE} md_state_e;
  md_state_e   state_q;
  logic [4:0]  cnt_q;
  logic [32:0] rem_q;
  logic [31:0] quo_q, div_q;
  logic        neg_q_q, neg_r_q, zero_q;

  // ---------------------------------------------------------- multiply
  logic        is_div, a_signed, b_signed;
  logic signed [32:0] ma, mb;
  logic signed [65:0] prod;
  logic [31:0] mul_res;

  assign is_div   = op_i inside {MD_DIV, MD_DIVU, MD_REM, MD_REMU};
  assign a_signed = op_i inside {MD_MULH, MD_MULHSU, MD_DIV, MD_REM};
  assign b_signed = op_i inside {MD_MULH, MD_DIV, MD_REM};
  assign ma   = {a_signed & op_a_i[31], op_a_i};
  assign mb   = {b_signed & op_b_i[31], op_b_i};
  assign prod = ma * mb;
  assign mul_res = (op_i == MD_MUL) ? prod[31:0] : prod[63:32];

  // ---------------------------------------------------------- divide
  logic [31:0] abs_a, abs_b;
  logic [32:0] rem_shift;
  logic [32:0] rem_sub;
  assign abs_a = (a_signed && op_a_i[31]) ? -op_a_i : op_a_i;
  assign abs_b = (b_signed && op_b_i[31]) ? -op_b_i : op_b_i;
  assign rem_shift = {rem_q[31:0], quo_q[31]};
  assign rem_sub   = rem_shift - {1'b0, div_q};

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= MD_IDLE; cnt_q <= '0; rem_q <= '0; quo_q <= '0; div_q <= '0;
      neg_q_q <= 1'b0; neg_r_q <= 1'b0; zero_q <= 1'b0;
    end else begin
      unique case (state_q)
        MD_IDLE: if (en_i && is_div) begin
          rem_q   <= '0;
          quo_q   <= abs_a;
          div_q   <= abs_b;
          neg_q_q <= b_signed && (op_a_i[31] ^ op_b_i[31]);
          neg_r_q <= a_signed && op_a_i[31];
          zero_q  <= (op_b_i == '0);
          cnt_q   <= 5'd31;
          state_q <= MD_BUSY;
        end
        MD_BUSY: begin
          if (!rem_sub[32]) begin
            rem_q <= rem_sub;
            quo_q <= {quo_q[30:0], 1'b1};
          end else begin
            rem_q <= rem_shift;
            quo_q <= {quo_q[30:0], 1'b0};
          end
          cnt_q <= cnt_q - 5'd1;
          if (cnt_q == 5'd0) state_q <= MD_DONE;
        end
        default: state_q <= MD_IDLE;  // MD_DONE: result consumed this cycle
      endcase
    end
  end

  logic [31:0] div_res;
  always_comb begin
    if (op_i == MD_DIV || op_i == MD_DIVU)
      div_res = (zero_q || !neg_q_q) ? quo_q : -quo_q;   // /0 -> all ones
    else
      div_res = neg_r_q ? -rem_q[31:0] : rem_q[31:0];
    done_o   = is_div ? (state_q == MD_DONE) : en_i;
    result_o = is_div ? div_res : mul_res;
  end
endmodule
