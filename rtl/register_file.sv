// register_file: flip-flop register file of the MAUPITI core with three read
// ports and one write port.
//
// RdA and RdB feed the usual two ALU operands. RdC is the port added for the
// SDOTP instructions, which read their destination register as accumulator;
// the ALU gets it as its third operand OpC. Reads are combinational, the write
// takes effect at the rising clock edge. Register 0 always reads zero and
// ignores writes. The three read ports and their names follow the paper;
// the flip-flop implementation and the reset to zero are this design's own.
module register_file #(
  parameter int unsigned NREGS = 32
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  logic [$clog2(NREGS)-1:0] raddr_a_i,
  output logic [31:0]              rdata_a_o,
  input  logic [$clog2(NREGS)-1:0] raddr_b_i,
  output logic [31:0]              rdata_b_o,
  input  logic [$clog2(NREGS)-1:0] raddr_c_i,
  output logic [31:0]              rdata_c_o,
  input  logic [$clog2(NREGS)-1:0] waddr_i,
  input  logic [31:0]              wdata_i,
  input  logic                     we_i
);
  logic [31:0] regs_q [NREGS];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < NREGS; i++) regs_q[i] <= '0;
    end else if (we_i && waddr_i != '0) begin
      regs_q[waddr_i] <= wdata_i;
    end
  end

  assign rdata_a_o = (raddr_a_i == '0) ? '0 : regs_q[raddr_a_i];
  assign rdata_b_o = (raddr_b_i == '0) ? '0 : regs_q[raddr_b_i];
  assign rdata_c_o = (raddr_c_i == '0) ? '0 : regs_q[raddr_c_i];
endmodule
