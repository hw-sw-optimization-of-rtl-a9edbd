// csr: machine-mode control and status registers of the MAUPITI core.
//
// Implements mstatus (MIE, MPIE; MPP reads as machine mode), misa, mtvec
// (direct mode), mscratch, mepc, mcause, mtval, the 64-bit mcycle and
// minstret counters with their user-mode read-only aliases, and mhartid.
// A CSR instruction reads the old value combinationally (csr_rdata_o) and
// writes at the clock edge when csr_we_i is high (it retires). trap_i saves
// pc/cause/tval and clears MIE; mret_i restores MIE from MPIE. Unknown
// addresses, and writes to read-only ones, raise csr_illegal_o. The paper
// only names this block; the register set is this design's own minimal
// choice (no interrupts are implemented).
module csr
  import maupiti_pkg::*;
#(
  parameter logic [31:0] MTVEC_RST = 32'h0001_0000
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic [11:0] csr_addr_i,
  input  csr_op_e     csr_op_i,
  input  logic [31:0] csr_wdata_i,
  input  logic        csr_we_i,
  output logic [31:0] csr_rdata_o,
  output logic        csr_illegal_o,
  input  logic        trap_i,
  input  logic [31:0] trap_pc_i,
  input  logic [31:0] trap_cause_i,
  input  logic [31:0] trap_tval_i,
  input  logic        mret_i,
  input  logic        instret_i,
  output logic [31:0] mtvec_o,
  output logic [31:0] mepc_o
);
  logic        mie_q, mpie_q;
  logic [31:0] mtvec_q, mscratch_q, mepc_q, mcause_q, mtval_q;
  logic [63:0] mcycle_q, minstret_q;
  logic [31:0] wval;
  logic        known, readonly;

  always_comb begin
    known = 1'b1;
    unique case (csr_addr_i)
      CSR_MSTATUS:   csr_rdata_o = {19'b0, 2'b11, 3'b0, mpie_q, 3'b0, mie_q, 3'b0};
      CSR_MISA:      csr_rdata_o = 32'h4080_1104;  // RV32 I M C X
      CSR_MTVEC:     csr_rdata_o = mtvec_q;
      CSR_MSCRATCH:  csr_rdata_o = mscratch_q;
      CSR_MEPC:      csr_rdata_o = mepc_q;
      CSR_MCAUSE:    csr_rdata_o = mcause_q;
      CSR_MTVAL:     csr_rdata_o = mtval_q;
      CSR_MCYCLE,   CSR_CYCLE:    csr_rdata_o = mcycle_q[31:0];
      CSR_MCYCLEH,  CSR_CYCLEH:   csr_rdata_o = mcycle_q[63:32];
      CSR_MINSTRET, CSR_INSTRET:  csr_rdata_o = minstret_q[31:0];
      CSR_MINSTRETH, CSR_INSTRETH: csr_rdata_o = minstret_q[63:32];
      CSR_MHARTID:   csr_rdata_o = 32'h0;
      default: begin csr_rdata_o = 32'h0; known = 1'b0; end
    endcase
    unique case (csr_op_i)
      CSR_WRITE: wval = csr_wdata_i;
      CSR_SET:   wval = csr_rdata_o | csr_wdata_i;
      CSR_CLEAR: wval = csr_rdata_o & ~csr_wdata_i;
      default:   wval = csr_rdata_o;
    endcase
    readonly      = (csr_addr_i[11:10] == 2'b11);
    csr_illegal_o = !known || (readonly && csr_op_i != CSR_NONE);
  end

  logic do_write;
  assign do_write = csr_we_i && (csr_op_i != CSR_NONE) && !csr_illegal_o;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      mie_q <= 1'b0; mpie_q <= 1'b0;
      mtvec_q <= MTVEC_RST; mscratch_q <= '0; mepc_q <= '0; mcause_q <= '0; mtval_q <= '0;
      mcycle_q <= '0; minstret_q <= '0;
    end else begin
      mcycle_q <= mcycle_q + 64'd1;
      if (instret_i) minstret_q <= minstret_q + 64'd1;
      if (do_write) begin
        unique case (csr_addr_i)
          CSR_MSTATUS:   begin mie_q <= wval[3]; mpie_q <= wval[7]; end
          CSR_MTVEC:     mtvec_q <= {wval[31:2], 2'b00};
          CSR_MSCRATCH:  mscratch_q <= wval;
          CSR_MEPC:      mepc_q <= {wval[31:1], 1'b0};
          CSR_MCAUSE:    mcause_q <= wval;
          CSR_MTVAL:     mtval_q <= wval;
          CSR_MCYCLE:    mcycle_q[31:0] <= wval;
          CSR_MCYCLEH:   mcycle_q[63:32] <= wval;
          CSR_MINSTRET:  minstret_q[31:0] <= wval;
          CSR_MINSTRETH: minstret_q[63:32] <= wval;
          default: ;
        endcase
      end
      if (trap_i) begin
        mepc_q <= trap_pc_i; mcause_q <= trap_cause_i; mtval_q <= trap_tval_i;
        mpie_q <= mie_q; mie_q <= 1'b0;
      end else if (mret_i) begin
        mie_q <= mpie_q; mpie_q <= 1'b1;
      end
    end
  end

  assign mtvec_o = mtvec_q;
  assign mepc_o  = mepc_q;
endmodule
