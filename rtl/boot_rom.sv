// boot_rom: the read-only memory at the reset address of the MAUPITI core.
//
// The core starts fetching here after reset. The ROM holds a two-instruction
// loader stub, "lui t0, IRAM_BASE[31:12]" then "jalr x0, 0(t0)", which jumps
// to the start of the instruction RAM, where the application has been
// loaded; every other one of its WORDS words reads as nop (addi x0, x0, 0).
// Reads answer one cycle after the request. The paper only says there is a
// boot ROM; its contents and size are this design's own.
module boot_rom
  import maupiti_pkg::*;
#(
  parameter logic [31:0] IRAM_BASE_ADDR = IRAM_BASE,
  parameter int unsigned WORDS = 64
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  bus_req_t req_i,
  output bus_rsp_t rsp_o
);
  localparam int unsigned AW = $clog2(WORDS);
  localparam logic [31:0] INSTR_LUI  = {IRAM_BASE_ADDR[31:12], 5'd5, OPC_LUI};
  localparam logic [31:0] INSTR_JALR = {12'd0, 5'd5, 3'b000, 5'd0, OPC_JALR};
  localparam logic [31:0] INSTR_NOP  = 32'h0000_0013;

  logic [AW-1:0] idx;
  logic [31:0]   word;
  assign idx = req_i.addr[AW+1:2];

  always_comb begin
    unique case (idx)
      AW'(0):  word = INSTR_LUI;
      AW'(1):  word = INSTR_JALR;
      default: word = INSTR_NOP;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rsp_o <= '0;
    end else begin
      rsp_o.rvalid <= req_i.req;
      if (req_i.req) rsp_o.rdata <= word;
    end
  end
endmodule
