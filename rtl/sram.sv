// sram: single-port synchronous RAM used for the 16 KB instruction memory
// and the 16 KB data memory of MAUPITI.
//
// 32-bit words with byte enables. A request (bus_req_t) is accepted every
// cycle; one cycle later rvalid is high and rdata holds the word as it was
// before a write in the same access (read-first). Only the address bits that
// select a word inside BYTES are decoded: the memory interfaces decide which
// accesses reach it. The 16 KB size is the paper's; the array written here
// stands in for the memory macro of the chip, whose timing is not published.
module sram
  import maupiti_pkg::*;
#(
  parameter int unsigned BYTES = 16384
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  bus_req_t req_i,
  output bus_rsp_t rsp_o
);
  localparam int unsigned WORDS = BYTES / 4;
  localparam int unsigned AW    = $clog2(WORDS);

  logic [31:0] mem [WORDS];
  logic [AW-1:0] idx;
  logic [31:0]   rdata_q;
  logic          rvalid_q;
  assign idx   = req_i.addr[AW+1:2];
  assign rsp_o = '{rvalid: rvalid_q, rdata: rdata_q};

  always_ff @(posedge clk_i) begin
    if (req_i.req) begin
      rdata_q <= mem[idx];
      if (req_i.we) begin
        for (int b = 0; b < 4; b++)
          if (req_i.be[b]) mem[idx][8*b +: 8] <= req_i.wdata[8*b +: 8];
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) rvalid_q <= 1'b0;
    else         rvalid_q <= req_i.req;
  end
endmodule
