// otp: behavioural model of the 80-byte one-time-programmable memory of
// MAUPITI. Not synthesizable as a real OTP: the chip uses a process-specific
// fuse/antifuse macro, modelled here by an array.
//
// Blank bits read as 0. Programming (prog_en_i with a byte address and data)
// can only set bits: each programmed byte becomes old | prog_data_i, and a
// bit once set stays set. The core reads the OTP as 20 little-endian 32-bit
// words through the data bus, answered one cycle after the request; bus
// writes are ignored. The 80-byte size is the paper's; the fuse semantics,
// the programming port and the read timing are this model's assumptions.
module otp
  import maupiti_pkg::*;
#(
  parameter int unsigned BYTES = 80
) (
  input  logic       clk_i,
  input  logic       rst_ni,
  input  logic       prog_en_i,
  input  logic [6:0] prog_addr_i,
  input  logic [7:0] prog_data_i,
  input  bus_req_t   req_i,
  output bus_rsp_t   rsp_o
);
  localparam int unsigned WORDS = (BYTES + 3) / 4;
  logic [7:0] fuse_q [BYTES];
  logic [31:0] word;

  // Fuses keep their state over reset; they start blank at power-up.
  initial for (int i = 0; i < BYTES; i++) fuse_q[i] = 8'h00;

  always_ff @(posedge clk_i) begin
    if (prog_en_i && prog_addr_i < 7'(BYTES))
      fuse_q[prog_addr_i] <= fuse_q[prog_addr_i] | prog_data_i;
  end

  always_comb begin
    word = '0;
    for (int b = 0; b < 4; b++)
      if (int'(req_i.addr[8:2]) < WORDS && 4 * int'(req_i.addr[8:2]) + b < BYTES)
        word[8*b +: 8] = fuse_q[4 * int'(req_i.addr[8:2]) + b];
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
