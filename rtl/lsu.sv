// lsu: load/store unit of the MAUPITI core.
//
// Takes one byte, halfword or word access from the ID/EX stage and runs it on
// the data-memory bus, a request/grant handshake followed by an in-order
// response (data_rvalid_i) in a later cycle, the scheme of the Ibex core's
// data port. Stores replicate the data across the word and set the byte
// enables; loads pick the addressed lane and sign- or zero-extend it.
// Timing: req_i is held by the stage until done_o; with a memory that grants
// at once and answers one cycle later an access takes two cycles. A
// misaligned address is not sent to the bus: misaligned_o goes high and the
// controller takes a trap (a choice of this design; the paper names the LSU
// only).
module lsu (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        req_i,
  input  logic        we_i,
  input  logic [1:0]  size_i,     // 0 byte, 1 half, 2 word
  input  logic        sign_i,
  input  logic [31:0] addr_i,
  input  logic [31:0] wdata_i,
  output logic        done_o,
  output logic [31:0] rdata_o,
  output logic        misaligned_o,
  // data memory bus
  output logic        data_req_o,
  input  logic        data_gnt_i,
  output logic        data_we_o,
  output logic [3:0]  data_be_o,
  output logic [31:0] data_addr_o,
  output logic [31:0] data_wdata_o,
  input  logic        data_rvalid_i,
  input  logic [31:0] data_rdata_i
);
  logic       wait_q;
  logic [1:0] off_q, size_q;
  logic       sign_q;

  assign misaligned_o = req_i && ((size_i == 2'd1 && addr_i[0]) ||
                                  (size_i == 2'd2 && addr_i[1:0] != 2'b00));

  assign data_req_o   = req_i && !misaligned_o && !wait_q;
  assign data_we_o    = we_i;
  assign data_addr_o  = {addr_i[31:2], 2'b00};
  always_comb begin
    unique case (size_i)
      2'd0:    begin data_be_o = 4'b0001 << addr_i[1:0]; data_wdata_o = {4{wdata_i[7:0]}};  end
      2'd1:    begin data_be_o = 4'b0011 << addr_i[1:0]; data_wdata_o = {2{wdata_i[15:0]}}; end
      default: begin data_be_o = 4'b1111;                data_wdata_o = wdata_i;            end
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wait_q <= 1'b0; off_q <= '0; size_q <= '0; sign_q <= 1'b0;
    end else if (data_req_o && data_gnt_i) begin
      wait_q <= 1'b1; off_q <= addr_i[1:0]; size_q <= size_i; sign_q <= sign_i;
    end else if (data_rvalid_i) begin
      wait_q <= 1'b0;
    end
  end

  assign done_o = wait_q && data_rvalid_i;

  logic [31:0] shifted;
  assign shifted = data_rdata_i >> {off_q, 3'b000};
  always_comb begin
    unique case (size_q)
      2'd0:    rdata_o = {{24{sign_q & shifted[7]}},  shifted[7:0]};
      2'd1:    rdata_o = {{16{sign_q & shifted[15]}}, shifted[15:0]};
      default: rdata_o = shifted;
    endcase
  end
endmodule
