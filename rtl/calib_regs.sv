// calib_regs: digital and calibration register bank of MAUPITI.
//
// NREGS 32-bit registers, readable and writable by the core over the data
// bus (byte enables honoured). All register values are brought out on
// regs_o, towards the TMOS array's calibration inputs and the host side.
// Reset clears every register. Bus reads answer one cycle after the
// request. The paper states that calibration registers for the TMOS sensors
// exist; their number, width and meaning are not published, so this bank is
// a generic one of this design's choosing.
module calib_regs
  import maupiti_pkg::*;
#(
  parameter int unsigned NREGS = 16
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  bus_req_t           req_i,
  output bus_rsp_t           rsp_o,
  output logic [NREGS-1:0][31:0] regs_o
);
  localparam int unsigned AW = $clog2(NREGS);
  logic [AW-1:0] idx;
  logic          in_range;
  assign idx      = req_i.addr[AW+1:2];
  assign in_range = (req_i.addr[11:2] < 10'(NREGS));

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      regs_o <= '0;
      rsp_o  <= '0;
    end else begin
      rsp_o.rvalid <= req_i.req;
      if (req_i.req) begin
        rsp_o.rdata <= in_range ? regs_o[idx] : '0;
        if (req_i.we && in_range)
          for (int b = 0; b < 4; b++)
            if (req_i.be[b]) regs_o[idx][8*b +: 8] <= req_i.wdata[8*b +: 8];
      end
    end
  end
endmodule
