// data_mem_if: data-memory interface of the MAUPITI digital block.
//
// Decodes the core's data accesses by address:
//   DRAM_BASE  0x0002_0000  16 KB data RAM
//   REGS_BASE  0x0003_0000  digital/calibration registers
//   OTP_BASE   0x0003_1000  80-byte OTP (read only)
//   FRAME_BASE 0x0003_2000  TMOS frame buffer and readout control
// Any other address reads as zero and ignores writes. The external load
// port (parallel side of the host serial interfaces) may write the data RAM
// and has priority; the core's request is then not granted. Every slave
// answers one cycle after the request; a registered select steers the
// response back. The paper draws this interface between core and data RAM;
// the address map and the peripherals hung on it are this design's own.
module data_mem_if
  import maupiti_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  // core data port
  input  logic        data_req_i,
  output logic        data_gnt_o,
  input  logic        data_we_i,
  input  logic [3:0]  data_be_i,
  input  logic [31:0] data_addr_i,
  input  logic [31:0] data_wdata_i,
  output logic        data_rvalid_o,
  output logic [31:0] data_rdata_o,
  // load port (writes only)
  input  bus_req_t    load_i,
  // slaves
  output bus_req_t    dram_o,
  input  bus_rsp_t    dram_i,
  output bus_req_t    regs_o,
  input  bus_rsp_t    regs_i,
  output bus_req_t    otp_o,
  input  bus_rsp_t    otp_i,
  output bus_req_t    frame_o,
  input  bus_rsp_t    frame_i
);
  typedef enum logic [2:0] {DS_NONE, DS_DRAM, DS_REGS, DS_OTP, DS_FRAME} dsel_e;
  dsel_e    sel, sel_q;
  logic     load_hit, none_q, grant;
  bus_req_t core_req;

  assign load_hit   = load_i.req && load_i.we && (load_i.addr[31:14] == DRAM_BASE[31:14]);
  assign data_gnt_o = !load_hit;
  assign grant      = data_req_i && data_gnt_o;

  always_comb begin
    if      (data_addr_i[31:14] == DRAM_BASE[31:14])  sel = DS_DRAM;
    else if (data_addr_i[31:12] == REGS_BASE[31:12])  sel = DS_REGS;
    else if (data_addr_i[31:12] == OTP_BASE[31:12])   sel = DS_OTP;
    else if (data_addr_i[31:12] == FRAME_BASE[31:12]) sel = DS_FRAME;
    else                                              sel = DS_NONE;

    core_req       = '{req: 1'b0, we: data_we_i, be: data_be_i, addr: data_addr_i, wdata: data_wdata_i};
    dram_o = core_req; regs_o = core_req; otp_o = core_req; frame_o = core_req;
    dram_o.req  = grant && (sel == DS_DRAM);
    regs_o.req  = grant && (sel == DS_REGS);
    otp_o.req   = grant && (sel == DS_OTP);
    frame_o.req = grant && (sel == DS_FRAME);
    if (load_hit) dram_o = load_i;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      sel_q <= DS_NONE; none_q <= 1'b0;
    end else begin
      sel_q  <= grant ? sel : DS_NONE;
      none_q <= grant && (sel == DS_NONE);
    end
  end

  always_comb begin
    unique case (sel_q)
      DS_DRAM:  begin data_rvalid_o = dram_i.rvalid;  data_rdata_o = dram_i.rdata;  end
      DS_REGS:  begin data_rvalid_o = regs_i.rvalid;  data_rdata_o = regs_i.rdata;  end
      DS_OTP:   begin data_rvalid_o = otp_i.rvalid;   data_rdata_o = otp_i.rdata;   end
      DS_FRAME: begin data_rvalid_o = frame_i.rvalid; data_rdata_o = frame_i.rdata; end
      default:  begin data_rvalid_o = none_q;         data_rdata_o = '0;            end
    endcase
  end
endmodule
