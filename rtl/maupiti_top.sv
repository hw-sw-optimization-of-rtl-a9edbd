// maupiti_top: the digital block of the MAUPITI smart infrared sensor.
//
// A customised RV32IMC core with SIMD dot-product instructions for INT8/INT4
// neural networks runs a people-counting network on thermal frames from a
// 16x16 TMOS array. Around the core:
//   instruction side: boot ROM (reset address 0) and 16 KB instruction RAM
//                     behind the instruction-memory interface;
//   data side:        16 KB data RAM, calibration registers, 80 B OTP and the
//                     TMOS readout's frame buffer behind the data-memory
//                     interface (address map in maupiti_pkg).
// The analog parts (TMOS array with its front ends, LDO, clock and reset
// circuits, calibration block) are outside this module: the front-end
// handshake (afe_*), the calibration register values (calib_o), clk_i and
// rst_ni are ports. The I2C/SPI host interfaces are not modelled either;
// their parallel side is represented by a write-only load port (load_*)
// that fills the instruction and data RAMs before or while the core runs,
// and by the OTP programming port. After reset the core runs the boot ROM,
// which jumps to the instruction RAM.
// Clock: 20 MHz in the paper; the readout period FRAME_CYCLES = 2,000,000
// gives its 10 frames per second.
module maupiti_top
  import maupiti_pkg::*;
#(
  parameter int unsigned IRAM_BYTES   = 16384,
  parameter int unsigned DRAM_BYTES   = 16384,
  parameter int unsigned CALIB_REGS   = 16,
  parameter int unsigned FRAME_CYCLES = 2_000_000
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        trace_en_i,
  // host load port (parallel side of I2C/SPI3)
  input  logic        load_req_i,
  input  logic [31:0] load_addr_i,
  input  logic [3:0]  load_be_i,
  input  logic [31:0] load_wdata_i,
  // OTP programming
  input  logic        otp_prog_en_i,
  input  logic [6:0]  otp_prog_addr_i,
  input  logic [7:0]  otp_prog_data_i,
  // TMOS analog front end: 8 chains x 16 pixels x 16 bit
  output logic        afe_start_o,
  output logic        afe_step_o,
  input  logic        afe_done_i,
  input  logic [7:0][15:0][15:0] afe_data_i,
  // status
  output logic [CALIB_REGS-1:0][31:0] calib_o,
  output logic        frame_ready_o,
  output logic [31:0] instret_o
);
  bus_req_t load;
  assign load = '{req: load_req_i, we: 1'b1, be: load_be_i, addr: load_addr_i, wdata: load_wdata_i};

  // ------------------------------------------------------------- core
  logic        instr_req, instr_gnt, instr_rvalid;
  logic [31:0] instr_addr, instr_rdata;
  logic        data_req, data_gnt, data_we, data_rvalid;
  logic [3:0]  data_be;
  logic [31:0] data_addr, data_wdata, data_rdata;

  maupiti_core u_core (
    .clk_i, .rst_ni,
    .boot_addr_i   (BOOT_BASE),
    .trace_en_i,
    .instr_req_o   (instr_req),
    .instr_gnt_i   (instr_gnt),
    .instr_addr_o  (instr_addr),
    .instr_rvalid_i(instr_rvalid),
    .instr_rdata_i (instr_rdata),
    .data_req_o    (data_req),
    .data_gnt_i    (data_gnt),
    .data_we_o     (data_we),
    .data_be_o     (data_be),
    .data_addr_o   (data_addr),
    .data_wdata_o  (data_wdata),
    .data_rvalid_i (data_rvalid),
    .data_rdata_i  (data_rdata),
    .instret_o
  );

  // ------------------------------------------------------------- instruction side
  bus_req_t rom_req, iram_req;
  bus_rsp_t rom_rsp, iram_rsp;

  inst_mem_if u_imem_if (
    .clk_i, .rst_ni,
    .instr_req_i   (instr_req),
    .instr_gnt_o   (instr_gnt),
    .instr_addr_i  (instr_addr),
    .instr_rvalid_o(instr_rvalid),
    .instr_rdata_o (instr_rdata),
    .load_i        (load),
    .rom_o         (rom_req),
    .rom_i         (rom_rsp),
    .iram_o        (iram_req),
    .iram_i        (iram_rsp)
  );

  boot_rom u_rom (.clk_i, .rst_ni, .req_i(rom_req), .rsp_o(rom_rsp));
  sram #(.BYTES(IRAM_BYTES)) u_iram (.clk_i, .rst_ni, .req_i(iram_req), .rsp_o(iram_rsp));

  // ------------------------------------------------------------- data side
  bus_req_t dram_req, regs_req, otp_req, frame_req;
  bus_rsp_t dram_rsp, regs_rsp, otp_rsp, frame_rsp;

  data_mem_if u_dmem_if (
    .clk_i, .rst_ni,
    .data_req_i   (data_req),
    .data_gnt_o   (data_gnt),
    .data_we_i    (data_we),
    .data_be_i    (data_be),
    .data_addr_i  (data_addr),
    .data_wdata_i (data_wdata),
    .data_rvalid_o(data_rvalid),
    .data_rdata_o (data_rdata),
    .load_i       (load),
    .dram_o       (dram_req),  .dram_i (dram_rsp),
    .regs_o       (regs_req),  .regs_i (regs_rsp),
    .otp_o        (otp_req),   .otp_i  (otp_rsp),
    .frame_o      (frame_req), .frame_i(frame_rsp)
  );

  sram #(.BYTES(DRAM_BYTES)) u_dram (.clk_i, .rst_ni, .req_i(dram_req), .rsp_o(dram_rsp));

  calib_regs #(.NREGS(CALIB_REGS)) u_regs (
    .clk_i, .rst_ni, .req_i(regs_req), .rsp_o(regs_rsp), .regs_o(calib_o)
  );

  otp u_otp (
    .clk_i, .rst_ni,
    .prog_en_i  (otp_prog_en_i),
    .prog_addr_i(otp_prog_addr_i),
    .prog_data_i(otp_prog_data_i),
    .req_i      (otp_req),
    .rsp_o      (otp_rsp)
  );

  tmos_readout #(
    .ROWS(16), .COLS(16), .CHAINS(8), .PIX_W(16), .FRAME_CYCLES(FRAME_CYCLES)
  ) u_readout (
    .clk_i, .rst_ni,
    .afe_start_o, .afe_step_o, .afe_done_i, .afe_data_i,
    .req_i(frame_req), .rsp_o(frame_rsp), .frame_ready_o
  );
endmodule
