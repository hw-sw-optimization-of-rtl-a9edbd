// inst_mem_if: instruction-memory interface of the MAUPITI digital block.
//
// Connects the core's instruction port to the boot ROM (addresses
// BOOT_BASE..IRAM_BASE-1) and to the instruction RAM (16 KB at IRAM_BASE).
// The external load port (the parallel side of the host serial interfaces)
// writes the instruction RAM and has priority: while it writes, the core's
// request is not granted. A fetch from an unmapped address is answered with
// zero, which the core decodes as an illegal instruction. Responses arrive
// one cycle after the grant and are steered back by a registered select.
// The paper draws this interface between ROM, RAM and core; address map,
// load port and priority are this design's own.
module inst_mem_if
  import maupiti_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  // core instruction port
  input  logic        instr_req_i,
  output logic        instr_gnt_o,
  input  logic [31:0] instr_addr_i,
  output logic        instr_rvalid_o,
  output logic [31:0] instr_rdata_o,
  // load port (writes only)
  input  bus_req_t    load_i,
  // memories
  output bus_req_t    rom_o,
  input  bus_rsp_t    rom_i,
  output bus_req_t    iram_o,
  input  bus_rsp_t    iram_i
);
  typedef enum logic [1:0] {SEL_NONE, SEL_ROM, SEL_IRAM} isel_e;
  isel_e sel, sel_q;
  logic  load_hit, none_q;

  assign load_hit    = load_i.req && load_i.we && (load_i.addr[31:14] == IRAM_BASE[31:14]);
  assign instr_gnt_o = !load_hit;

  always_comb begin
    if (instr_addr_i[31:16] == BOOT_BASE[31:16])      sel = SEL_ROM;
    else if (instr_addr_i[31:14] == IRAM_BASE[31:14]) sel = SEL_IRAM;
    else                                              sel = SEL_NONE;

    rom_o      = '0;
    rom_o.addr = instr_addr_i;
    rom_o.req  = instr_req_i && instr_gnt_o && (sel == SEL_ROM);

    if (load_hit) begin
      iram_o = load_i;
    end else begin
      iram_o      = '0;
      iram_o.addr = instr_addr_i;
      iram_o.req  = instr_req_i && (sel == SEL_IRAM);
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      sel_q <= SEL_NONE; none_q <= 1'b0;
    end else begin
      sel_q  <= (instr_req_i && instr_gnt_o) ? sel : SEL_NONE;
      none_q <= instr_req_i && instr_gnt_o && (sel == SEL_NONE);
    end
  end

  always_comb begin
    unique case (sel_q)
      SEL_ROM:  begin instr_rvalid_o = rom_i.rvalid;  instr_rdata_o = rom_i.rdata;  end
      SEL_IRAM: begin instr_rvalid_o = iram_i.rvalid; instr_rdata_o = iram_i.rdata; end
      default:  begin instr_rvalid_o = none_q;        instr_rdata_o = '0;           end
    endcase
  end
endmodule
