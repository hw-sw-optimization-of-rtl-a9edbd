// maupiti_pkg: types and constants shared by the MAUPITI digital block.
//
// Holds the decoded-instruction control struct that flows from the decoder to
// the ID/EX logic, the operation enums of the ALU, multiplier/divider and CSR
// unit, the custom SDOTP opcode, and the address map of the digital block.
// The SIMD sum-of-dot-product operation (4 x INT8 or 8 x INT4, signed, with
// the destination register as accumulator) follows the paper; its binary
// encoding and the whole address map are this design's own choices.
package maupiti_pkg;

  // ---------------------------------------------------------------- opcodes
  localparam logic [6:0] OPC_LOAD     = 7'b0000011;
  localparam logic [6:0] OPC_CUSTOM0  = 7'b0001011;  // SDOTP lives here
  localparam logic [6:0] OPC_MISC_MEM = 7'b0001111;
  localparam logic [6:0] OPC_OP_IMM   = 7'b0010011;
  localparam logic [6:0] OPC_AUIPC    = 7'b0010111;
  localparam logic [6:0] OPC_STORE    = 7'b0100011;
  localparam logic [6:0] OPC_OP       = 7'b0110011;
  localparam logic [6:0] OPC_LUI      = 7'b0110111;
  localparam logic [6:0] OPC_BRANCH   = 7'b1100011;
  localparam logic [6:0] OPC_JALR     = 7'b1100111;
  localparam logic [6:0] OPC_JAL      = 7'b1101111;
  localparam logic [6:0] OPC_SYSTEM   = 7'b1110011;

  // SDOTP: R-type on custom-0, funct7 = 0, funct3 selects the lane width.
  localparam logic [2:0] F3_SDOTP8 = 3'b000;  // four signed 8-bit lanes
  localparam logic [2:0] F3_SDOTP4 = 3'b001;  // eight signed 4-bit lanes

  // ---------------------------------------------------------------- ALU
  typedef enum logic [4:0] {
    ALU_ADD, ALU_SUB, ALU_XOR, ALU_OR, ALU_AND,
    ALU_SLL, ALU_SRL, ALU_SRA, ALU_SLT, ALU_SLTU,
    ALU_EQ, ALU_NE, ALU_LT, ALU_GE, ALU_LTU, ALU_GEU,
    ALU_SDOTP8, ALU_SDOTP4
  } alu_op_e;

  typedef enum logic [1:0] {OPA_RF, OPA_PC, OPA_ZERO} opa_sel_e;
  typedef enum logic [0:0] {OPB_RF, OPB_IMM} opb_sel_e;
  typedef enum logic [2:0] {WB_ALU, WB_MEM, WB_MD, WB_CSR, WB_PCN} wb_sel_e;

  // ---------------------------------------------------------------- Mult/Div
  typedef enum logic [2:0] {
    MD_MUL, MD_MULH, MD_MULHSU, MD_MULHU, MD_DIV, MD_DIVU, MD_REM, MD_REMU
  } md_op_e;

  // ---------------------------------------------------------------- CSR
  typedef enum logic [1:0] {CSR_NONE, CSR_WRITE, CSR_SET, CSR_CLEAR} csr_op_e;

  localparam logic [11:0] CSR_MSTATUS   = 12'h300;
  localparam logic [11:0] CSR_MISA      = 12'h301;
  localparam logic [11:0] CSR_MTVEC     = 12'h305;
  localparam logic [11:0] CSR_MSCRATCH  = 12'h340;
  localparam logic [11:0] CSR_MEPC      = 12'h341;
  localparam logic [11:0] CSR_MCAUSE    = 12'h342;
  localparam logic [11:0] CSR_MTVAL     = 12'h343;
  localparam logic [11:0] CSR_MCYCLE    = 12'hB00;
  localparam logic [11:0] CSR_MINSTRET  = 12'hB02;
  localparam logic [11:0] CSR_MCYCLEH   = 12'hB80;
  localparam logic [11:0] CSR_MINSTRETH = 12'hB82;
  localparam logic [11:0] CSR_CYCLE     = 12'hC00;
  localparam logic [11:0] CSR_INSTRET   = 12'hC02;
  localparam logic [11:0] CSR_CYCLEH    = 12'hC80;
  localparam logic [11:0] CSR_INSTRETH  = 12'hC82;
  localparam logic [11:0] CSR_MHARTID   = 12'hF14;

  // Exception causes (RISC-V privileged spec)
  localparam logic [31:0] EXC_ILLEGAL    = 32'd2;
  localparam logic [31:0] EXC_BREAKPOINT = 32'd3;
  localparam logic [31:0] EXC_LD_MISALIGN = 32'd4;
  localparam logic [31:0] EXC_ST_MISALIGN = 32'd6;
  localparam logic [31:0] EXC_ECALL_M    = 32'd11;

  typedef enum logic [1:0] {PC_JUMP, PC_TRAP, PC_MRET} pc_sel_e;

  // ---------------------------------------------------------------- decode
  typedef struct packed {
    logic        illegal;
    alu_op_e     alu_op;
    opa_sel_e    opa_sel;
    opb_sel_e    opb_sel;
    logic [31:0] imm;
    logic        rf_we;
    wb_sel_e     wb_sel;
    logic        use_rs3;     // reads rd through RdC (SDOTP)
    logic        branch;
    logic        jal;
    logic        jalr;
    logic        mem_req;
    logic        mem_we;
    logic [1:0]  mem_size;    // 0 byte, 1 half, 2 word
    logic        mem_signed;
    logic        md_en;
    md_op_e      md_op;
    csr_op_e     csr_op;
    logic        csr_imm;     // csrrXi: rs1 field is a zero-extended immediate
    logic        csr_access;
    logic        ecall;
    logic        ebreak;
    logic        mret;
  } ctrl_t;

  // ---------------------------------------------------------------- memory map
  localparam logic [31:0] BOOT_BASE   = 32'h0000_0000;
  localparam logic [31:0] IRAM_BASE   = 32'h0001_0000;
  localparam logic [31:0] DRAM_BASE   = 32'h0002_0000;
  localparam logic [31:0] REGS_BASE   = 32'h0003_0000;
  localparam logic [31:0] OTP_BASE    = 32'h0003_1000;
  localparam logic [31:0] FRAME_BASE  = 32'h0003_2000;

  // ---------------------------------------------------------------- bus
  // Memory-side bus of the digital block: the master raises req with the
  // address (and write data); the slave answers in the next cycle with
  // rvalid and, for reads, rdata. Slaves always accept (no wait states).
  typedef struct packed {
    logic        req;
    logic        we;
    logic [3:0]  be;
    logic [31:0] addr;
    logic [31:0] wdata;
  } bus_req_t;

  typedef struct packed {
    logic        rvalid;
    logic [31:0] rdata;
  } bus_rsp_t;

endpackage
