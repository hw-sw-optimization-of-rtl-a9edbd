// compressed_decoder: expands 16-bit RISC-V compressed (RV32C) instructions
// into the equivalent 32-bit RV32I instruction, so that the main decoder only
// ever sees 32-bit encodings.
//
// An instruction is compressed when its two low bits are not 2'b11; a 32-bit
// instruction passes through unchanged. Reserved and RV64/floating-point-only
// compressed encodings set illegal_o. Combinational; it sits in the fetch
// stage in front of the pipeline register. The core runs the riscv32-imc ISA
// named in the paper; this expander is the standard RVC mapping.
module compressed_decoder
  import maupiti_pkg::*;
(
  input  logic [31:0] instr_i,
  output logic [31:0] instr_o,
  output logic        is_compressed_o,
  output logic        illegal_o
);
  logic [15:0] c;
  assign c = instr_i[15:0];
  assign is_compressed_o = (c[1:0] != 2'b11);

  always_comb begin
    instr_o   = instr_i;
    illegal_o = 1'b0;
    unique case (c[1:0])
      2'b00: begin
        unique case (c[15:13])
          3'b000: begin  // c.addi4spn
            instr_o = {2'b0, c[10:7], c[12:11], c[5], c[6], 2'b00, 5'd2, 3'b000, 2'b01, c[4:2], OPC_OP_IMM};
            illegal_o = (c[12:5] == 8'b0);
          end
          3'b010: instr_o = {5'b0, c[5], c[12:10], c[6], 2'b00, 2'b01, c[9:7], 3'b010, 2'b01, c[4:2], OPC_LOAD};  // c.lw
          3'b110: instr_o = {5'b0, c[5], c[12], 2'b01, c[4:2], 2'b01, c[9:7], 3'b010, c[11:10], c[6], 2'b00, OPC_STORE};  // c.sw
          default: illegal_o = 1'b1;
        endcase
      end
      2'b01: begin
        unique case (c[15:13])
          3'b000: instr_o = {{6{c[12]}}, c[12], c[6:2], c[11:7], 3'b000, c[11:7], OPC_OP_IMM};  // c.addi
          3'b001, 3'b101:  // c.jal / c.j
            instr_o = {c[12], c[8], c[10:9], c[6], c[7], c[2], c[11], c[5:3], {9{c[12]}}, 4'b0, ~c[15], OPC_JAL};
          3'b010: instr_o = {{6{c[12]}}, c[12], c[6:2], 5'b0, 3'b000, c[11:7], OPC_OP_IMM};  // c.li
          3'b011: begin
            if (c[11:7] == 5'd2) begin  // c.addi16sp
              instr_o = {{3{c[12]}}, c[4:3], c[5], c[2], c[6], 4'b0, 5'd2, 3'b000, 5'd2, OPC_OP_IMM};
            end else begin  // c.lui
              instr_o = {{15{c[12]}}, c[6:2], c[11:7], OPC_LUI};
            end
            illegal_o = ({c[12], c[6:2]} == 6'b0);
          end
          3'b100: begin
            unique case (c[11:10])
              2'b00: begin  // c.srli
                instr_o = {7'b0000000, c[6:2], 2'b01, c[9:7], 3'b101, 2'b01, c[9:7], OPC_OP_IMM};
                illegal_o = c[12];
              end
              2'b01: begin  // c.srai
                instr_o = {7'b0100000, c[6:2], 2'b01, c[9:7], 3'b101, 2'b01, c[9:7], OPC_OP_IMM};
                illegal_o = c[12];
              end
              2'b10: instr_o = {{6{c[12]}}, c[12], c[6:2], 2'b01, c[9:7], 3'b111, 2'b01, c[9:7], OPC_OP_IMM};  // c.andi
              default: begin
                unique case (c[6:5])
                  2'b00: instr_o = {7'b0100000, 2'b01, c[4:2], 2'b01, c[9:7], 3'b000, 2'b01, c[9:7], OPC_OP};  // c.sub
                  2'b01: instr_o = {7'b0000000, 2'b01, c[4:2], 2'b01, c[9:7], 3'b100, 2'b01, c[9:7], OPC_OP};  // c.xor
                  2'b10: instr_o = {7'b0000000, 2'b01, c[4:2], 2'b01, c[9:7], 3'b110, 2'b01, c[9:7], OPC_OP};  // c.or
                  default: instr_o = {7'b0000000, 2'b01, c[4:2], 2'b01, c[9:7], 3'b111, 2'b01, c[9:7], OPC_OP};  // c.and
                endcase
                illegal_o = c[12];
              end
            endcase
          end
          default:  // c.beqz / c.bnez
            instr_o = {{4{c[12]}}, c[6:5], c[2], 5'b0, 2'b01, c[9:7], 2'b00, c[13], c[11:10], c[4:3], c[12], OPC_BRANCH};
        endcase
      end
      2'b10: begin
        unique case (c[15:13])
          3'b000: begin  // c.slli
            instr_o = {7'b0, c[6:2], c[11:7], 3'b001, c[11:7], OPC_OP_IMM};
            illegal_o = c[12];
          end
          3'b010: begin  // c.lwsp
            instr_o = {4'b0, c[3:2], c[12], c[6:4], 2'b00, 5'd2, 3'b010, c[11:7], OPC_LOAD};
            illegal_o = (c[11:7] == 5'b0);
          end
          3'b100: begin
            if (!c[12]) begin
              if (c[6:2] == 5'b0) begin  // c.jr
                instr_o = {12'b0, c[11:7], 3'b000, 5'b0, OPC_JALR};
                illegal_o = (c[11:7] == 5'b0);
              end else begin  // c.mv
                instr_o = {7'b0, c[6:2], 5'b0, 3'b000, c[11:7], OPC_OP};
              end
            end else begin
              if (c[6:2] == 5'b0) begin
                if (c[11:7] == 5'b0) instr_o = 32'h0010_0073;  // c.ebreak
                else instr_o = {12'b0, c[11:7], 3'b000, 5'd1, OPC_JALR};  // c.jalr
              end else begin  // c.add
                instr_o = {7'b0, c[6:2], c[11:7], 3'b000, c[11:7], OPC_OP};
              end
            end
          end
          3'b110: instr_o = {4'b0, c[8:7], c[12], c[6:2], 5'd2, 3'b010, c[11:9], 2'b00, OPC_STORE};  // c.swsp
          default: illegal_o = 1'b1;
        endcase
      end
      default: ;  // 32-bit instruction
    endcase
  end
endmodule
