// tracer: behavioural model, simulation only, of the MAUPITI core's
// instruction tracer.
//
// The chip's tracer records the executed instruction stream. This model
// prints one line per retired instruction (cycle, PC, instruction bits and
// the register written, if any) to the simulation log while trace_en_i is
// high, and counts retired instructions on count_o. It watches the retire
// signals of the ID/EX stage and has no effect on execution. The paper names
// the tracer and shows it writing a trace file; the line format and printing
// to the log instead of a file are this model's own.
module tracer (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        trace_en_i,
  input  logic        valid_i,
  input  logic [31:0] pc_i,
  input  logic [31:0] instr_i,
  input  logic        rd_we_i,
  input  logic [4:0]  rd_i,
  input  logic [31:0] rd_wdata_i,
  output logic [31:0] count_o
);
  logic [31:0] cycle_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cycle_q <= '0;
      count_o <= '0;
    end else begin
      cycle_q <= cycle_q + 32'd1;
      if (valid_i) begin
        count_o <= count_o + 32'd1;
        if (trace_en_i) begin
          if (rd_we_i && rd_i != 5'd0)
            $display("%8d  %08x  %08x  x%0d=%08x", cycle_q, pc_i, instr_i, rd_i, rd_wdata_i);
          else
            $display("%8d  %08x  %08x", cycle_q, pc_i, instr_i);
        end
      end
    end
  end
endmodule
