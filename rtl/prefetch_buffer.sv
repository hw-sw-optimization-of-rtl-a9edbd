// prefetch_buffer: instruction prefetcher and aligner of the MAUPITI core's
// fetch stage.
//
// It requests aligned 32-bit words from instruction memory ahead of
// execution and keeps up to DEPTH words, counting those still in flight, so
// that a memory with one cycle of latency can stream one word per cycle.
// Because compressed (16-bit) and 32-bit instructions mix, an instruction may
// start at any halfword and may straddle two words; the aligner presents the
// instruction at addr_o (rdata_o, upper half meaningless when it is 16 bits)
// once all its halves are buffered. A redirect (branch_i, with the target on
// addr_i) empties the buffer and marks every response still in flight to be
// dropped; no request is issued in that cycle.
// Memory protocol: instr_req_o/instr_gnt_i handshake, in-order responses
// flagged by instr_rvalid_i. The paper only names the prefetch buffer; the
// depth and structure are this design's own.
module prefetch_buffer #(
  parameter int unsigned DEPTH = 3
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        req_i,
  input  logic        branch_i,
  input  logic [31:0] addr_i,
  input  logic        ready_i,
  output logic        valid_o,
  output logic [31:0] rdata_o,
  output logic [31:0] addr_o,
  output logic        instr_req_o,
  input  logic        instr_gnt_i,
  output logic [31:0] instr_addr_o,
  input  logic        instr_rvalid_i,
  input  logic [31:0] instr_rdata_i
);
  localparam int unsigned CW = $clog2(DEPTH + 1);

  logic [31:0]   words_q [DEPTH];
  logic [CW-1:0] cnt_q, outst_q, discard_q;
  logic [31:0]   pc_q, fetch_q;
  logic          compressed, fire, pop, push;

  // ----------------------------------------------------------- aligner
  always_comb begin
    if (!pc_q[1]) begin
      rdata_o    = words_q[0];
      compressed = (words_q[0][1:0] != 2'b11);
      valid_o    = (cnt_q != '0);
    end else begin
      rdata_o    = {words_q[1][15:0], words_q[0][31:16]};
      compressed = (words_q[0][17:16] != 2'b11);
      valid_o    = compressed ? (cnt_q != '0) : (cnt_q > CW'(1));
    end
  end
  assign addr_o = pc_q;
  assign fire   = valid_o && ready_i && !branch_i;
  assign pop    = fire && (compressed ? pc_q[1] : 1'b1);
  assign push   = instr_rvalid_i && (discard_q == '0) && !branch_i;

  // ----------------------------------------------------------- requests
  assign instr_req_o  = req_i && !branch_i && ((cnt_q + outst_q) < CW'(DEPTH));
  assign instr_addr_o = fetch_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < DEPTH; i++) words_q[i] <= '0;
      cnt_q <= '0; outst_q <= '0; discard_q <= '0; pc_q <= '0; fetch_q <= '0;
    end else if (branch_i) begin
      pc_q      <= {addr_i[31:1], 1'b0};
      fetch_q   <= {addr_i[31:2], 2'b00};
      cnt_q     <= '0;
      outst_q   <= outst_q - CW'(instr_rvalid_i);
      discard_q <= outst_q - CW'(instr_rvalid_i);
    end else begin
      if (fire) pc_q <= pc_q + (compressed ? 32'd2 : 32'd4);
      if (instr_req_o && instr_gnt_i) fetch_q <= fetch_q + 32'd4;
      outst_q <= outst_q + CW'(instr_req_o && instr_gnt_i) - CW'(instr_rvalid_i);
      if (instr_rvalid_i && discard_q != '0) discard_q <= discard_q - CW'(1);
      // word queue: shift out on pop, append on push
      for (int i = 0; i < DEPTH; i++) begin
        if (pop && i < DEPTH - 1) words_q[i] <= words_q[i+1];
      end
      if (push) words_q[cnt_q - CW'(pop)] <= instr_rdata_i;
      cnt_q <= cnt_q + CW'(push) - CW'(pop);
    end
  end

  // The queue never overflows: requests are only issued while there is room.
  assert property (@(posedge clk_i) disable iff (!rst_ni) cnt_q <= CW'(DEPTH));
endmodule
