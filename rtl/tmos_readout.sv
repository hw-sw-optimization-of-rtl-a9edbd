// tmos_readout: digital readout of the 16x16 TMOS infrared array of MAUPITI.
//
// The array has CHAINS analog front-end chains, each converting one row of
// COLS pixels at a time, so a frame of ROWS rows is acquired in
// ROWS/CHAINS steps (two for 16 rows and 8 chains). Once enabled, a frame
// starts every FRAME_CYCLES clock cycles (2,000,000 cycles: 10 frames per
// second at 20 MHz). For each step the block pulses afe_start_o with the
// step number on afe_step_o, waits for afe_done_i and copies the CHAINS rows
// on afe_data_i (chain c delivers row step*CHAINS + c) into the frame buffer.
// After the last step it sets frame_ready and increments the frame counter.
// A frame period that arrives while a frame is still being read is skipped.
//
// Bus view (word offsets from FRAME_BASE, answers one cycle after request):
//   0x000..0x1FC  frame buffer, pixel 2k in bits 15:0 and pixel 2k+1 in
//                 bits 31:16 of word k; pixels in row-major order
//   0x200         status/control: read {frame_count[15:0], 13'b0, busy,
//                 enable, frame_ready}; write bit 0 = enable, bit 1 = 1
//                 clears frame_ready
// The array size, the number of chains, the two-step acquisition, the 20 MHz
// clock and the 10 FPS rate come from the paper. Which rows form each step,
// the pixel width, the start/done handshake and the register layout are not
// published and are this design's own choices.
module tmos_readout
  import maupiti_pkg::*;
#(
  parameter int unsigned ROWS         = 16,
  parameter int unsigned COLS         = 16,
  parameter int unsigned CHAINS       = 8,
  parameter int unsigned PIX_W        = 16,
  parameter int unsigned FRAME_CYCLES = 2_000_000
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  // analog front end
  output logic     afe_start_o,
  output logic [$clog2(ROWS/CHAINS > 1 ? ROWS/CHAINS : 2)-1:0] afe_step_o,
  input  logic     afe_done_i,
  input  logic [CHAINS-1:0][COLS-1:0][PIX_W-1:0] afe_data_i,
  // bus
  input  bus_req_t req_i,
  output bus_rsp_t rsp_o,
  output logic     frame_ready_o
);
  localparam int unsigned STEPS = ROWS / CHAINS;
  localparam int unsigned SW    = $clog2(STEPS > 1 ? STEPS : 2);
  localparam int unsigned NPIX  = ROWS * COLS;
  localparam int unsigned TW    = $clog2(FRAME_CYCLES);

  typedef enum logic [1:0] {RD_IDLE, RD_START, RD_WAIT} rd_state_e;
  rd_state_e     state_q;
  logic [SW-1:0] step_q;
  logic [TW-1:0] timer_q;
  logic [15:0]   frame_cnt_q;
  logic          enable_q, ready_q, tick;
  logic [PIX_W-1:0] fb_q [NPIX];

  assign tick = enable_q && (timer_q == TW'(FRAME_CYCLES - 1));

  // ------------------------------------------------------------- sequencer
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= RD_IDLE; step_q <= '0; timer_q <= '0; frame_cnt_q <= '0;
    end else begin
      if (!enable_q || tick) timer_q <= '0;
      else                   timer_q <= timer_q + TW'(1);
      unique case (state_q)
        RD_IDLE:  if (tick) begin step_q <= '0; state_q <= RD_START; end
        RD_START: state_q <= RD_WAIT;
        default: if (afe_done_i) begin
          if (step_q == SW'(STEPS - 1)) begin
            state_q     <= RD_IDLE;
            frame_cnt_q <= frame_cnt_q + 16'd1;
          end else begin
            step_q  <= step_q + SW'(1);
            state_q <= RD_START;
          end
        end
      endcase
    end
  end

  assign afe_start_o = (state_q == RD_START);
  assign afe_step_o  = step_q;

  // ------------------------------------------------------------- frame buffer
  always_ff @(posedge clk_i) begin
    if (state_q == RD_WAIT && afe_done_i)
      for (int c = 0; c < CHAINS; c++)
        for (int x = 0; x < COLS; x++)
          fb_q[(int'(step_q) * CHAINS + c) * COLS + x] <= afe_data_i[c][x];
  end

  // ------------------------------------------------------------- bus
  logic        is_status;
  logic [$clog2(NPIX)-2:0] widx;
  assign is_status = req_i.addr[9];
  assign widx      = req_i.addr[$clog2(NPIX):2];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      enable_q <= 1'b0; ready_q <= 1'b0; rsp_o <= '0;
    end else begin
      if (state_q == RD_WAIT && afe_done_i && step_q == SW'(STEPS - 1)) ready_q <= 1'b1;
      rsp_o.rvalid <= req_i.req;
      if (req_i.req) begin
        if (is_status)
          rsp_o.rdata <= {frame_cnt_q, 13'b0, state_q != RD_IDLE, enable_q, ready_q};
        else
          rsp_o.rdata <= {16'(fb_q[2 * widx + 1]), 16'(fb_q[2 * widx])};
        if (req_i.we && is_status && req_i.be[0]) begin
          enable_q <= req_i.wdata[0];
          if (req_i.wdata[1]) ready_q <= 1'b0;
        end
      end
    end
  end

  assign frame_ready_o = ready_q;
endmodule
