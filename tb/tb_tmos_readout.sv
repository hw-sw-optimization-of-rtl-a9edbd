// tb_tmos_readout: checks the TMOS array readout with a shortened frame
// period (FRAME_CYCLES = 400) and a behavioural analog front end. The AFE
// model answers each afe_start pulse after a random 3..40 cycle conversion
// time with eight rows whose pixel values encode frame, row and column.
// Checked: two steps per frame with step numbers 0 then 1, frame starts
// exactly FRAME_CYCLES cycles apart, frame_ready rises after the second step,
// the status word (ready, enable, frame count) reads back correctly, writing
// bit 1 clears ready, every pixel of the frame buffer reads back in
// row-major order, and clearing enable stops acquisition.
module tb_tmos_readout;
  import maupiti_pkg::*;
  localparam int ROWS = 16, COLS = 16, CHAINS = 8, FC = 400;
  logic clk = 0, rst_n = 1;
  logic afe_start, afe_done, ready;
  logic [0:0] afe_step;
  logic [CHAINS-1:0][COLS-1:0][15:0] afe_data;
  bus_req_t req;
  bus_rsp_t rsp;
  int checks = 0, failures = 0, cycle = 0, frames_started = 0, last_start = -1;
  int steps_seen [$];

  tmos_readout #(.FRAME_CYCLES(FC)) dut (.clk_i(clk), .rst_ni(rst_n), .afe_start_o(afe_start),
    .afe_step_o(afe_step), .afe_done_i(afe_done), .afe_data_i(afe_data), .req_i(req), .rsp_o(rsp),
    .frame_ready_o(ready));
  always #5 clk = ~clk;
  initial #1 rst_n = 0;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  function automatic logic [15:0] pix(int f, int r, int c);
    return 16'((f & 15) << 12 | r << 4 | c) ^ 16'h0A50;
  endfunction

  // behavioural AFE: convert after a random delay, present rows, pulse done
  always @(posedge clk) cycle <= cycle + 1;
  initial begin
    afe_done = 0; afe_data = '0;
    forever begin
      @(posedge clk);
      if (afe_start === 1'b1) begin
        int st;
        st = int'(afe_step);
        steps_seen.push_back(st);
        if (st == 0) begin
          if (last_start >= 0) chk(cycle - last_start == FC, $sformatf("frame period %0d", cycle - last_start));
          last_start = cycle;
          frames_started++;
        end
        repeat ($urandom_range(40, 3)) @(negedge clk);
        for (int c = 0; c < CHAINS; c++)
          for (int x = 0; x < COLS; x++) afe_data[c][x] = pix(frames_started, st * CHAINS + c, x);
        afe_done = 1;
        @(negedge clk) afe_done = 0;
      end
    end
  end

  task automatic bus_read(logic [31:0] off, output logic [31:0] d);
    @(negedge clk) req = '{req: 1, we: 0, be: 4'hF, addr: FRAME_BASE + off, wdata: '0};
    @(negedge clk) req = '0;
    chk(rsp.rvalid === 1'b1, "rvalid");
    d = rsp.rdata;
  endtask
  task automatic bus_write(logic [31:0] off, logic [31:0] d);
    @(negedge clk) req = '{req: 1, we: 1, be: 4'hF, addr: FRAME_BASE + off, wdata: d};
    @(negedge clk) req = '0;
  endtask

  initial begin
    logic [31:0] d;
    req = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    bus_read(32'h200, d);
    chk(d === 32'h0, "status after reset");
    bus_write(32'h200, 32'h1);                          // enable
    for (int f = 1; f <= 4; f++) begin
      while (ready !== 1'b1) @(posedge clk);
      bus_read(32'h200, d);
      chk(d[0] === 1'b1 && d[1] === 1'b1, "status ready and enable");
      chk(d[31:16] === 16'(f), $sformatf("frame count %0d exp %0d", d[31:16], f));
      for (int w = 0; w < ROWS * COLS / 2; w++) begin
        bus_read(32'(4 * w), d);
        chk(d === {pix(f, (2*w+1) / COLS, (2*w+1) % COLS), pix(f, (2*w) / COLS, (2*w) % COLS)},
            $sformatf("frame %0d word %0d = %h", f, w, d));
      end
      bus_write(32'h200, 32'h3);                        // clear ready, keep enable
      @(negedge clk) chk(ready === 1'b0, "ready cleared");
    end
    bus_write(32'h200, 32'h0);                          // disable
    repeat (3 * FC) @(posedge clk);
    chk(frames_started == 4, $sformatf("acquisition stops when disabled (%0d frames)", frames_started));
    chk(steps_seen.size() == 8, "two steps per frame");
    foreach (steps_seen[i]) chk(steps_seen[i] == i % 2, "step order 0,1");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20 * FC) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
