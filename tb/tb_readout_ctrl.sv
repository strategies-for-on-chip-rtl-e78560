// tb_readout_ctrl -- COLS = 5. Checks that col_valid is high on exactly the
// 5 clocks starting two clock edges after the frame sync, that frame_end
// pulses once on the clock after, for frame periods of 6..9 clocks; then that
// a frame sync during a readout sets the sticky overrun flag.
//
// The framing (col_valid, frame_end, overrun) is this design's own; the rate
// of one column per clock is the design description's.
module tb_readout_ctrl;
  localparam int COLS = 5;

  logic clk = 0, rst_n = 0, frame_sync = 0;
  logic col_valid, frame_end, overrun;
  int   checks = 0, failures = 0, cycles = 0;

  readout_ctrl #(.COLS(COLS)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s (t=%0t)", what, $time);
    end
  endtask

  int prev_len;  // length of the previous frame if it ran into this one

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    prev_len = 0;
    for (int period = COLS + 1; period < COLS + 5; period++) begin
      repeat (3) begin
        frame_sync = 1;
        @(posedge clk); #1 frame_sync = 0;
        // step k = clocks since the frame-sync edge
        for (int k = 1; k < period; k++) begin
          chk(col_valid == (k >= 2 && k < 2 + COLS), $sformatf("col_valid step %0d", k));
          chk(frame_end == (k == 2 + COLS || (prev_len > 0 && k == 2 + COLS - prev_len)),
              $sformatf("frame_end step %0d", k));
          chk(overrun == 1'b0, "no overrun");
          @(posedge clk); #1;
        end
        prev_len = period;
      end
    end
    repeat (COLS + 3) @(posedge clk);
    #1;
    // Too short a frame period.
    frame_sync = 1; @(posedge clk); #1 frame_sync = 0;
    repeat (3) @(posedge clk);
    #1 frame_sync = 1; @(posedge clk); #1 frame_sync = 0;
    repeat (2) @(posedge clk);
    #1 chk(overrun == 1'b1, "overrun set");
    chk(col_valid == 1'b1, "readout restarted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cycles == 100000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
