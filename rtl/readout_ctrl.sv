// readout_ctrl -- frames the column readout of the pixel array.
//
// The pixels load their encoded samples one clock after frame_sync; the
// following COLS clocks each bring one valid pixel column to the array edge.
// This controller raises col_valid on exactly those COLS clocks and pulses
// frame_end on the clock after the last one, which the edge compressors use
// to send out their partly filled output buffers. A frame sync that arrives
// while a readout is still running restarts the readout (the pixels have
// already reloaded) and sets the sticky overrun flag: the frame period was
// shorter than COLS + 1 clocks and part of a frame was lost.
//
// The frame sync pulse and the shift-every-cycle readout follow the design
// description; the valid/flush framing and the overrun flag are this design's
// own choices, as the description does not say how the edge learns where a
// frame starts and ends.
module readout_ctrl #(
  parameter int unsigned COLS = 256
) (
  input  logic clk,
  input  logic rst_n,       // synchronous, active low
  input  logic frame_sync,  // one-clock pulse per frame
  output logic col_valid,   // a valid pixel column is at the array edge
  output logic frame_end,   // one-clock pulse after the last column
  output logic overrun      // sticky: a frame sync came during a readout
);

  localparam int unsigned CW = (COLS > 1) ? $clog2(COLS) : 1;

  logic          load_q;
  logic [CW-1:0] cnt_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      load_q    <= 1'b0;
      col_valid <= 1'b0;
      frame_end <= 1'b0;
      overrun   <= 1'b0;
      cnt_q     <= '0;
    end else begin
      load_q    <= frame_sync;
      frame_end <= 1'b0;
      if (load_q) begin
        if (col_valid) overrun <= 1'b1;
        col_valid <= 1'b1;
        cnt_q     <= '0;
      end else if (col_valid) begin
        if (cnt_q == CW'(COLS - 1)) begin
          col_valid <= 1'b0;
          frame_end <= 1'b1;
        end else begin
          cnt_q <= cnt_q + 1'b1;
        end
      end
    end
  end

endmodule
