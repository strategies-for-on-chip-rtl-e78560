// coalescer -- coalescing stage of the edge compressor.
//
// The zeromask encoder delivers one fragment of 1..MAXLEN words every clock;
// the I/O side wants fixed-size blocks of BUF_WORDS words (16 x 16 bits = 256
// bits by default). The Selector (coalesce_selector) tracks the fill position
// and decides when the buffer is full; the STBuf (coalesce_stbuf) shifts each
// fragment into place and emits the full buffer. Fragments are packed back to
// back with no padding; a fragment that does not fit is split, the rest
// starting the next buffer. Since MAXLEN <= BUF_WORDS at most one buffer is
// emitted per clock, so the stage never stalls. A flush request on a clock
// without a fragment emits a partly filled buffer, zero-padded (used at the
// end of each frame).
//
// Timing: a fragment presented at clock edge t is in a block that appears on
// out_data with out_valid after edge t at the earliest. The 256-bit block and
// the Selector/STBuf structure follow the design description; splitting and
// flushing are this design's own choices.
module coalescer #(
  parameter int unsigned BUF_WORDS = 16,
  parameter int unsigned MAXLEN    = 10,
  parameter int unsigned W         = 16,
  parameter int unsigned LW        = $clog2(MAXLEN + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic          flush_req,
  input  logic [LW-1:0] len,
  input  logic [W-1:0]  frag     [MAXLEN],
  output logic          out_valid,   // "flushed": out_data holds a block
  output logic [W-1:0]  out_data [BUF_WORDS]
);

  localparam int unsigned PW = $clog2(BUF_WORDS);

  logic [PW-1:0] pos;
  logic          flushed;

  coalesce_selector #(.BUF_WORDS(BUF_WORDS), .MAXLEN(MAXLEN), .LW(LW), .PW(PW)) u_selector (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (in_valid),
    .flush_req (flush_req),
    .len       (len),
    .pos       (pos),
    .flushed   (flushed)
  );

  coalesce_stbuf #(.BUF_WORDS(BUF_WORDS), .MAXLEN(MAXLEN), .W(W), .LW(LW), .PW(PW)) u_stbuf (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (in_valid),
    .len       (len),
    .frag      (frag),
    .pos       (pos),
    .flushed   (flushed),
    .out_valid (out_valid),
    .out_data  (out_data)
  );

  // A fragment never holds more words than its frag array.
  assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> (len >= 1 && len <= LW'(MAXLEN)))
    else $error("coalescer: fragment length %0d out of range", len);

endmodule
