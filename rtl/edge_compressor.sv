// edge_compressor -- streaming zeromask compressor at the edge of the array.
//
// One instance serves a strip of N_PIX pixel rows. Every clock it takes the
// N_PIX encoded pixels of the column that leaves the array and runs them
// through three stages:
//   1. bit_shuffle : N_PIX pixels x PIX_BITS bits -> PIX_BITS blocks of N_PIX
//                    bits (16 x 9 -> 9 x 16 by default);
//   2. zm_encoder  : zeromask-encodes the PIX_BITS blocks into a fragment of
//                    1..PIX_BITS+1 words of N_PIX bits (registered);
//   3. coalescer   : packs the fragments into fixed blocks of BUF_WORDS words
//                    (16 x 16 = 256 bits by default).
// The compressor accepts a column on every clock with col_valid high and
// never stalls. frame_end, one clock after the last column of a frame, is
// delayed with the data and makes the coalescer emit its partly filled buffer,
// so each frame ends on a block boundary.
//
// Latency: the fragment of a column accepted at clock edge t reaches the
// coalescer after edge t; a block containing it leaves after edge t+1 at the
// earliest. The three-stage structure and default sizes follow
// the design description; frame-end flushing is this design's own choice.
module edge_compressor #(
  parameter int unsigned N_PIX     = 16,  // pixels (rows) per compressor
  parameter int unsigned PIX_BITS  = 9,   // bits per encoded pixel
  parameter int unsigned BUF_WORDS = 16   // words per output block
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 col_valid,
  input  logic                 frame_end,
  input  logic [PIX_BITS-1:0]  pix      [N_PIX],
  output logic                 out_valid,
  output logic [N_PIX-1:0]     out_data [BUF_WORDS]
);

  localparam int unsigned NW     = PIX_BITS;  // words after shuffling
  localparam int unsigned W      = N_PIX;     // bits per word after shuffling
  localparam int unsigned MAXLEN = NW + 1;
  localparam int unsigned LW     = $clog2(MAXLEN + 1);  // width of a length

  logic [W-1:0] blk  [NW];
  logic [W-1:0] frag [MAXLEN];
  logic         enc_valid, enc_flush;
  logic [LW-1:0] enc_len;

  bit_shuffle #(.N(N_PIX), .B(PIX_BITS)) u_shuffle (
    .pix (pix),
    .blk (blk)
  );

  zm_encoder #(.NW(NW), .W(W), .LW(LW)) u_encoder (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (col_valid),
    .in_flush  (frame_end),
    .in_data   (blk),
    .out_valid (enc_valid),
    .out_flush (enc_flush),
    .frag      (frag),
    .len       (enc_len)
  );

  coalescer #(.BUF_WORDS(BUF_WORDS), .MAXLEN(MAXLEN), .W(W), .LW(LW)) u_coalescer (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (enc_valid),
    .flush_req (enc_flush),
    .len       (enc_len),
    .frag      (frag),
    .out_valid (out_valid),
    .out_data  (out_data)
  );

endmodule
