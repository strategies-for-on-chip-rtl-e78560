// pixel_detector_asic -- digital part of a hybrid X-ray pixel detector ASIC
// with in-pixel encoding and streaming zeromask edge compression.
//
// Data path, per frame:
//   * every pixel captures its 12-bit ADC result and 2 gain bits on the frame
//     sync pulse, denoises the sample against its programmed noise floor and
//     encodes it to 9 bits (pixel_array / pixel_cell);
//   * each pixel row is a shift chain; during the next COLS clocks one full
//     pixel column (ROWS x 9 bits) reaches the array edge per clock, framed by
//     readout_ctrl (col_valid, frame_end);
//   * the rows are split into ROWS/N_PIX strips of N_PIX rows; each strip has
//     its own edge_compressor (bit shuffle -> zeromask -> coalescing) that
//     takes one column slice per clock without stalling and emits 256-bit
//     blocks, and its own elastic_fifo in front of the I/O channel.
//
// Interface: the analog front-ends, ADCs and high-speed transmitters are not
// part of this RTL. The per-pixel ADC values and gain bits are inputs; each
// strip's FIFO read port (tx_valid / tx_ready / tx_data) is where a serializer
// connects. In tx_data[g], word j (16 bits) of a block is bits [16j+15:16j];
// word 0 is the first word of the block. Strip g holds rows g*N_PIX ..
// g*N_PIX+N_PIX-1; row g*N_PIX+i is pixel i of that strip's compressor.
// Noise floors are loaded through cfg_shift / cfg_in (one chain per row).
//
// Timing: frame_sync is a one-clock pulse; frames must be at least COLS+1
// clocks apart (readout_overrun flags a violation). The first column of a
// frame reaches the compressors two clocks after frame_sync; the last block
// of a frame enters the FIFO COLS+4 clocks after frame_sync.
//
// Architecture and default sizes (256 x 256 pixels, 16-pixel shuffled
// compressors, 256-bit blocks) follow the design description; the FIFO depth,
// the framing signals and the port bundling are this design's own choices.
module pixel_detector_asic
  import xpd_pkg::*;
#(
  parameter int unsigned ROWS       = 256,
  parameter int unsigned COLS       = 256,
  parameter int unsigned N_PIX      = 16,
  parameter int unsigned BUF_WORDS  = 16,
  parameter int unsigned FIFO_DEPTH = 8,
  parameter int unsigned NG         = ROWS / N_PIX,        // strips / compressors
  parameter int unsigned BLK_BITS   = BUF_WORDS * N_PIX    // bits per output block
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                frame_sync,
  input  adc_t                adc      [ROWS][COLS],
  input  gain_e               gain     [ROWS][COLS],
  input  logic                cfg_shift,
  input  adc_t                cfg_in   [ROWS],
  output logic                tx_valid [NG],
  input  logic                tx_ready [NG],
  output logic [BLK_BITS-1:0] tx_data  [NG],
  output logic                fifo_overflow [NG],   // sticky: a block was dropped
  output logic [15:0]         fifo_drops    [NG],   // number of dropped blocks
  output logic [$clog2(FIFO_DEPTH+1)-1:0] fifo_level [NG],
  output logic                readout_overrun
);

  enc_t col   [ROWS];
  logic col_valid, frame_end;

  pixel_array #(.ROWS(ROWS), .COLS(COLS)) u_array (
    .clk        (clk),
    .rst_n      (rst_n),
    .frame_sync (frame_sync),
    .adc        (adc),
    .gain       (gain),
    .cfg_shift  (cfg_shift),
    .cfg_in     (cfg_in),
    .col_out    (col)
  );

  readout_ctrl #(.COLS(COLS)) u_ctrl (
    .clk        (clk),
    .rst_n      (rst_n),
    .frame_sync (frame_sync),
    .col_valid  (col_valid),
    .frame_end  (frame_end),
    .overrun    (readout_overrun)
  );

  for (genvar g = 0; g < NG; g++) begin : g_strip
    enc_t              pix   [N_PIX];
    logic [N_PIX-1:0]  words [BUF_WORDS];
    logic [BLK_BITS-1:0] blk;
    logic              blk_valid;

    for (genvar i = 0; i < N_PIX; i++) begin : g_pix
      assign pix[i] = col[g*N_PIX + i];
    end

    edge_compressor #(.N_PIX(N_PIX), .PIX_BITS(ENC_BITS), .BUF_WORDS(BUF_WORDS)) u_comp (
      .clk       (clk),
      .rst_n     (rst_n),
      .col_valid (col_valid),
      .frame_end (frame_end),
      .pix       (pix),
      .out_valid (blk_valid),
      .out_data  (words)
    );

    for (genvar j = 0; j < BUF_WORDS; j++) begin : g_word
      assign blk[j*N_PIX +: N_PIX] = words[j];
    end

    elastic_fifo #(.WIDTH(BLK_BITS), .DEPTH(FIFO_DEPTH), .CW(16)) u_fifo (
      .clk        (clk),
      .rst_n      (rst_n),
      .in_valid   (blk_valid),
      .in_data    (blk),
      .out_valid  (tx_valid[g]),
      .out_ready  (tx_ready[g]),
      .out_data   (tx_data[g]),
      .level      (fifo_level[g]),
      .overflow   (fifo_overflow[g]),
      .drop_count (fifo_drops[g])
    );
  end

  initial begin
    assert (ROWS % N_PIX == 0) else $error("pixel_detector_asic: ROWS must be a multiple of N_PIX");
  end

endmodule
