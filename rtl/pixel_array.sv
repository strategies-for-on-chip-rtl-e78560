// pixel_array -- ROWS x COLS pixels read out by daisy-chained shift registers.
//
// Every pixel row is one shift chain: pixel (r, 0) is furthest from the
// array edge and pixel (r, COLS-1) is next to it. One clock after a frame sync
// every pixel holds its own encoded sample; from then on the whole frame moves
// one column towards the edge per clock, so col_out[r] shows column COLS-1,
// COLS-2, ..., 0 of row r on the COLS clocks that follow (the edge sees one
// full pixel column of ROWS values per clock). Zeros are shifted in behind.
//
// The noise-floor configuration chains run along the rows in the same
// direction: after COLS clocks with cfg_shift high, pixel (r, c) holds the
// value presented on cfg_in[r] at the (COLS-c)-th of those clocks.
//
// The design description names 128 x 128 to 256 x 256 pixels as the practical
// range. The top level instantiates this array at 256 x 256; the defaults
// here are the lower end of the range, 128 x 128, which keeps a stand-alone
// lint of this module within a modest memory budget.
module pixel_array
  import xpd_pkg::*;
#(
  parameter int unsigned ROWS = 128,
  parameter int unsigned COLS = 128
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  frame_sync,
  input  adc_t  adc       [ROWS][COLS],  // ADC result of each pixel
  input  gain_e gain      [ROWS][COLS],  // gain range of each pixel
  input  logic  cfg_shift,
  input  adc_t  cfg_in    [ROWS],        // noise floor entering each row
  output enc_t  col_out   [ROWS]         // column arriving at the edge
);

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    enc_t chain [COLS+1];
    adc_t cfg   [COLS+1];
    assign chain[0] = '0;
    assign cfg[0]   = cfg_in[r];

    for (genvar c = 0; c < COLS; c++) begin : g_col
      pixel_cell u_pixel (
        .clk        (clk),
        .rst_n      (rst_n),
        .frame_sync (frame_sync),
        .adc        (adc[r][c]),
        .gain       (gain[r][c]),
        .cfg_shift  (cfg_shift),
        .cfg_in     (cfg[c]),
        .cfg_out    (cfg[c+1]),
        .chain_in   (chain[c]),
        .chain_out  (chain[c+1])
      );
    end

    assign col_out[r] = chain[COLS];
  end

endmodule
