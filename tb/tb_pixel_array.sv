// tb_pixel_array -- 4 x 6 pixel array. Loads a random noise floor into every
// pixel through the configuration chains, applies random frames and checks
// that, starting two clocks after the frame sync, col_out[r] presents the
// encoded pixels of row r from column COLS-1 down to 0 on consecutive clocks,
// followed by zeros.
//
// The reduced size keeps the run short; the column-per-clock readout order is
// the design description's, the two-clock start is this design's.
module tb_pixel_array;
  import xpd_pkg::*;
  import tb_ref_pkg::*;

  localparam int ROWS = 4, COLS = 6;

  logic  clk = 0, rst_n = 0, frame_sync = 0, cfg_shift = 0;
  adc_t  adc  [ROWS][COLS];
  gain_e gain [ROWS][COLS];
  adc_t  cfg_in [ROWS];
  enc_t  col_out [ROWS];
  int    checks = 0, failures = 0, cycles = 0;
  int unsigned nf [ROWS][COLS];
  int unsigned a_s [ROWS][COLS], g_s [ROWS][COLS];

  pixel_array #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    for (int r = 0; r < ROWS; r++) begin
      cfg_in[r] = '0;
      for (int c = 0; c < COLS; c++) begin
        adc[r][c] = '0; gain[r][c] = GAIN_HIGH;
      end
    end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // Noise floors: the value shifted in at step s ends in column COLS-1-s.
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) nf[r][c] = $urandom_range(300);
    for (int s = 0; s < COLS; s++) begin
      for (int r = 0; r < ROWS; r++) cfg_in[r] = adc_t'(nf[r][COLS-1-s]);
      cfg_shift = 1;
      @(posedge clk); #1;
    end
    cfg_shift = 0;
    for (int fr = 0; fr < 40; fr++) begin
      for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) begin
        g_s[r][c] = $urandom_range(3);
        a_s[r][c] = ($urandom_range(1) == 1) ? $urandom_range(350) : $urandom_range(4095);
        gain[r][c] = gain_e'(g_s[r][c]);
        adc[r][c]  = adc_t'(a_s[r][c]);
      end
      frame_sync = 1;
      @(posedge clk); #1 frame_sync = 0;
      for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) adc[r][c] = adc_t'($urandom);
      @(posedge clk); #1;
      for (int k = 0; k < COLS + 2; k++) begin
        for (int r = 0; r < ROWS; r++) begin
          int unsigned e;
          e = (k < COLS) ? enc_ref(g_s[r][COLS-1-k], denoise_ref(g_s[r][COLS-1-k], a_s[r][COLS-1-k], nf[r][COLS-1-k])) : 0;
          checks++;
          if (col_out[r] != enc_t'(e)) begin
            failures++;
            $display("FAIL frame %0d row %0d step %0d: got %0d exp %0d", fr, r, k, col_out[r], e);
          end
        end
        @(posedge clk); #1;
      end
    end
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
