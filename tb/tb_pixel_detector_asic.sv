// tb_pixel_detector_asic -- end-to-end test of the detector readout on a
// 32 x 16 pixel array (two 16-row strips, FIFO depth 4).
//
// 1. Loads a random noise floor into every pixel through the configuration
//    chains.
// 2. Runs frames of random samples: per pixel a random gain range and ADC
//    value, with the share of noise-level (denoised) pixels varying from frame
//    to frame, and frame periods from the minimum (COLS+1 clocks) upwards.
//    The I/O side accepts blocks on 85 % of the clocks; in some frames it
//    holds tx_ready low until a FIFO holds two blocks (back-pressure without
//    loss). For each
//    strip the reference computes denoise -> encode -> bit shuffle ->
//    zeromask -> 16-word blocks (last block of each frame zero-padded) and
//    every block read from tx_data is compared with it, in order.
// 3. Holds tx_ready low over dense frames until a FIFO overflows, then sends
//    a frame sync during a readout and expects readout_overrun.
// It counts how often each mechanism happened -- denoising, each of the six
// encoding regions, all-zero and full-length fragments, fragments split
// across blocks, zero-padded end-of-frame blocks, FIFO back-pressure, FIFO
// overflow, readout overrun -- and counts a failure for any that never did.
// The data path and its tables are the design description's; the framing,
// the zero padding, the FIFO policy and the reduced size are this design's.
module tb_pixel_detector_asic;
  import xpd_pkg::*;
  import tb_ref_pkg::*;

  localparam int ROWS = 32, COLS = 16, N_PIX = 16, NG = ROWS / N_PIX, DEPTH = 4;

  logic  clk = 0, rst_n = 0, frame_sync = 0, cfg_shift = 0;
  adc_t  adc  [ROWS][COLS];
  gain_e gain [ROWS][COLS];
  adc_t  cfg_in [ROWS];
  logic  tx_valid [NG], tx_ready [NG], fifo_overflow [NG], readout_overrun;
  logic [255:0] tx_data [NG];
  logic [15:0]  fifo_drops [NG];
  logic [2:0]   fifo_level [NG];

  pixel_detector_asic #(.ROWS(ROWS), .COLS(COLS), .N_PIX(N_PIX), .FIFO_DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;
  int cycles = 0;
  always @(posedge clk) cycles++;

  int checks = 0, failures = 0;
  int unsigned nf [ROWS][COLS];
  int unsigned cur [NG][$];
  logic [255:0] blocks [NG][$];
  bit   checking = 1;

  // Mechanism counters.
  int n_denoise = 0, n_region[7], n_empty = 0, n_full = 0, n_split = 0, n_pad = 0;
  int n_backpressure = 0, n_blocks = 0;

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  function automatic void cut_blocks(int g, bit pad);
    while (cur[g].size() >= 16 || (pad && cur[g].size() > 0)) begin
      logic [255:0] b;
      b = '0;
      if (cur[g].size() < 16) n_pad++;
      for (int j = 0; j < 16; j++)
        if (cur[g].size() > 0) b[j*16 +: 16] = 16'(cur[g].pop_front());
      blocks[g].push_back(b);
    end
  endfunction

  // Reference for one frame.
  task automatic model_frame(int unsigned gs [ROWS][COLS], int unsigned as [ROWS][COLS]);
    for (int g = 0; g < NG; g++) begin
      for (int c = COLS - 1; c >= 0; c--) begin
        int unsigned p[$], blk[$], l, prev_n;
        p.delete();
        for (int i = 0; i < N_PIX; i++) begin
          int unsigned r, d;
          r = g * N_PIX + i;
          d = denoise_ref(gs[r][c], as[r][c], nf[r][c]);
          if (d != as[r][c]) n_denoise++;
          n_region[region_ref(gs[r][c], d)]++;
          p.push_back(enc_ref(gs[r][c], d));
        end
        shuffle_ref(p, 9, blk);
        prev_n = cur[g].size();
        l = zm_ref(blk, cur[g]);
        if (l == 1) n_empty++;
        if (l == 10) n_full++;
        if (prev_n + l > 16) n_split++;
        cut_blocks(g, 0);
      end
      cut_blocks(g, 1);
    end
  endtask

  // Output side: random ready, compare every block taken.
  always @(posedge clk) begin
    for (int g = 0; g < NG; g++) begin
      if (rst_n && fifo_level[g] >= 2) n_backpressure++;
      if (rst_n && checking && tx_valid[g] && tx_ready[g]) begin
        n_blocks++;
        checks++;
        if (blocks[g].size() == 0) begin
          failures++; $display("FAIL strip %0d: unexpected block", g);
        end else begin
          logic [255:0] e;
          e = blocks[g].pop_front();
          if (tx_data[g] != e) begin
            failures++; $display("FAIL strip %0d block: %h exp %h", g, tx_data[g], e);
          end
        end
      end
    end
  end

  // hold mode: ready stays low until a FIFO holds two blocks, which makes
  // back-pressure happen without ever filling the FIFO.
  int ready_pct = 85;
  bit hold = 0;
  always @(negedge clk)
    for (int g = 0; g < NG; g++)
      tx_ready[g] = hold ? (fifo_level[g] >= 2) : ($urandom_range(99) < ready_pct);

  task automatic run_frame(int pz, int period);
    int unsigned gs [ROWS][COLS], as [ROWS][COLS];
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) begin
      gs[r][c] = $urandom_range(3);
      if ($urandom_range(99) < pz) begin
        gs[r][c] = 0;
        as[r][c] = $urandom_range(nf[r][c]);     // at or below the floor
      end else begin
        as[r][c] = ($urandom_range(1) == 1) ? $urandom_range(1023) : $urandom_range(4095);
      end
      gain[r][c] = gain_e'(gs[r][c]);
      adc[r][c]  = adc_t'(as[r][c]);
    end
    model_frame(gs, as);
    if (checking)   // let a backlog from the previous frame drain first
      for (int k = 0; k < 50 && (fifo_level[0] > 1 || fifo_level[1] > 1); k++) @(posedge clk);
    #1 frame_sync = 1;
    @(posedge clk); #1 frame_sync = 0;
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) adc[r][c] = adc_t'($urandom);
    repeat (period - 1) @(posedge clk);
    #1;
  endtask

  initial begin
    for (int r = 0; r < ROWS; r++) begin
      cfg_in[r] = '0;
      for (int c = 0; c < COLS; c++) begin adc[r][c] = '0; gain[r][c] = GAIN_HIGH; end
    end
    for (int i = 0; i < 7; i++) n_region[i] = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // 1. Noise floors.
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) nf[r][c] = $urandom_range(120);
    for (int s = 0; s < COLS; s++) begin
      for (int r = 0; r < ROWS; r++) cfg_in[r] = adc_t'(nf[r][COLS-1-s]);
      cfg_shift = 1;
      @(posedge clk); #1;
    end
    cfg_shift = 0;
    // 2. Frames.
    for (int fr = 0; fr < 60; fr++) begin
      int pz;
      pz = (fr % 5 == 0) ? 0 : (fr % 5 == 1) ? 100 : (fr % 5 == 2) ? 97 : $urandom_range(99);
      hold = (fr % 7 == 3);
      run_frame(pz, (fr % 3 == 0) ? COLS + 1 : COLS + 1 + $urandom_range(30));
    end
    // Drain.
    hold = 0;
    ready_pct = 100;
    repeat (100) @(posedge clk);
    #1;
    for (int g = 0; g < NG; g++) begin
      chk(blocks[g].size() == 0, $sformatf("strip %0d: %0d blocks missing", g, blocks[g].size()));
      chk(!fifo_overflow[g], "no overflow during the checked frames");
    end
    chk(!readout_overrun, "no overrun during the checked frames");
    // 3. Overflow, then overrun.
    checking = 0;
    ready_pct = 0;
    hold = 0;
    for (int fr = 0; fr < 4; fr++) run_frame(0, COLS + 1);
    repeat (10) @(posedge clk);
    #1;
    for (int g = 0; g < NG; g++) chk(fifo_overflow[g] && fifo_drops[g] > 0, "FIFO overflow flagged");
    frame_sync = 1; @(posedge clk); #1 frame_sync = 0;
    repeat (4) @(posedge clk);
    #1 frame_sync = 1; @(posedge clk); #1 frame_sync = 0;
    repeat (3) @(posedge clk);
    #1 chk(readout_overrun, "readout overrun flagged");
    // Mechanism coverage.
    for (int i = 1; i <= 6; i++) chk(n_region[i] > 0, $sformatf("region %0d used", i));
    chk(n_denoise > 0, "denoising happened");
    chk(n_empty > 0, "all-zero fragment");
    chk(n_full > 0, "full-length fragment");
    chk(n_split > 0, "fragment split across blocks");
    chk(n_pad > 0, "zero-padded end-of-frame block");
    chk(n_backpressure > 0, "FIFO back-pressure");
    $display("blocks=%0d denoised=%0d regions=%0d/%0d/%0d/%0d/%0d/%0d empty=%0d full=%0d split=%0d padded=%0d backpressure=%0d",
             n_blocks, n_denoise, n_region[1], n_region[2], n_region[3], n_region[4], n_region[5],
             n_region[6], n_empty, n_full, n_split, n_pad, n_backpressure);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cycles == 200000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
