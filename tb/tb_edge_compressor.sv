// tb_edge_compressor -- default edge compressor (16 pixels x 9 bits in,
// 256-bit blocks out). Streams random frames of columns with a varying share
// of zero pixels (one column per clock, no gaps inside a frame), ends every
// frame with frame_end and checks each emitted block against the reference
// (bit shuffle -> zeromask -> 16-word blocks, last block of a frame
// zero-padded). Also checks that the output keeps pace: the block holding the
// last column of a frame leaves at most 3 clocks after that column.
//
// The one-column-per-clock, no-stall rate is the requirement of the design
// description; the frame sizes, zero densities and the 3-clock bound (the
// pipeline depth of this implementation) are this testbench's choices.
module tb_edge_compressor;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, col_valid = 0, frame_end = 0, out_valid;
  logic [8:0]  pix [16];
  logic [15:0] out_data [16];
  int checks = 0, failures = 0, cycles = 0;
  int n_blocks = 0, n_full_frag = 0, n_empty_frag = 0;

  edge_compressor dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  int unsigned cur[$];
  int unsigned blocks[$][$];
  int last_frame_cycle;

  // Output checker.
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      int unsigned b[$];
      checks++;
      if (blocks.size() == 0) begin
        failures++; $display("FAIL unexpected block");
      end else begin
        b = blocks.pop_front();
        for (int j = 0; j < 16; j++) begin
          checks++;
          if (out_data[j] != 16'(b[j])) begin
            failures++; $display("FAIL block %0d word %0d: %h exp %h", n_blocks, j, out_data[j], b[j]);
          end
        end
      end
      n_blocks++;
    end
  end

  initial begin
    int unsigned p[$], blk[$], l;
    for (int i = 0; i < 16; i++) pix[i] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int fr = 0; fr < 60; fr++) begin
      int unsigned pz;
      pz = (fr % 4 == 0) ? 0 : (fr % 4 == 1) ? 100 : $urandom_range(99);
      for (int c = 0; c < 64; c++) begin
        p.delete();
        for (int i = 0; i < 16; i++) begin
          pix[i] = ($urandom_range(99) < pz) ? 9'd0 :
                   ($urandom_range(1) == 1) ? 9'($urandom_range(4, 1)) : 9'($urandom);
          p.push_back(pix[i]);
        end
        shuffle_ref(p, 9, blk);
        l = zm_ref(blk, cur);
        if (l == 10) n_full_frag++;
        if (l == 1) n_empty_frag++;
        while (cur.size() >= 16) begin
          int unsigned b[$];
          b.delete();
          for (int j = 0; j < 16; j++) b.push_back(cur.pop_front());
          blocks.push_back(b);
        end
        col_valid = 1;
        @(posedge clk); #1;
      end
      col_valid = 0;
      frame_end = 1;
      if (cur.size() > 0) begin
        while (cur.size() < 16) cur.push_back(0);
        blocks.push_back(cur); cur.delete();
      end
      @(posedge clk); #1 frame_end = 0;
      repeat (3) @(posedge clk);
      #1;
      checks++;
      if (blocks.size() != 0) begin
        failures++; $display("FAIL frame %0d: %0d blocks late", fr, blocks.size());
        blocks.delete();
      end
      repeat ($urandom_range(3)) @(posedge clk);
      #1;
    end
    checks++;
    if (n_full_frag == 0 || n_empty_frag == 0) begin failures++; $display("FAIL fragment extremes not reached"); end
    $display("blocks=%0d full fragments=%0d all-zero fragments=%0d", n_blocks, n_full_frag, n_empty_frag);
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
