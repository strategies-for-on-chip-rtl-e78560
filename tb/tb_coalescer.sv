// tb_coalescer -- default coalescer (16-word blocks, fragments of 1..10 words).
// Random fragments arrive on most clocks, with occasional idle clocks and
// end-of-frame flush requests. The reference keeps the stream of words as a
// queue; every block must equal the next 16 words, a flushed block the
// remaining words padded with zeros. The cycle of each block is checked too:
// a block leaves on the clock right after the fragment that filled it (no
// stall, at most one block per clock).
//
// Block size and fragment range follow the design description; the traffic
// pattern (idle clocks, flush requests) is this testbench's own.
module tb_coalescer;
  localparam int BUF = 16, MAXLEN = 10;

  logic clk = 0, rst_n = 0, in_valid = 0, flush_req = 0, out_valid;
  logic [3:0]  len = '0;
  logic [15:0] frag [MAXLEN];
  logic [15:0] out_data [BUF];
  int checks = 0, failures = 0, cycles = 0;
  int n_blocks = 0, n_split = 0, n_flushed = 0;

  coalescer dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  int unsigned cur[$];        // words of the block being filled
  int unsigned blocks[$][$];  // expected blocks not yet seen
  int          due[$];        // clock at which each expected block must appear

  initial begin
    for (int i = 0; i < MAXLEN; i++) frag[i] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int it = 0; it < 5000; it++) begin
      int unsigned l;
      in_valid = 0; flush_req = 0; len = '0;
      if ($urandom_range(19) == 0) begin
        flush_req = 1;
        if (cur.size() > 0) begin
          while (cur.size() < BUF) cur.push_back(0);
          blocks.push_back(cur); due.push_back(cycles + 1); cur.delete();
          n_flushed++;
        end
      end else if ($urandom_range(9) != 0) begin
        in_valid = 1;
        l = ($urandom_range(3) == 0) ? MAXLEN : $urandom_range(MAXLEN, 1);
        len = 4'(l);
        for (int i = 0; i < MAXLEN; i++) frag[i] = 16'($urandom);
        if (cur.size() + l > BUF) n_split++;
        for (int i = 0; i < l; i++) begin
          cur.push_back(frag[i]);
          if (cur.size() == BUF) begin
            blocks.push_back(cur); due.push_back(cycles + 1); cur.delete();
          end
        end
      end
      @(posedge clk); #1;
      if (out_valid) begin
        checks++;
        if (blocks.size() == 0) begin
          failures++; $display("FAIL unexpected block");
        end else begin
          int unsigned b[$];
          b = blocks.pop_front();
          if (due.pop_front() != cycles) begin
            failures++; $display("FAIL block late/early at cycle %0d", cycles);
          end
          for (int j = 0; j < BUF; j++) begin
            checks++;
            if (out_data[j] != 16'(b[j])) begin
              failures++; $display("FAIL block %0d word %0d: %h exp %h", n_blocks, j, out_data[j], b[j]);
            end
          end
        end
        n_blocks++;
      end
    end
    checks++;
    if (blocks.size() != 0) begin failures++; $display("FAIL %0d blocks never emitted", blocks.size()); end
    checks++;
    if (n_split == 0 || n_flushed == 0) begin failures++; $display("FAIL split/flush not exercised"); end
    $display("blocks=%0d split fragments=%0d flushed partial blocks=%0d", n_blocks, n_split, n_flushed);
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
