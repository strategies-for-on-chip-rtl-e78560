// tb_bit_shuffle -- checks the worked example (8 pixels [1,2,3,1,0,2,3,1] of
// 9 bits give block 0 = 179) on an 8-pixel instance, and 2000 random groups
// of 16 nine-bit pixels on the default instance against the loop reference.
//
// The worked example is the one of the bit shuffling description; the random
// groups and their count are this testbench's choice. Combinational DUT: each
// group is checked 1 time unit after it is applied.
module tb_bit_shuffle;
  import tb_ref_pkg::*;

  logic [8:0]  pix8  [8];
  logic [7:0]  blk8  [9];
  logic [8:0]  pix16 [16];
  logic [15:0] blk16 [9];
  int checks = 0, failures = 0;

  bit_shuffle #(.N(8), .B(9)) dut8  (.pix(pix8),  .blk(blk8));
  bit_shuffle                 dut16 (.pix(pix16), .blk(blk16));

  initial begin
    int unsigned p[$], q[$];
    int unsigned ex[8] = '{1, 2, 3, 1, 0, 2, 3, 1};
    for (int i = 0; i < 8; i++) pix8[i] = 9'(ex[i]);
    #1;
    checks++;
    if (blk8[0] != 8'd179) begin failures++; $display("FAIL block0 = %0d", blk8[0]); end
    for (int j = 2; j < 9; j++) begin
      checks++;
      if (blk8[j] != 0) begin failures++; $display("FAIL block%0d = %0d", j, blk8[j]); end
    end
    repeat (2000) begin
      p.delete();
      for (int i = 0; i < 16; i++) begin
        pix16[i] = $urandom_range(3) == 0 ? 9'($urandom) : 9'($urandom_range(5));
        p.push_back(pix16[i]);
      end
      shuffle_ref(p, 9, q);
      #1;
      for (int j = 0; j < 9; j++) begin
        checks++;
        if (blk16[j] != 16'(q[j])) begin
          failures++;
          $display("FAIL block %0d: %h vs %h", j, blk16[j], q[j]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
