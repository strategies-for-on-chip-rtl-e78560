// bit_shuffle -- bit-level transpose of a group of pixels (the bit shuffling
// stage in front of the zeromask encoder).
//
// N pixels of B bits, p(i)_j (pixel i, bit j), become B blocks of N bits,
// q(j)_i: block j collects bit j of every pixel. Block 0 therefore holds the
// least significant bits, and pixel 0 lands in the most significant bit of
// each block, so pixels [1,2,3,1,0,2,3,1] give block 0 = 8'b10110011 = 179.
// With data whose non-zero pixels are small, the upper blocks are all zero
// and the zeromask encoder can drop them. Shuffling also lets one 16-bit
// metadata word cover 16 pixels: an all-zero group of 16 x 9 bits shrinks to
// one 16-bit word (9:1), where 8 unshuffled 9-bit pixels reach at most 8:1.
//
// The transpose and its dimensions (16 pixels of 9 bits -> 9 blocks of 16
// bits) follow the design description; the bit order inside a block is taken
// from its worked example (179). Wires only, no logic, no clock.
module bit_shuffle #(
  parameter int unsigned N = 16,  // pixels per group
  parameter int unsigned B = 9    // bits per pixel
) (
  input  logic [B-1:0] pix [N],   // pixel i
  output logic [N-1:0] blk [B]    // block j = bit j of all pixels
);

  for (genvar j = 0; j < B; j++) begin : g_blk
    for (genvar i = 0; i < N; i++) begin : g_pix
      assign blk[j][N-1-i] = pix[i][j];
    end
  end

endmodule
