// coalesce_stbuf -- the STBuf of the coalescing stage: output buffer plus
// barrel shifter.
//
// Holds BUF_WORDS words. Each clock the barrel shifter places the len words
// of the arriving fragment at positions pos .. pos+len-1 of the buffer
// extended by MAXLEN spill words. If the Selector signals flushed, the first
// BUF_WORDS words leave as one fixed-size block (out_data, out_valid for one
// clock, registered) and the spill words move down to the start of the buffer;
// otherwise the buffer keeps the first BUF_WORDS words. Unused positions are
// kept zero, so a buffer emitted by a flush request is zero-padded.
//
// Register array and barrel shifter follow the design description; the spill
// handling is this design's own choice (see coalesce_selector).
module coalesce_stbuf #(
  parameter int unsigned BUF_WORDS = 16,
  parameter int unsigned MAXLEN    = 10,
  parameter int unsigned W         = 16,
  parameter int unsigned LW        = $clog2(MAXLEN + 1),
  parameter int unsigned PW        = $clog2(BUF_WORDS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [LW-1:0] len,
  input  logic [W-1:0]  frag     [MAXLEN],
  input  logic [PW-1:0] pos,
  input  logic          flushed,
  output logic          out_valid,
  output logic [W-1:0]  out_data [BUF_WORDS]
);

  localparam int unsigned EXT = BUF_WORDS + MAXLEN;

  logic [W-1:0] buf_q [BUF_WORDS];
  logic [W-1:0] ext   [EXT];

  // Barrel shifter: fragment word (j - pos) lands on extended position j.
  always_comb begin
    for (int j = 0; j < EXT; j++) begin
      ext[j] = (j < BUF_WORDS) ? buf_q[j] : '0;
      if (in_valid && j >= int'(pos) && j - int'(pos) < int'(len))
        ext[j] = frag[j - int'(pos)];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int j = 0; j < BUF_WORDS; j++) begin
        buf_q[j]    <= '0;
        out_data[j] <= '0;
      end
    end else begin
      out_valid <= flushed;
      if (flushed) begin
        for (int j = 0; j < BUF_WORDS; j++) begin
          out_data[j] <= ext[j];
          buf_q[j]    <= (j < MAXLEN) ? ext[BUF_WORDS + j] : '0;
        end
      end else begin
        for (int j = 0; j < BUF_WORDS; j++) buf_q[j] <= ext[j];
      end
    end
  end

endmodule
