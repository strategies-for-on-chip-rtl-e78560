// zm_encoder -- zeromask ("ZM") encoding stage of the edge compressor.
//
// Each clock it takes one group of NW words and produces one encoded fragment:
// a metadata word followed by the non-zero words of the group in their
// original order. Metadata bit (NW-1-i) is 1 when word i is non-zero, so the
// group 0,4,0,2,0,0,1,0 has metadata 8'b01010010 and the fragment
// {01010010, 4, 2, 1}. The fragment length len = 1 + (number of non-zero
// words) is between 1 (all zero: compression NW:1) and NW+1 (no zero). The
// metadata must fit one word, so NW <= W.
//
// In the default configuration the input comes from the bit shuffle stage:
// NW = 9 blocks of W = 16 bits (16 pixels of 9 bits).
//
// Interface: in_valid / in_flush are carried with the data. The output is
// registered: a group presented at clock edge t appears on frag/len/out_valid
// after edge t; one group is accepted every clock, there is no stall. When
// in_valid is low the registered len is 0. The metadata format (including the
// bit order, as in the worked example) and the packing follow the design
// description; the output register and the valid/flush side signals are this
// design's own choices.
module zm_encoder #(
  parameter int unsigned NW = 9,               // input words per group
  parameter int unsigned W  = 16,              // bits per word
  parameter int unsigned LW = $clog2(NW + 2)   // width of len
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic          in_flush,
  input  logic [W-1:0]  in_data  [NW],
  output logic          out_valid,
  output logic          out_flush,
  output logic [W-1:0]  frag     [NW+1],   // metadata, then packed words
  output logic [LW-1:0] len                // words of frag in use
);

  localparam int unsigned PW = $clog2(NW + 1);

  logic [W-1:0]  meta;
  logic [W-1:0]  packed_words [NW];
  logic [PW-1:0] count;

  // Metadata creation: one comparator per word.
  always_comb begin
    meta = '0;
    for (int i = 0; i < NW; i++) meta[NW-1-i] = (in_data[i] != '0);
  end

  zm_packer #(.NW(NW), .W(W), .PW(PW)) u_packer (
    .in_data  (in_data),
    .out_data (packed_words),
    .count    (count)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_flush <= 1'b0;
      len       <= '0;
      for (int i = 0; i <= NW; i++) frag[i] <= '0;
    end else begin
      out_valid <= in_valid;
      out_flush <= in_flush;
      len       <= in_valid ? LW'(count) + 1'b1 : '0;
      frag[0]   <= meta;
      for (int i = 0; i < NW; i++) frag[i+1] <= packed_words[i];
    end
  end

  initial begin
    assert (NW <= W) else $error("zm_encoder: metadata of %0d bits does not fit a %0d-bit word", NW, W);
  end

endmodule
