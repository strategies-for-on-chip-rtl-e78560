// zm_shiftup -- one stage (stage K) of the zeromask packing logic.
//
// Input: an array of NW words in which words 0..K-1 have already been
// handled -- their non-zero words are packed into positions 0..pos-1 and the
// rest of 0..K-1 is zero -- and words K..NW-1 are still in their original
// places. The stage looks at word K: if it is non-zero it is moved up to
// position pos (word K is cleared when pos < K) and pos is incremented. After
// stage K, words 0..K are handled. Chaining stages 0..NW-1 packs all non-zero
// words to the front in their original order, zeros behind, and leaves the
// number of non-zero words in pos.
//
// The stage name, its (data, pos) interface and the chaining follow the
// design description; what one stage does inside is this design's reading of
// it. Purely combinational.
module zm_shiftup #(
  parameter int unsigned NW = 9,              // words per input group
  parameter int unsigned W  = 16,             // bits per word
  parameter int unsigned K  = 0,              // index of this stage
  parameter int unsigned PW = $clog2(NW + 1)  // width of pos
) (
  input  logic [W-1:0]  in_data  [NW],
  input  logic [PW-1:0] in_pos,
  output logic [W-1:0]  out_data [NW],
  output logic [PW-1:0] out_pos
);

  always_comb begin
    out_data = in_data;
    out_pos  = in_pos;
    if (in_data[K] != '0) begin
      out_data[K]      = '0;
      out_data[in_pos] = in_data[K];
      out_pos          = in_pos + 1'b1;
    end
  end

endmodule
