// zm_packer -- zeromask packing logic: removes zero words, keeps the order.
//
// NW copies of zm_shiftup are connected in series; the first receives the
// input words and pos = 0, the last delivers the packed words (non-zero words
// first, in input order, then zeros) and the count of non-zero words. For
// example 0,8,0,2,0,0,7,0 becomes 8,2,7,0,0,0,0,0 with count 3.
//
// Structure as in the design description (a chain of ShiftUp stages starting
// at pos = 0). Purely combinational; the enclosing encoder registers the
// result.
module zm_packer #(
  parameter int unsigned NW = 9,
  parameter int unsigned W  = 16,
  parameter int unsigned PW = $clog2(NW + 1)
) (
  input  logic [W-1:0]  in_data  [NW],
  output logic [W-1:0]  out_data [NW],
  output logic [PW-1:0] count          // number of non-zero words
);

  // One (data, pos) pair per stage output, declared inside the stage.
  for (genvar k = 0; k < NW; k++) begin : g_stage
    logic [W-1:0]  d_in  [NW];
    logic [PW-1:0] p_in;
    logic [W-1:0]  d_out [NW];
    logic [PW-1:0] p_out;

    if (k == 0) begin : g_first
      assign d_in = in_data;
      assign p_in = '0;
    end else begin : g_next
      assign d_in = g_stage[k-1].d_out;
      assign p_in = g_stage[k-1].p_out;
    end

    zm_shiftup #(.NW(NW), .W(W), .K(k), .PW(PW)) u_shiftup (
      .in_data  (d_in),
      .in_pos   (p_in),
      .out_data (d_out),
      .out_pos  (p_out)
    );
  end

  assign out_data = g_stage[NW-1].d_out;
  assign count    = g_stage[NW-1].p_out;

endmodule
