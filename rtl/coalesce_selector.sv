// coalesce_selector -- the Selector of the coalescing stage.
//
// Keeps the insert position pos (number of words already in the output
// buffer). Each clock it receives the length len of the arriving fragment and
// decides whether the buffer becomes full: when pos + len >= BUF_WORDS it
// raises flushed, and the next position is the number of words that spilled
// over (pos + len - BUF_WORDS); otherwise pos advances by len. A flush request
// on a clock without a fragment empties a partly filled buffer (flushed is
// raised if pos > 0) and resets pos to 0.
//
// Selector/STBuf split, the pos and flushed signals and "flushed when the
// buffer becomes full" follow the design description; splitting a fragment
// across two buffers and the flush request are this design's own choices.
// pos is a register; flushed is combinational from pos and len.
module coalesce_selector #(
  parameter int unsigned BUF_WORDS = 16,  // words per output buffer
  parameter int unsigned MAXLEN    = 10,  // longest fragment
  parameter int unsigned LW        = $clog2(MAXLEN + 1),
  parameter int unsigned PW        = $clog2(BUF_WORDS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic          flush_req,
  input  logic [LW-1:0] len,
  output logic [PW-1:0] pos,       // insert position of this clock's fragment
  output logic          flushed    // buffer is emitted at the end of this clock
);

  localparam int unsigned SW = $clog2(BUF_WORDS + MAXLEN + 1);

  logic [SW-1:0] sum;
  logic [PW-1:0] pos_q, pos_d;

  always_comb begin
    sum     = SW'(pos_q) + (in_valid ? SW'(len) : '0);
    flushed = 1'b0;
    pos_d   = PW'(sum);
    if (sum >= SW'(BUF_WORDS)) begin
      flushed = 1'b1;
      pos_d   = PW'(sum - SW'(BUF_WORDS));
    end else if (flush_req && !in_valid) begin
      flushed = (pos_q != '0);
      pos_d   = '0;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) pos_q <= '0;
    else        pos_q <= pos_d;
  end

  assign pos = pos_q;

  initial begin
    assert (MAXLEN <= BUF_WORDS) else $error("coalesce_selector: fragments longer than the buffer");
  end

endmodule
