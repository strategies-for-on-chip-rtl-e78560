// elastic_fifo -- elastic store between an edge compressor and its I/O
// channel.
//
// The compressor emits a 256-bit block on a variable share of the clocks; the
// transmitter drains blocks at its own pace (out_ready). This FIFO of DEPTH
// blocks smooths the peaks and valleys in between. The compressor cannot be
// stalled, so a block pushed while the FIFO is full is dropped: the sticky
// overflow flag is set and drop_count counts the lost blocks.
//
// A digital memory used as an elastic store is named in the design
// description; its depth, the valid/ready read side and the overflow policy
// are this design's own choices. The storage is a plain register array.
// Timing: a pushed block is visible on out_data the clock after the push;
// first-word-fall-through read with valid/ready; push and pop may happen on
// the same clock.
module elastic_fifo #(
  parameter int unsigned WIDTH = 256,
  parameter int unsigned DEPTH = 8,
  parameter int unsigned CW    = 16   // width of drop_count
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic [WIDTH-1:0]         in_data,
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [WIDTH-1:0]         out_data,
  output logic [$clog2(DEPTH+1)-1:0] level,
  output logic                     overflow,
  output logic [CW-1:0]            drop_count
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_q, rd_q;
  logic             do_push, do_pop;

  assign out_valid = (level != '0);
  assign out_data  = mem[rd_q];
  assign do_pop    = out_valid && out_ready;
  assign do_push   = in_valid && (level != ($clog2(DEPTH+1))'(DEPTH) || do_pop);

  function automatic logic [AW-1:0] incr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_q] <= in_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_q       <= '0;
      rd_q       <= '0;
      level      <= '0;
      overflow   <= 1'b0;
      drop_count <= '0;
    end else begin
      if (do_push) wr_q <= incr(wr_q);
      if (do_pop)  rd_q <= incr(rd_q);
      if (do_push && !do_pop)      level <= level + 1'b1;
      else if (do_pop && !do_push) level <= level - 1'b1;
      if (in_valid && !do_push) begin
        overflow   <= 1'b1;
        drop_count <= drop_count + 1'b1;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) level <= ($clog2(DEPTH+1))'(DEPTH))
    else $error("elastic_fifo: level above depth");

endmodule
