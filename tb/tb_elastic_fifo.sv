// tb_elastic_fifo -- FIFO of 4 x 32 bits. Random pushes and pops, with phases
// of heavy pushing and of no reading, against a queue model: out_valid,
// out_data and level are checked every clock; a push into a full FIFO (with
// no pop on the same clock) must be dropped, counted in drop_count and set
// the sticky overflow flag.
//
// The sizes are reduced to reach full and empty often; the queue model
// encodes this design's own FIFO policy (drop on full).
module tb_elastic_fifo;
  localparam int W = 32, D = 4;

  logic clk = 0, rst_n = 0, in_valid = 0, out_ready = 0, out_valid, overflow;
  logic [W-1:0] in_data = '0, out_data;
  logic [2:0]   level;
  logic [15:0]  drop_count;
  int checks = 0, failures = 0, cycles = 0, drops = 0, n_pops = 0;

  elastic_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  logic [W-1:0] q[$];

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int it = 0; it < 4000; it++) begin
      int phase;
      logic pop;
      phase = (it / 200) % 3;   // 0: balanced, 1: no reads, 2: mostly reads
      in_valid  = (phase == 2) ? ($urandom_range(3) == 0) : ($urandom_range(1) == 1);
      out_ready = (phase == 1) ? 1'b0 : (phase == 2) ? 1'b1 : ($urandom_range(1) == 1);
      in_data   = $urandom;
      #1;
      chk(out_valid == (q.size() > 0), "out_valid");
      if (q.size() > 0) chk(out_data == q[0], "out_data");
      chk(level == 3'(q.size()), "level");
      pop = out_valid && out_ready;
      @(posedge clk);
      if (pop) begin void'(q.pop_front()); n_pops++; end
      if (in_valid) begin
        if (q.size() < D) q.push_back(in_data);
        else drops++;
      end
      #1;
      chk(drop_count == 16'(drops), "drop_count");
      chk(overflow == (drops > 0), "overflow flag");
    end
    chk(drops > 0 && n_pops > 100, "overflow and reads exercised");
    $display("pops=%0d drops=%0d", n_pops, drops);
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
