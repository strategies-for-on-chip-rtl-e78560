// tb_zm_encoder -- checks the zeromask encoding stage: the worked example
// (0,4,0,2,0,0,1,0 -> metadata 01010010, then 4,2,1; length 4) on an 8 x 8-bit
// instance, then a stream of random groups on the default 9 x 16-bit instance,
// one group per clock, each fragment checked one clock after its group was
// presented against the reference; len is 0 on idle clocks and the flush
// flag travels with the data.
//
// The worked example is the one of the zeromask description.
module tb_zm_encoder;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic v8 = 0, f8 = 0, ov8, of8;
  logic [7:0] in8 [8], frag8 [9];
  logic [3:0] len8;
  logic v9 = 0, f9 = 0, ov9, of9;
  logic [15:0] in9 [9], frag9 [10];
  logic [3:0] len9;
  int checks = 0, failures = 0, cycles = 0;

  zm_encoder #(.NW(8), .W(8)) dut8 (.clk, .rst_n, .in_valid(v8), .in_flush(f8), .in_data(in8),
                                    .out_valid(ov8), .out_flush(of8), .frag(frag8), .len(len8));
  zm_encoder dut9 (.clk, .rst_n, .in_valid(v9), .in_flush(f9), .in_data(in9),
                   .out_valid(ov9), .out_flush(of9), .frag(frag9), .len(len9));

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  initial begin
    int unsigned ex[8] = '{0, 4, 0, 2, 0, 0, 1, 0};
    int unsigned w[$], q[$], exp_len;
    logic exp_v, exp_f;
    for (int i = 0; i < 8; i++) in8[i] = 8'(ex[i]);
    for (int i = 0; i < 9; i++) in9[i] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    v8 = 1;
    @(posedge clk); #1 v8 = 0;
    chk(ov8 && len8 == 4, "example valid/len");
    chk(frag8[0] == 8'b01010010, "example metadata");
    chk(frag8[1] == 4 && frag8[2] == 2 && frag8[3] == 1, "example packed words");
    @(posedge clk); #1;
    chk(!ov8 && len8 == 0, "idle len 0");
    // Stream of random groups.
    for (int it = 0; it < 3000; it++) begin
      int unsigned pz;
      pz = $urandom_range(100);
      w.delete(); q.delete();
      for (int i = 0; i < 9; i++) begin
        in9[i] = ($urandom_range(99) < pz) ? 16'd0 : 16'($urandom_range(65535, 1));
        w.push_back(in9[i]);
      end
      exp_v = ($urandom_range(7) != 0);
      exp_f = ($urandom_range(15) == 0);
      v9 = exp_v; f9 = exp_f;
      exp_len = zm_ref(w, q);
      @(posedge clk); #1;
      chk(ov9 == exp_v && of9 == exp_f, "valid/flush carried");
      chk(len9 == (exp_v ? 4'(exp_len) : 4'd0), $sformatf("len %0d exp %0d", len9, exp_len));
      for (int i = 0; i < exp_len; i++)
        chk(frag9[i] == 16'(q[i]), $sformatf("fragment word %0d", i));
    end
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
