// tb_zm_packer -- checks the packing logic on the example 0,8,0,2,0,0,7,0 ->
// 8,2,7,0,0,0,0,0 (count 3), on all-zero and no-zero groups, and on 3000
// random groups of 9 sixteen-bit words with a varying share of zeros.
//
// The example is the packing illustration of the zeromask description; the
// random groups are this testbench's choice. Combinational DUT.
module tb_zm_packer;
  logic [7:0]  in8  [8], out8 [8];
  logic [3:0]  cnt8;
  logic [15:0] in9  [9], out9 [9];
  logic [3:0]  cnt9;
  int checks = 0, failures = 0;

  zm_packer #(.NW(8), .W(8)) dut8 (.in_data(in8), .out_data(out8), .count(cnt8));
  zm_packer                  dut9 (.in_data(in9), .out_data(out9), .count(cnt9));

  task automatic check9();
    int unsigned q[$];
    for (int i = 0; i < 9; i++) if (in9[i] != 0) q.push_back(in9[i]);
    #1;
    checks++;
    if (cnt9 != 4'(q.size())) begin failures++; $display("FAIL count %0d vs %0d", cnt9, q.size()); end
    for (int i = 0; i < 9; i++) begin
      checks++;
      if (out9[i] != ((i < q.size()) ? 16'(q[i]) : 16'd0)) begin
        failures++;
        $display("FAIL word %0d: %h", i, out9[i]);
      end
    end
  endtask

  initial begin
    int unsigned ex[8]  = '{0, 8, 0, 2, 0, 0, 7, 0};
    int unsigned exp[8] = '{8, 2, 7, 0, 0, 0, 0, 0};
    for (int i = 0; i < 8; i++) in8[i] = 8'(ex[i]);
    #1;
    checks++;
    if (cnt8 != 3) begin failures++; $display("FAIL example count %0d", cnt8); end
    for (int i = 0; i < 8; i++) begin
      checks++;
      if (out8[i] != 8'(exp[i])) begin failures++; $display("FAIL example word %0d = %0d", i, out8[i]); end
    end
    for (int i = 0; i < 9; i++) in9[i] = '0;
    check9();
    for (int i = 0; i < 9; i++) in9[i] = 16'(i + 1);
    check9();
    repeat (3000) begin
      int unsigned pz;
      pz = $urandom_range(100);
      for (int i = 0; i < 9; i++) in9[i] = ($urandom_range(99) < pz) ? 16'd0 : 16'($urandom_range(65535, 1));
      check9();
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
