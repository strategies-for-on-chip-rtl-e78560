// tb_pixel_encoder -- exhaustive check of the in-pixel encoder: all 4 gain
// codes x 4096 ADC values against the division/offset reference, the region
// end points of the encoding table (0-15, 20-31, 32-63, 80-127, 128-255,
// 320-511) and monotonicity of the code with photon count inside each gain.
//
// The region table is the design description's. Combinational DUT.
module tb_pixel_encoder;
  import xpd_pkg::*;
  import tb_ref_pkg::*;

  sample_t in;
  enc_t    code;
  int      checks = 0, failures = 0;

  pixel_encoder dut (.in(in), .code(code));

  task automatic apply(int unsigned g, int unsigned a);
    in.gain = gain_e'(g);
    in.adc  = adc_t'(a);
    #1;
  endtask

  task automatic expect_code(int unsigned g, int unsigned a, int unsigned m);
    apply(g, a);
    checks++;
    if (code != enc_t'(m)) begin
      failures++;
      $display("FAIL gain=%0d adc=%0d: code %0d, expected %0d", g, a, code, m);
    end
  endtask

  initial begin
    int unsigned prev;
    // End points of the six subregions.
    expect_code(0, 0, 0);    expect_code(0, 1023, 15);
    expect_code(0, 1024, 20); expect_code(0, 4095, 31);
    expect_code(1, 0, 32);   expect_code(1, 1023, 63);
    expect_code(1, 1024, 80); expect_code(1, 4095, 127);
    expect_code(2, 0, 128);  expect_code(2, 1023, 255);
    expect_code(2, 1024, 320); expect_code(2, 4095, 511);
    expect_code(3, 4095, 511);
    // Exhaustive.
    for (int g = 0; g < 4; g++) begin
      prev = 0;
      for (int a = 0; a < 4096; a++) begin
        expect_code(g, a, enc_ref(g, a));
        if (a > 0 && int'(code) < int'(prev)) begin
          failures++;
          $display("FAIL not monotonic at gain=%0d adc=%0d", g, a);
        end
        prev = 32'(code);
      end
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
