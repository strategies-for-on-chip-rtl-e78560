// tb_pixel_denoise -- checks the denoiser against tb_ref_pkg::denoise_ref for
// boundary values (value = floor - 1, floor, floor + 1, floor 0) and 4000
// random samples in all four gain codes.
//
// The rule (below the floor -> 0) is the design description's; applying it in
// the high-gain range only is this design's choice and is what the reference
// models. Combinational DUT, checked 1 time unit after each input.
module tb_pixel_denoise;
  import xpd_pkg::*;
  import tb_ref_pkg::*;

  sample_t in, out;
  adc_t    nf;
  int      checks = 0, failures = 0;

  pixel_denoise dut (.in(in), .noise_floor(nf), .out(out));

  task automatic check(int unsigned g, int unsigned a, int unsigned f);
    in.gain = gain_e'(g);
    in.adc  = adc_t'(a);
    nf      = adc_t'(f);
    #1;
    checks++;
    if (out.adc != adc_t'(denoise_ref(g, a, f)) || out.gain != in.gain) begin
      failures++;
      $display("FAIL gain=%0d adc=%0d floor=%0d -> %0d", g, a, f, out.adc);
    end
  endtask

  initial begin
    for (int g = 0; g < 4; g++) begin
      check(g, 99, 100);
      check(g, 100, 100);
      check(g, 101, 100);
      check(g, 0, 0);
      check(g, 5, 0);
      check(g, 4094, 4095);
    end
    // Boundary sweep in the high-gain range: just below, at and above the floor.
    for (int f = 1; f < 4095; f += 13) begin
      check(0, f - 1, f);
      check(0, f, f);
      check(0, f + 1, f);
    end
    repeat (4000) check($urandom_range(3), $urandom_range(4095), $urandom_range(300));
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
