// tb_pixel_cell -- checks one pixel: noise floor loading through the
// configuration chain, capture on frame sync, denoise + encoding reaching
// chain_out exactly one clock after the frame sync, and plain shifting of
// chain_in -> chain_out (one clock delay) on all other clocks.
//
// Denoise and encoding references come from tb_ref_pkg (the design
// description's tables); the configuration chain is this design's own.
module tb_pixel_cell;
  import xpd_pkg::*;
  import tb_ref_pkg::*;

  logic  clk = 0, rst_n = 0, frame_sync = 0, cfg_shift = 0;
  adc_t  adc = '0, cfg_in = '0, cfg_out;
  gain_e gain = GAIN_HIGH;
  enc_t  chain_in = '0, chain_out;
  int    checks = 0, failures = 0, cycles = 0;

  pixel_cell dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s (t=%0t)", what, $time);
    end
  endtask

  initial begin
    int unsigned floor_v, g, a, exp_code, held;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int it = 0; it < 300; it++) begin
      // Program a noise floor.
      floor_v = $urandom_range(200);
      cfg_in = adc_t'(floor_v); cfg_shift = 1;
      @(posedge clk); #1 cfg_shift = 0; cfg_in = adc_t'($urandom);
      chk(cfg_out == adc_t'(floor_v), "noise floor register");
      // Frame sync with a new sample; chain_in carries unrelated data.
      g = $urandom_range(3);
      a = ($urandom_range(1) == 1) ? $urandom_range(250) : $urandom_range(4095);
      adc = adc_t'(a); gain = gain_e'(g); frame_sync = 1;
      chain_in = enc_t'($urandom);
      @(posedge clk); #1 frame_sync = 0; adc = adc_t'($urandom);
      held = 32'(chain_in);
      chain_in = enc_t'($urandom);
      chk(chain_out == enc_t'(held), "shift on the frame-sync clock");
      exp_code = enc_ref(g, denoise_ref(g, a, floor_v));
      @(posedge clk); #1;
      chk(chain_out == enc_t'(exp_code), $sformatf("load: gain=%0d adc=%0d floor=%0d got %0d exp %0d",
                                                   g, a, floor_v, chain_out, exp_code));
      // Shifting afterwards.
      repeat (3) begin
        chain_in = enc_t'($urandom);
        held = 32'(chain_in);
        @(posedge clk); #1;
        chk(chain_out == enc_t'(held), "shift");
      end
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
