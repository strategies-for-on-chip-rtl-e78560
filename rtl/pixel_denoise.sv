// pixel_denoise -- digital denoising of one pixel sample.
//
// A sample whose ADC value lies below the pixel's programmed noise floor is
// forced to zero so that the edge compressor sees as many zero pixels as
// possible. The noise floor is the largest ADC value seen in darkness during a
// calibration run; it is held in a register of the pixel (see pixel_cell).
//
// Following the pixel block diagram, the comparison is applied only in the
// high-gain range: in the medium and low ranges ADC code 0 already stands for
// tens to a thousand photons, so it is never noise. The comparison is strict
// (value < floor). Programming a floor of 0 disables denoising.
//
// Purely combinational; no clock.
module pixel_denoise
  import xpd_pkg::*;
(
  input  sample_t in,           // raw sample (gain + ADC)
  input  adc_t    noise_floor,  // programmed per-pixel noise floor
  output sample_t out           // sample with noise forced to 0
);

  always_comb begin
    out = in;
    if (in.gain == GAIN_HIGH && in.adc < noise_floor) out.adc = '0;
  end

endmodule
