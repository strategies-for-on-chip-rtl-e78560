// pixel_encoder -- in-pixel encoding of ADC + gain bits near the Poisson noise.
//
// A three-gain charge-integrating front-end delivers a 12-bit ADC value and a
// 2-bit gain range (14 bits). Each gain range is split in two at ADC = 1024,
// which gives six subregions. In each subregion the ADC value is divided by a
// power of two and a power-of-two offset is added:
//
//   region  gain  ADC range    code M            M range
//     1     high  0-1023       ADC/64            0-15
//     2     high  1024-4095    ADC/256 + 16      20-31
//     3     mid   0-1023       ADC/32  + 32      32-63
//     4     mid   1024-4095    ADC/64  + 64      80-127
//     5     low   0-1023       ADC/8   + 128     128-255
//     6     low   1024-4095    ADC/16  + 256     320-511
//
// Because the offsets are powers of two larger than the divided value, the
// "adder" is just a constant 1 written into one bit, and the division is a
// selection of ADC bits: the whole encoder is a 6-way multiplexer over wired
// bit fields, selected by the gain bits and ADC bits [11:10]. The codes rise
// monotonically with photon count; the unused codes (16-19, 64-79, 256-319)
// are the price of the power-of-two offsets. The table follows the design
// description exactly; the gain-bit values are set in xpd_pkg.
//
// Purely combinational.
module pixel_encoder
  import xpd_pkg::*;
(
  input  sample_t in,      // (denoised) sample
  output enc_t    code     // 9-bit encoded value M
);

  region_e region;  // subregion the sample falls into (1..6)

  logic upper;  // ADC value >= 1024, i.e. one of the two ADC MSBs is set
  assign upper = |in.adc[ADC_BITS-1:ADC_BITS-2];

  always_comb begin
    unique case (in.gain)
      GAIN_HIGH: region = upper ? REG2 : REG1;
      GAIN_MID:  region = upper ? REG4 : REG3;
      default:   region = upper ? REG6 : REG5;   // GAIN_LOW and GAIN_RSVD
    endcase

    unique case (region)
      REG1:    code = {5'b00000, in.adc[9:6]};         // ADC/64
      REG2:    code = {4'b0000, 1'b1, in.adc[11:8]};   // ADC/256 + 16
      REG3:    code = {3'b000, 1'b1, in.adc[9:5]};     // ADC/32  + 32
      REG4:    code = {2'b00, 1'b1, in.adc[11:6]};     // ADC/64  + 64
      REG5:    code = {1'b0, 1'b1, in.adc[9:3]};       // ADC/8   + 128
      default: code = {1'b1, in.adc[11:4]};            // ADC/16  + 256
    endcase
  end

endmodule
