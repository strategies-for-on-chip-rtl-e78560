// pixel_cell -- digital logic of one detector pixel.
//
// Once per frame, on the frame sync pulse, the pixel captures the ADC result
// and gain bits of its front-end in a sample register. The sample is denoised
// (pixel_denoise) and encoded to 9 bits (pixel_encoder). One clock after the
// frame sync the encoded value is loaded into the pixel's shift register; on
// every other clock the shift register takes the value of the neighbouring
// pixel further from the array edge, so the pixels of one row form a long
// daisy-chained shift register that moves the previous frame's data to the
// edge while the front-end integrates the current frame.
//
// The noise floor register is written through a separate 12-bit configuration
// chain (cfg_in -> cfg_out) that shifts by one pixel on each clock with
// cfg_shift high. Sample register, multiplexer and shift register follow the
// pixel block diagram; the one-clock delay between capture and load, the
// configuration chain and the synchronous active-low reset (which clears all
// registers) are this design's own choices.
//
// Timing: frame_sync at clock edge t captures the sample; at edge t+1 the
// encoded value is in chain_out; it then advances one pixel per clock.
module pixel_cell
  import xpd_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,        // synchronous, active low
  input  logic    frame_sync,   // one-clock pulse, once per frame
  input  adc_t    adc,          // from the pixel ADC
  input  gain_e   gain,         // from the gain-switching front-end
  input  logic    cfg_shift,    // shift the noise-floor configuration chain
  input  adc_t    cfg_in,       // noise floor from the previous pixel
  output adc_t    cfg_out,      // noise floor register of this pixel
  input  enc_t    chain_in,     // daisy-chained data from the previous pixel
  output enc_t    chain_out     // daisy-chained data to the next pixel
);

  sample_t sample_q;
  adc_t    noise_floor_q;
  logic    load_q;
  enc_t    shift_q;

  sample_t denoised;
  enc_t    code;

  pixel_denoise u_denoise (
    .in          (sample_q),
    .noise_floor (noise_floor_q),
    .out         (denoised)
  );

  pixel_encoder u_encoder (
    .in     (denoised),
    .code   (code)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sample_q      <= '0;
      noise_floor_q <= '0;
      load_q        <= 1'b0;
      shift_q       <= '0;
    end else begin
      load_q <= frame_sync;
      if (frame_sync) sample_q <= '{gain: gain, adc: adc};
      if (cfg_shift)  noise_floor_q <= cfg_in;
      shift_q <= load_q ? code : chain_in;
    end
  end

  assign chain_out = shift_q;
  assign cfg_out   = noise_floor_q;

endmodule
