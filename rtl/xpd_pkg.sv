// xpd_pkg -- types and constants shared by the X-ray pixel detector readout.
//
// The pixel ADC delivers a 12-bit sample plus 2 gain bits once per frame. The
// in-pixel encoder reduces the 14 bits to a 9-bit code (Example 2 of the
// encoding scheme: three gain ranges, each split into two subregions at ADC
// value 1024). The 12/2/9-bit widths follow the design description; the binary
// values given to the three gain ranges are this design's own choice, since no
// encoding of the gain bits is specified.
package xpd_pkg;

  localparam int unsigned ADC_BITS  = 12;  // ADC resolution
  localparam int unsigned GAIN_BITS = 2;   // gain-range bits from the front-end
  localparam int unsigned ENC_BITS  = 9;   // encoded (transmitted) bits per pixel

  typedef logic [ADC_BITS-1:0] adc_t;
  typedef logic [ENC_BITS-1:0] enc_t;

  // Gain range reported by the auto-ranging front-end. GAIN_RSVD (2'b11) does
  // not occur in normal operation and is treated like GAIN_LOW.
  typedef enum logic [GAIN_BITS-1:0] {
    GAIN_HIGH = 2'b00,
    GAIN_MID  = 2'b01,
    GAIN_LOW  = 2'b10,
    GAIN_RSVD = 2'b11
  } gain_e;

  // One raw pixel sample as captured at frame sync.
  typedef struct packed {
    gain_e gain;
    adc_t  adc;
  } sample_t;

  // The six encoding subregions (Region 1..6).
  typedef enum logic [2:0] {
    REG1 = 3'd1,  // high gain, ADC 0-1023    : M = ADC/64
    REG2 = 3'd2,  // high gain, ADC 1024-4095 : M = ADC/256 + 16
    REG3 = 3'd3,  // mid gain,  ADC 0-1023    : M = ADC/32  + 32
    REG4 = 3'd4,  // mid gain,  ADC 1024-4095 : M = ADC/64  + 64
    REG5 = 3'd5,  // low gain,  ADC 0-1023    : M = ADC/8   + 128
    REG6 = 3'd6   // low gain,  ADC 1024-4095 : M = ADC/16  + 256
  } region_e;

endpackage
