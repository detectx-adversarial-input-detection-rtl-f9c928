// detectx_pkg: sizes and types shared by the DetectX adversarial-input detector.
//
// The defaults describe the configuration the detector was evaluated in: the
// first VGG8 layer on a 128x128 RRAM crossbar read through sixteen 8:1 analog
// multiplexers into sixteen 8-bit ADCs, 32x32 output features per channel, so
// one input frame takes 32*32*8 = 8192 read cycles. The LUT is a 512 x 16-bit
// SRAM and the random number generator delivers 8-bit samples.
//
// Our own choices: the 16-bit LUT word is split into an 8-bit sample SoI (upper
// byte) and an 8-bit clean probability (lower byte); accumulator width is
// derived so that a maximal-length frame cannot overflow.
package detectx_pkg;

  localparam int unsigned N_ADC      = 16;    // ADCs, L1 adders, registers
  localparam int unsigned ADC_W      = 8;     // ADC code width
  localparam int unsigned MAX_CYCLES = 8192;  // read cycles per frame (N_C)
  localparam int unsigned LUT_DEPTH  = 512;   // SoI-probability LUT entries
  localparam int unsigned S_W        = 8;     // sample-SoI field of a LUT word
  localparam int unsigned P_W        = 8;     // P(clean) field, = RNG width
  localparam int unsigned RNG_W      = 8;

  // |code| <= 2^(ADC_W-1), summed over MAX_CYCLES cycles
  localparam int unsigned ACC_W = ADC_W + $clog2(MAX_CYCLES);
  localparam int unsigned SOI_W = ACC_W + $clog2(N_ADC);
  localparam int unsigned NX_W  = 4;          // LUT access counter (max 10)

  typedef struct packed {
    logic [S_W-1:0] s;   // sample SoI S_k
    logic [P_W-1:0] p;   // P(clean) of S_k, as p / 2^P_W
  } lut_entry_t;

endpackage
