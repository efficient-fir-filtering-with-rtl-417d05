// blmac_pkg: sizes and the run-length code format shared by the 127-tap FIR
// bit layer multiply accumulator (BLMAC) dot product machine.
//
// Sizes that follow the paper: 127 taps, 8-bit samples, 16-bit signed
// coefficients (hence 16 bit layers), a 256 x 8 weight memory and a 16-bit
// result shift register. The layout of the 8-bit code word and the width of
// the accumulator are this design's own choices.
//
// Code word (8 bits), one per memory location:
//   bit 7    EOR   1 = end of the current bit layer (bits 6:0 ignored)
//   bit 6    SIGN  1 = the pulse is -1 (subtract), 0 = +1 (add)
//   bits 5:0 ZRUN  number of zero digits in this layer before this pulse
// Codes are stored layer by layer, from layer 0 (LSB) to layer 15 (MSB),
// because the machine is a right-shift BLMAC. Inside a layer the pulses are
// in increasing coefficient index j, j = 0 .. N_TAPS/2.
package blmac_pkg;

  localparam int unsigned N_TAPS     = 127;               // filter length (odd, type I)
  localparam int unsigned SAMPLE_W   = 8;                 // signed input samples
  localparam int unsigned WEIGHT_W   = 16;                // signed coefficients
  localparam int unsigned NUM_LAYERS = WEIGHT_W;          // bit layers 0..15
  localparam int unsigned CODE_DEPTH = 256;               // weight memory words
  localparam int unsigned CODE_AW    = $clog2(CODE_DEPTH);
  localparam int unsigned CODE_W     = 8;
  localparam int unsigned ZRUN_W     = 6;
  localparam int unsigned IDX_W      = $clog2(N_TAPS);    // 7 bits
  localparam int unsigned PRE_W      = SAMPLE_W + 1;      // pre-adder output
  localparam int unsigned ACC_W      = 18;                // accumulator (assumed)
  localparam int unsigned SR_W       = NUM_LAYERS;        // bits shifted out
  localparam int unsigned RESULT_W   = ACC_W + SR_W;

  typedef struct packed {
    logic              eor;
    logic              sign;
    logic [ZRUN_W-1:0] zrun;
  } rl_code_t;

  localparam rl_code_t EOR_CODE = '{eor: 1'b1, sign: 1'b0, zrun: '0};

endpackage
