// lmhp_pkg -- shared types and default sizes of the LightMat-HP datapath.
//
// LightMat-HP multiplies FP32 matrices by converting tiles to block floating
// point (one shared exponent per row of A / column of B, sign + magnitude
// mantissas), multiplying the mantissas as 5-bit slices on a photonic core and
// reassembling the products digitally. This package holds the numbers every
// module agrees on:
//   * FP32 field layout (sign, 8-bit exponent, 23-bit fraction)
//   * L         = 2   output tile is L x L (each PPU produces a 2x2 tile)
//   * MANT_W    = 10  BFP mantissa magnitude bits, sign kept separately
//   * SLICE_W   = 5   photonic operand width; a mantissa is two slices
//   * EXP_W     = 6   shared exponent width (two's complement)
//   * 32 KB per DAC Player / ADC Capture SRAM, taken as 16384 2-byte samples
//   * NUM_PPU   = 100 photonic processing units
// The numbers follow the evaluated configuration; the 2-byte sample size and
// everything derived from it (K_MAX, accumulator width) are this design's own.
// It also provides acc_width() (signed dot-product width) and shr64/shl64,
// variable shifts written as mux stages, used by the FP32 <-> BFP converters.
package lmhp_pkg;

  typedef struct packed {
    logic        sign;
    logic [7:0]  exp;
    logic [22:0] frac;
  } fp32_t;

  localparam int unsigned L_DEF        = 2;
  localparam int unsigned MANT_W_DEF   = 10;
  localparam int unsigned SLICE_W_DEF  = 5;
  localparam int unsigned EXP_W_DEF    = 6;
  localparam int unsigned NUM_PPU_DEF  = 100;
  localparam int unsigned SRAM_BYTES   = 32768;
  localparam int unsigned SAMPLE_BYTES = 2;
  localparam int unsigned SRAM_DEPTH   = SRAM_BYTES / SAMPLE_BYTES;        // 16384 samples
  localparam int unsigned K_MAX_DEF    = SRAM_DEPTH / (L_DEF * L_DEF);     // 4096
  localparam int unsigned DAC_W_DEF    = 14;
  localparam int unsigned ADC_W_DEF    = 12;
  localparam int unsigned PHOT_LAT_DEF = 4;
  localparam int unsigned ADDR_W_DEF   = 24;                               // external memory word address

  // Signed dot-product width: 2*MANT_W product bits + log2(K) growth + sign.
  function automatic int unsigned acc_width(int unsigned mant_w, int unsigned k_max);
    return 2 * mant_w + $clog2(k_max) + 1;
  endfunction

  // Variable shifts built as log2 stages of constant shifts and 2:1 muxes, so
  // that synthesis maps them to multiplexers (no shifter cells for resource
  // sharing to pair up across the many lanes). Shift amounts of 64 or more
  // give zero.
  function automatic logic [63:0] shr64(logic [63:0] x, logic [6:0] s);
    for (int i = 0; i < 6; i++) if (s[i]) x = x >> (1 << i);
    if (s[6]) x = '0;
    return x;
  endfunction

  function automatic logic [63:0] shl64(logic [63:0] x, logic [6:0] s);
    for (int i = 0; i < 6; i++) if (s[i]) x = x << (1 << i);
    if (s[6]) x = '0;
    return x;
  endfunction

endpackage
