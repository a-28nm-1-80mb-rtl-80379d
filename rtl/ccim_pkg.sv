// ccim_pkg: shared sizes and types of the complex-number hybrid CIM macro.
//
// Operands are 8-bit signed-magnitude (SMF) values: bit 7 is the sign and bits
// 6:0 the magnitude, for inputs and weights alike. A product of two operands is
// split by bit weight 2^(i+j) (i = input bit, j = weight bit):
//   * the three heaviest partial products, I6*W6 (2^12), I6*W5 and I5*W6 (2^11),
//     go to the digital CIM (DCIM), which counts them in units of 2^11;
//   * the other partial products with i+j >= 4 go to the analog CIM (ACIM);
//   * partial products with i+j <= 3 are truncated.
// The CIM output LSB is therefore 2^11 of the exact integer MAC. The sizes
// (8 channels, 8 complex elements per channel, 64 weight words, 7-bit ADC)
// follow the paper; the bit assignment of a 16-bit weight word ({Im, Re}) is
// this design's choice.
package ccim_pkg;

  localparam int unsigned OP_BITS    = 8;   // SMF operand width
  localparam int unsigned MAG_BITS   = 7;   // magnitude bits of an operand
  localparam int unsigned ELEMS      = 8;   // complex elements per dot product
  localparam int unsigned UNITS      = 2 * ELEMS; // real products per lane
  localparam int unsigned CHANNELS   = 8;   // complex CIM units in the macro
  localparam int unsigned ROWS       = 64;  // weight words per CIM-SRAM
  localparam int unsigned WORD_BITS  = 2 * OP_BITS; // {W_im, W_re}
  localparam int unsigned ADC_BITS   = 7;   // SAR ADC resolution
  localparam int unsigned LSB_SHIFT  = 11;  // output LSB = 2^11 of the MAC
  localparam int unsigned TRUNC_MAX  = 3;   // partial products with i+j <= 3 dropped
  localparam int unsigned Q_BITS     = 20;  // signed ACIM charge, |Q| <= 126208

  typedef logic [OP_BITS-1:0]  smf_t;    // {sign, magnitude[6:0]}
  typedef logic signed [7:0]   cimo_t;   // one 8-bit CIM result

endpackage
