// tf_pkg: formats and constants shared by the TimeFloats macro.
//
// Numbers are 8-bit floating point: a 4-bit exponent and a 4-bit mantissa,
// no sign bit. A value is mant * 2^(exp - EXP_BIAS), with the mantissa read
// as a plain unsigned integer (no hidden leading one is inserted). The
// product-sum output carries a wider exponent (OUT_E_W bits, bias OUT_BIAS)
// because the sum of two exponents plus the ADC scale spans more than four
// bits. The 4/4 split follows the paper; the bias, the plain-integer mantissa
// and the output exponent width are choices of this design.
//
// Time-domain quantities are carried as single-bit pulses on the time-base
// clock: one clock tick is the smallest pulse-width step (one exponent LSB in
// the exponent adder, one mantissa LSB in the time DAC, about 1 ns for the
// 15-tick maximum mantissa pulse).
package tf_pkg;

  localparam int unsigned M_W       = 4;   // mantissa bits (paper: 4)
  localparam int unsigned E_W       = 4;   // exponent bits (paper: 4)
  localparam int unsigned EXP_BIAS  = 8;   // exponent bias (design choice)
  localparam int unsigned ESUM_W    = E_W + 1;       // width of I_E + W_E
  localparam int unsigned ADC_BITS  = 4;   // shared ADC resolution (paper: 4)
  localparam int unsigned OUT_E_W   = 6;   // output exponent width (design choice)
  localparam int unsigned OUT_BIAS  = 2 * EXP_BIAS;  // output exponent bias

  // Extra ticks added to every exponent-sum pulse so that a zero sum still
  // gives an edge the detector can sample (the RC path has a fixed offset).
  localparam int unsigned EXP_PULSE_OFFSET = 1;

  typedef struct packed {
    logic [E_W-1:0] exp;
    logic [M_W-1:0] mant;
  } fp8_t;

  typedef struct packed {
    logic [OUT_E_W-1:0] exp;
    logic [M_W-1:0]     mant;
  } fp_out_t;

endpackage
