// approxcs_pkg - shared sizes and constants of the approximate compressed-sensing
// acquisition unit.
//
// The window length, measurement count, ones per row and the fractional width come
// from the paper's configuration: a 256-sample ECG window compressed to 128
// measurements by a Bernoulli sensing matrix with two ones per row, computed in fixed
// point with 33 fractional bits, and 40 % of the adder bits approximated. The number
// of integer bits and the default approximate full-adder truth table are this
// design's own choices (see approxcs_top for the reasoning).
package approxcs_pkg;

  localparam int unsigned N_DEFAULT          = 256;  // window length N (samples)
  localparam int unsigned M_DEFAULT          = 128;  // measurements M per window
  localparam int unsigned R_DEFAULT          = 2;    // ones per sensing-matrix row
  localparam int unsigned FRAC_BITS_DEFAULT  = 33;   // fractional bits of x and y
  localparam int unsigned INT_BITS_DEFAULT   = 3;    // integer bits incl. sign
  localparam int unsigned APPROX_PCT_DEFAULT = 40;   // % of adder bits made approximate

  // Truth tables of a 1-bit full adder, bit i of the constant is the output for
  // the input combination i = {a, b, cin}.
  localparam logic [7:0] FA_SUM_EXACT  = 8'h96;  // a ^ b ^ cin
  localparam logic [7:0] FA_COUT_EXACT = 8'hE8;  // majority(a, b, cin)

  // Default approximate cell: exact carry, sum = ~carry (two of eight sums wrong).
  localparam logic [7:0] LPAA_SUM_DEFAULT  = 8'h17;
  localparam logic [7:0] LPAA_COUT_DEFAULT = 8'hE8;

  // Approximate positions for a given total width and percentage (rounded down).
  function automatic int unsigned approx_bits(input int unsigned width, input int unsigned pct);
    return (width * pct) / 100;
  endfunction

endpackage
