// gf2_pkg -- field sizes and reduction polynomials shared by the GF(2^m)
// hybrid modular multiplier.
//
// Every NIST binary-field polynomial used here has the form
// P(x) = x^m + r(x). The constants below hold r(x) as a bit vector (bit i =
// coefficient of x^i), wide enough for the largest field (m = 571); a module
// takes the low m bits. The polynomials are the FIPS 186-2 ones listed for
// m = 163, 233, 283 and 571, and the CM_MAX values are the Stage I
// (conventional multiplier) optimum sizes given for each curve. The B-571
// value is 72 rather than the 71 listed for that curve: splitting by
// ceil(m/2) gives 571 -> 286 -> 143 -> 72, and the 72-bit pieces are then
// multiplied conventionally.
package gf2_pkg;

  localparam int unsigned MAX_M = 571;

  typedef logic [MAX_M-1:0] rpoly_t;

  // B-163: x^163 + x^7 + x^6 + x^3 + 1 (default field of the design)
  localparam int unsigned M_B163      = 163;
  localparam rpoly_t      R_B163      = rpoly_t'(1) << 7 | rpoly_t'(1) << 6 | rpoly_t'(1) << 3 | rpoly_t'(1);
  localparam int unsigned CM_MAX_B163 = 41;

  // B-233: x^233 + x^70 + 1
  localparam int unsigned M_B233      = 233;
  localparam rpoly_t      R_B233      = rpoly_t'(1) << 70 | rpoly_t'(1);
  localparam int unsigned CM_MAX_B233 = 59;

  // B-283: x^283 + x^12 + x^7 + x^5 + 1
  localparam int unsigned M_B283      = 283;
  localparam rpoly_t      R_B283      = rpoly_t'(1) << 12 | rpoly_t'(1) << 7 | rpoly_t'(1) << 5 | rpoly_t'(1);
  localparam int unsigned CM_MAX_B283 = 71;

  // B-571: x^571 + x^10 + x^5 + x^2 + 1
  localparam int unsigned M_B571      = 571;
  localparam rpoly_t      R_B571      = rpoly_t'(1) << 10 | rpoly_t'(1) << 5 | rpoly_t'(1) << 2 | rpoly_t'(1);
  localparam int unsigned CM_MAX_B571 = 72;

endpackage
