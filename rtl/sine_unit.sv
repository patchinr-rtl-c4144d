// sine_unit: the sinusoidal activation of SIREN, in fixed point.
//
// Input x is signed Q7.24 (range +-128 rad), output sin(x) is signed Q1.30.
// The unit is combinational. It works in three steps:
//   1. range reduction: n = round(x / 2pi) with a multiply by 1/(2pi),
//      then r = x - n*2pi lies in [-pi, pi];
//   2. folding: r > pi/2 becomes pi - r, r < -pi/2 becomes -pi - r, so
//      |r| <= pi/2 and sin is unchanged;
//   3. an odd Taylor polynomial to the 9th power, evaluated by Horner's rule
//      in Q2.29: sin(r) = r(1 - r^2/6 + r^4/120 - r^6/5040 + r^8/362880).
// Truncation error of the polynomial is below 4e-6 on [-pi/2, pi/2].
//
// The paper asks for a resource-efficient sine activation and does not say
// how it is built; the range reduction and polynomial are this design's own.
module sine_unit
  import patchinr_pkg::*;
(
  input  logic signed [31:0] x,   // Q7.24
  output logic signed [31:0] y    // Q1.30
);

  localparam logic signed [63:0] INV_2PI_Q32 = 64'sd683565276;   // 2^32 / (2 pi)
  localparam logic signed [63:0] TWO_PI_Q24  = 64'sd105414357;   // 2 pi * 2^24
  localparam logic signed [63:0] PI_Q24      = 64'sd52707179;
  localparam logic signed [63:0] HALF_PI_Q24 = 64'sd26353589;
  // Taylor coefficients in Q.30
  localparam logic signed [63:0] C1 = 64'sd1073741824;           //  1
  localparam logic signed [63:0] C3 = -64'sd178956971;           // -1/6
  localparam logic signed [63:0] C5 = 64'sd8947849;              //  1/120
  localparam logic signed [63:0] C7 = -64'sd213044;              // -1/5040
  localparam logic signed [63:0] C9 = 64'sd2959;                 //  1/362880

  logic signed [63:0] xl, n, r, r29, r2, t;

  always_comb begin
    xl  = 64'(x);
    n   = (xl * INV_2PI_Q32 + (64'sd1 <<< 55)) >>> 56;
    r   = xl - n * TWO_PI_Q24;
    if (r > HALF_PI_Q24)       r = PI_Q24 - r;
    else if (r < -HALF_PI_Q24) r = -PI_Q24 - r;
    r29 = r <<< 5;                          // Q.29
    r2  = (r29 * r29) >>> 29;               // Q.29
    t   = C9;
    t   = C7 + ((r2 * t) >>> 29);
    t   = C5 + ((r2 * t) >>> 29);
    t   = C3 + ((r2 * t) >>> 29);
    t   = C1 + ((r2 * t) >>> 29);           // Q.30
    y   = 32'((r29 * t) >>> 29);            // Q.30
  end

endmodule
