// sparc_pkg: number formats and small helper types shared by the SPARC
// adaptive-optics real-time controller.
//
// Pixels are 16-bit unsigned values and reconstruction-matrix coefficients
// are 16-bit two's-complement fixed point, as the design's host interface
// delivers them. Everything else here is a choice of this implementation:
//   * slopes are 16-bit signed, 12 fractional bits, in units of pixels
//     (a centre-of-gravity offset of +1.0 pixel is 16'h1000);
//   * the matrix-vector accumulator is 48 bits wide, so 2*50*50 products
//     of two 16-bit operands cannot overflow it;
//   * the integrated phase (one per actuator) is kept in 32 bits and has the
//     same LSB as the 16-bit actuator value sent out;
//   * gain and leak are unsigned Q1.15 (16'h8000 is 1.0).
package sparc_pkg;

  localparam int unsigned PIX_W      = 16;
  localparam int unsigned COEF_W     = 16;
  localparam int unsigned SLOPE_W    = 16;
  localparam int unsigned SLOPE_FRAC = 12;
  localparam int unsigned ACC_W      = 48;
  localparam int unsigned PHASE_W    = 32;
  localparam int unsigned ACT_W      = 16;
  localparam int unsigned GAIN_W     = 16;
  localparam int unsigned GAIN_FRAC  = 15;

  typedef logic        [PIX_W-1:0]   pix_t;
  typedef logic signed [COEF_W-1:0]  coef_t;
  typedef logic signed [SLOPE_W-1:0] slope_t;
  typedef logic signed [ACC_W-1:0]   acc_t;
  typedef logic signed [PHASE_W-1:0] phase_t;
  typedef logic signed [ACT_W-1:0]   act_t;

  // One subaperture's pair of slopes, as it travels from the WPU to the
  // AO reconstructor.
  typedef struct packed {
    slope_t sx;
    slope_t sy;
  } slope_pair_t;

  // Which of the two sub-matrices of a row of subapertures is meant.
  typedef enum logic {
    PART_X = 1'b0,
    PART_Y = 1'b1
  } part_e;

  // Saturate a signed value held in 64 bits to PHASE_W bits.
  function automatic phase_t sat_phase(input logic signed [63:0] v);
    if (v > 64'sd2147483647)       return phase_t'(32'sh7fffffff);
    else if (v < -64'sd2147483648) return phase_t'(32'sh80000000);
    else                           return phase_t'(v[PHASE_W-1:0]);
  endfunction

  // Ceiling of a/b for the small configuration numbers used here.
  function automatic int unsigned ceil_div(input int unsigned a, input int unsigned b);
    return (a + b - 1) / b;
  endfunction

endpackage
