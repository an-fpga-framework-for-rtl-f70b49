// ivn_pkg -- shared sizes, types and fixed-point helpers of the iVisNav
// least-squares core.
//
// The core solves the weighted normal equations x = (H' R^-1 H)^-1 H' R^-1 y
// for six beacon measurements and the six rates (vx, vy, vz, wx, wy, wz).
// All matrices are N x N = 6 x 6 and every datapath word outside the matrix
// inverter is a 32-bit two's-complement fixed-point number, as in the paper.
// The paper does not give the split between integer and fraction bits; this
// design uses Q16.16 (FRAC = 16) by default, a choice of its own.
//
// Fixed-point multiply-accumulate: products are formed at 64 bits, summed at
// 64 bits, then shifted right by FRAC (floor) and saturated to 32 bits. The
// rounding and saturation rules are this design's own choices.
package ivn_pkg;

  localparam int unsigned N     = 6;   // beacons / states (paper: six)
  localparam int unsigned W     = 32;  // data word width (paper: 32-bit)
  localparam int unsigned FRAC  = 16;  // fraction bits (assumed)

  typedef logic signed [W-1:0]   fx_t;      // Q16.16 word
  typedef logic signed [2*W-1:0] acc_t;     // full-precision accumulator
  typedef fx_t                   vec_t [N];
  typedef fx_t                   mat_t [N][N];

  // Saturate a 64-bit value (already scaled) to a 32-bit word.
  function automatic fx_t sat32(input acc_t v);
    if (v > acc_t'(32'sh7fff_ffff))       return fx_t'(32'sh7fff_ffff);
    else if (v < -acc_t'(64'sh8000_0000)) return fx_t'(32'sh8000_0000);
    else                                  return fx_t'(v[W-1:0]);
  endfunction

  // Scale a full-precision accumulator back to Q16.16 (floor, then saturate).
  function automatic fx_t acc_to_fx(input acc_t a);
    return sat32(a >>> FRAC);
  endfunction

  // Full-precision product of two fixed-point words.
  function automatic acc_t fx_prod(input fx_t a, input fx_t b);
    return acc_t'(a) * acc_t'(b);
  endfunction

  // Operating state of the PL, as in the published state diagram.
  typedef enum logic [1:0] {
    ST_IDLE      = 2'd0,
    ST_SEND_DATA = 2'd1,
    ST_COMPUTE   = 2'd2,
    ST_DONE      = 2'd3
  } ivn_state_e;


endpackage
