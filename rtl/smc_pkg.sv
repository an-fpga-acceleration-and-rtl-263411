// smc_pkg: types and constants shared by the scan matcher core.
//
// Every real quantity (pose coordinates, ranges, angles, scores, steps) is a
// 32-bit signed fixed-point number with 16 integer and 16 fractional bits
// (Q16.16), as in the original design. Angles are in radians. The CORDIC
// arithmetic inside the coordinate transform uses a wider internal format
// (Q2.30); its constants live here as well.
package smc_pkg;

  localparam int unsigned FIX_W    = 32;
  localparam int unsigned FIX_FRAC = 16;

  typedef logic signed [FIX_W-1:0] fix_t;

  // Q16.16 constants
  localparam fix_t FIX_PI      = 32'sd205887;
  localparam fix_t FIX_HALF_PI = 32'sd102944;
  localparam fix_t FIX_TWO_PI  = 32'sd411775;

  // Robot / particle pose [x, y, theta]
  typedef struct packed {
    fix_t x;
    fix_t y;
    fix_t th;
  } pose_t;

  // One LiDAR measurement z^i = [r, theta] in the sensor frame
  typedef struct packed {
    fix_t r;
    fix_t th;
  } scan_t;

  // Additional parameters written over AXI4-Lite and shared by all submodules
  typedef struct packed {
    logic [15:0] num_iters;   // hill-climbing iterations per invocation
    logic [15:0] num_scans;   // number of valid measurements
    fix_t        origin_x;    // world position of cell (0,0) of the entire map
    fix_t        origin_y;
    fix_t        inv_res;     // 1 / Delta
    fix_t        lin_step;    // initial linear step of the pose update
    fix_t        ang_step;    // initial angular step of the pose update
    fix_t        free_delta;  // delta: distance of the missed point before the endpoint
  } params_t;

  // Number of entries of the searching window, (2K+1)^2 with K = 1
  localparam int unsigned WIN = 9;
  typedef logic [WIN-1:0]       win_t;     // one bit per window cell
  typedef fix_t [WIN-1:0]       lut_t;     // score lookup table u(d')

  // CORDIC (Q2.30): gain compensation 1/K and atan(2^-i)
  localparam int unsigned CORDIC_ITER = 20;
  localparam logic signed [31:0] CORDIC_INV_K = 32'sd652032874;

  function automatic logic signed [31:0] cordic_atan(input int unsigned i);
    case (i)
      0:  return 32'sd843314857;
      1:  return 32'sd497837829;
      2:  return 32'sd263043837;
      3:  return 32'sd133525159;
      4:  return 32'sd67021687;
      5:  return 32'sd33543516;
      6:  return 32'sd16775851;
      7:  return 32'sd8388437;
      8:  return 32'sd4194283;
      9:  return 32'sd2097149;
      default: return 32'sd1 <<< (30 - i);   // atan(2^-i) == 2^-i to Q2.30 precision
    endcase
  endfunction

  // Default score table for sigma = Delta: u = exp(-(kx^2+ky^2)/2) in Q16.16.
  // Window index k = (ky+1)*3 + (kx+1).
  localparam fix_t U_D0 = 32'sd65536;  // d'^2 = 0
  localparam fix_t U_D1 = 32'sd39750;  // d'^2 = Delta^2
  localparam fix_t U_D2 = 32'sd24109;  // d'^2 = 2 Delta^2
  localparam lut_t LUT_DEFAULT = {U_D2, U_D1, U_D2,
                                  U_D1, U_D0, U_D1,
                                  U_D2, U_D1, U_D2};

  // Q16.16 product, rounded toward minus infinity
  function automatic fix_t fix_mul(input fix_t a, input fix_t b);
    logic signed [2*FIX_W-1:0] p;
    p = 64'(a) * 64'(b);
    return fix_t'(p >>> FIX_FRAC);
  endfunction

endpackage
