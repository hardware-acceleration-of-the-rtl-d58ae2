// gipps_pkg -- number format and constants shared by the Gipps-model accelerator.
//
// Every quantity (speed, desired speed, acceleration, time step, ratios and
// intermediate products) is an unsigned fixed-point word of 14 bits: 8 integer
// bits and 6 fraction bits (Q8.6, resolution 1/64 = 0.0156). The 14-bit width
// and the 8+6 split follow the paper; keeping the numbers unsigned is this
// design's choice (see gipps_accel for how negative terms are avoided).
//
// Constants of equation (1): 0.025 is not representable in Q8.6 and is rounded
// to the nearest code, 2/64 = 0.03125. The factor 2.5 is applied with a shift
// and an add (2x + x/2), so it needs no constant here.
package gipps_pkg;

  localparam int unsigned W    = 14;  // word width
  localparam int unsigned FRAC = 6;   // fraction bits

  typedef logic [W-1:0] fix_t;

  localparam fix_t FIX_ONE   = fix_t'(1 << FRAC);  // 1.0
  localparam fix_t FIX_MAX   = '1;                 // 255.984375, saturation value
  localparam fix_t FIX_C0025 = fix_t'(2);          // 0.025 rounded to 2/64

  // Cycle of one evaluation, as sequenced by gipps_ctrl.
  //   C1: r = V/V*,  m = a*T
  //   C2: x1 = first Babylonian step on S = 0.025 + r,  m = m*(1-r)
  //   C3: x2 = second Babylonian step,  m = 2.5*m
  //   C4: Va = V + m*x2
  typedef enum logic [2:0] {
    ST_IDLE = 3'd0,
    ST_C1   = 3'd1,
    ST_C2   = 3'd2,
    ST_C3   = 3'd3,
    ST_C4   = 3'd4
  } step_t;

  // Saturating Q8.6 addition.
  function automatic fix_t sat_add(input fix_t x, input fix_t y);
    logic [W:0] s;
    s = {1'b0, x} + {1'b0, y};
    return s[W] ? FIX_MAX : s[W-1:0];
  endfunction

endpackage
