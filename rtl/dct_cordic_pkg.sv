// dct_cordic_pkg -- shared types and constants of the CORDIC-based 8-point DCT.
//
// The fixed-angle rotators of the DCT are built from shift-and-add CORDIC
// micro-rotations. For each rotation angle and each precision degree P, a short
// list of micro-rotations (shift i, direction sigma) approximates the angle as
// theta ~= sum_k sigma_k * atan(2^-i_k). This package holds those lists and the
// elaboration-time arithmetic derived from them:
//
//   * step_shift / step_sign / num_steps : the micro-rotation lists.
//   * cordic_gain   : G = prod_k sqrt(1 + 2^-2 i_k), the magnitude growth of an
//                     uncompensated micro-rotation chain (the inverse of K).
//   * comp_coef     : round(2^CF / (2 G)), the constant that the scale-factor
//                     compensation stage multiplies by (1/G undoes the CORDIC
//                     growth, 1/2 is the normalisation of the 8-point DCT).
//   * table_angle   : the angle that a list actually rotates by.
//
// The lists for pi/4, 3pi/8, pi/16 and 3pi/16 at P = 1e-3 and P = 1e-4 are the
// published decomposition tables, with two sign readings of this design's own:
// the pi/4 entry is one i=0 step taken in the rotator's own direction, and for
// 3pi/8 at P = 1e-3 the signs + + - - are used (the signs printed for that entry,
// - + - -, do not sum to 3pi/8; + + - - are those of the same four shifts at
// P = 1e-4 and reach 3pi/8 within 7.2e-4 rad). The 7pi/16 rotation has no list of
// its own: it is an exact quarter turn followed by the pi/16 list in the
// opposite direction, so it shares the pi/16 gain.
package dct_cordic_pkg;

  // Rotation angles used by the 8-point DCT flow graph.
  typedef enum logic [2:0] {
    ANG_PI4   = 3'd0,  // 4pi/16
    ANG_3PI8  = 3'd1,  // 6pi/16
    ANG_PI16  = 3'd2,  // pi/16
    ANG_3PI16 = 3'd3,  // 3pi/16
    ANG_7PI16 = 3'd4   // 7pi/16 = pi/2 - pi/16
  } angle_e;

  // Precision degree of the micro-rotation decomposition.
  typedef enum logic {
    PREC_1E3 = 1'b0,   // P = 1e-3 (default configuration)
    PREC_1E4 = 1'b1    // P = 1e-4
  } prec_e;

  localparam int MAX_STEPS = 6;

  // Angle whose micro-rotation list a rotator runs (7pi/16 runs the pi/16 list).
  function automatic angle_e base_angle(angle_e a);
    return (a == ANG_7PI16) ? ANG_PI16 : a;
  endfunction

  function automatic int num_steps(angle_e a, prec_e p);
    case (base_angle(a))
      ANG_PI4:   return 1;
      ANG_3PI8:  return (p == PREC_1E3) ? 4 : 6;
      ANG_PI16:  return (p == PREC_1E3) ? 4 : 5;
      default:   return 3;                      // ANG_3PI16, same at both precisions
    endcase
  endfunction

  // Shift amount i of step k. The P = 1e-3 lists are the first num_steps entries
  // of the P = 1e-4 lists, so one table per angle serves both precisions.
  function automatic int step_shift(angle_e a, int k);
    int t3pi8 [MAX_STEPS] = '{0, 1, 4, 7, 10, 12};
    int tpi16 [MAX_STEPS] = '{2, 4, 6, 9, 13, 0};
    int t3pi16[MAX_STEPS] = '{1, 3, 10, 0, 0, 0};
    case (base_angle(a))
      ANG_PI4:  return 0;
      ANG_3PI8: return t3pi8[k % MAX_STEPS];
      ANG_PI16: return tpi16[k % MAX_STEPS];
      default:  return t3pi16[k % MAX_STEPS];
    endcase
  endfunction

  // Direction sigma of step k: +1 turns counter-clockwise, -1 clockwise.
  function automatic int step_sign(angle_e a, int k);
    int s3pi8 [MAX_STEPS] = '{1, 1, -1, -1, -1, 1};
    int spi16 [MAX_STEPS] = '{1, -1, 1, -1, 1, 1};
    int s3pi16[MAX_STEPS] = '{1, 1, 1, 1, 1, 1};
    case (base_angle(a))
      ANG_PI4:  return 1;
      ANG_3PI8: return s3pi8[k % MAX_STEPS];
      ANG_PI16: return spi16[k % MAX_STEPS];
      default:  return s3pi16[k % MAX_STEPS];
    endcase
  endfunction

  // Magnitude growth G of the uncompensated micro-rotation chain.
  function automatic real cordic_gain(angle_e a, prec_e p);
    real g = 1.0;
    for (int k = 0; k < num_steps(a, p); k++)
      g = g * $sqrt(1.0 + 2.0 ** (-2 * step_shift(a, k)));
    return g;
  endfunction

  // Scale-factor compensation constant round(2^cf / (2 G)).
  function automatic int comp_coef(angle_e a, prec_e p, int cf);
    return int'($floor((2.0 ** cf) / (2.0 * cordic_gain(a, p)) + 0.5));
  endfunction

  // Angle in radians that the list rotates by (7pi/16: quarter turn minus the pi/16 list).
  function automatic real table_angle(angle_e a, prec_e p);
    real t = 0.0;
    for (int k = 0; k < num_steps(a, p); k++)
      t = t + step_sign(a, k) * $atan(2.0 ** (-step_shift(a, k)));
    return (a == ANG_7PI16) ? (2.0 * $atan(1.0) - t) : t;
  endfunction

endpackage
