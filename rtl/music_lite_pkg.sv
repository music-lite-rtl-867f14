// music_lite_pkg -- types and constants shared by the CORDIC-based Givens
// rotation datapath.
//
// Number formats used throughout:
//   * Data words (x, y) are 16-bit two's-complement integers, the operand width
//     of the 16-bit sign-extended adders the datapath is built around.
//   * Angles (z) are 16-bit two's-complement binary angles: the full 16-bit
//     range covers one turn, so 2^15 stands for pi radians, 16384 for pi/2,
//     and angle arithmetic wraps modulo 2*pi for free.
//   * The arctangent table holds round(atan(2^-i) * 2^15 / pi) for i = 0..15.
//     Entries beyond i = 15 are zero at this angle resolution.
package music_lite_pkg;

  localparam int unsigned DATA_W = 16;   // adder operand width (add16se)
  localparam int unsigned SUM_W  = 17;   // sign-extended sum width
  localparam int unsigned ANG_W  = 16;   // binary-angle width
  localparam int unsigned MAX_ITER = 16; // arctangent table depth

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [SUM_W-1:0]  sum_t;
  typedef logic signed [ANG_W-1:0]  angle_t;

  // CORDIC operating mode.
  //   CORDIC_ROTATE : rotate (x, y) by the angle z, driving z to zero.
  //   CORDIC_VECTOR : rotate (x, y) onto the positive x axis, driving y to
  //                   zero; z accumulates the angle atan2(y, x).
  typedef enum logic {
    CORDIC_ROTATE = 1'b0,
    CORDIC_VECTOR = 1'b1
  } cordic_mode_e;

  localparam angle_t ANGLE_HALF_PI = 16'sd16384;

  // atan(2^-i) as a binary angle (2^15 == pi).
  function automatic angle_t atan_lut(input logic [4:0] i);
    case (i)
      5'd0:  return 16'sd8192;
      5'd1:  return 16'sd4836;
      5'd2:  return 16'sd2555;
      5'd3:  return 16'sd1297;
      5'd4:  return 16'sd651;
      5'd5:  return 16'sd326;
      5'd6:  return 16'sd163;
      5'd7:  return 16'sd81;
      5'd8:  return 16'sd41;
      5'd9:  return 16'sd20;
      5'd10: return 16'sd10;
      5'd11: return 16'sd5;
      5'd12: return 16'sd3;
      5'd13: return 16'sd1;
      5'd14: return 16'sd1;
      default: return 16'sd0;
    endcase
  endfunction

  // Clamp a sign-extended 17-bit sum into the 16-bit data range.
  function automatic data_t sat16(input sum_t s);
    if (s[SUM_W-1] != s[SUM_W-2])
      return s[SUM_W-1] ? data_t'(16'sh8000) : data_t'(16'sh7fff);
    return s[DATA_W-1:0];
  endfunction

endpackage
