// accel_pkg: types and constant functions shared by the FFT and SVD datapaths.
//
// Angles are binary angles: an ANGLE_W-bit two's-complement word in which the
// full circle is 2^ANGLE_W, so +pi/-pi is 1 << (ANGLE_W-1) and wrap-around is
// free. The arctangent table atan(2^-i) is stored once as 32-bit binary angles
// (round(atan(2^-i) / (2*pi) * 2^32)) and rounded down to the width a user
// needs. The same table drives the run-time CORDIC of the SVD unit and the
// elaboration-time CORDIC that fills the twiddle-factor lookup tables, so no
// real arithmetic is needed anywhere in the RTL.
//
// The paper names an angle lookup table of precomputed arctangents; its
// contents, the binary-angle format and the fixed-point formats are this
// design's choices.
package accel_pkg;

  // Input data mode, selected per job by the control unit.
  typedef enum logic {
    MODE_FFT = 1'b0,
    MODE_SVD = 1'b1
  } mode_e;

  // CORDIC operating mode.
  typedef enum logic {
    CORDIC_ROTATE = 1'b0,   // rotate (x, y) by z, drive z to 0
    CORDIC_VECTOR = 1'b1    // drive y to 0, accumulate the angle in z
  } cordic_mode_e;

  // atan(2^-i) as a 32-bit binary angle (2^32 = full circle).
  function automatic logic [31:0] atan32(input int unsigned i);
    case (i)
      0:  return 32'd536870912;
      1:  return 32'd316933406;
      2:  return 32'd167458907;
      3:  return 32'd85004756;
      4:  return 32'd42667331;
      5:  return 32'd21354465;
      6:  return 32'd10679838;
      7:  return 32'd5340245;
      8:  return 32'd2670163;
      9:  return 32'd1335087;
      10: return 32'd667544;
      11: return 32'd333772;
      12: return 32'd166886;
      13: return 32'd83443;
      14: return 32'd41722;
      15: return 32'd20861;
      16: return 32'd10430;
      17: return 32'd5215;
      18: return 32'd2608;
      19: return 32'd1304;
      20: return 32'd652;
      21: return 32'd326;
      22: return 32'd163;
      23: return 32'd81;
      24: return 32'd41;
      25: return 32'd20;
      26: return 32'd10;
      27: return 32'd5;
      28: return 32'd3;
      29: return 32'd1;
      default: return 32'd0;
    endcase
  endfunction

  // atan(2^-i) rounded to a binary angle of w bits (w <= 32).
  function automatic longint atan_w(input int unsigned i, input int unsigned w);
    longint t;
    t = longint'(atan32(i));
    if (w >= 32) return t;
    return (t + (64'sd1 <<< (31 - w))) >>> (32 - w);
  endfunction

  // 1/K of an iterative CORDIC, K = prod sqrt(1 + 2^-2i), as Q0.30.
  localparam longint INV_K_Q30 = 64'sd652032874;
  // The same constant as Q0.16, used to remove the gain from magnitudes.
  localparam int unsigned INV_K_Q16 = 39797;

  // Twiddle factor W_L^m = exp(-j*2*pi*m/L) for 0 <= m < L/2, as a
  // fixed-point number with `frac` fraction bits. part = 0 returns the real
  // part cos(2*pi*m/L), part = 1 the imaginary part -sin(2*pi*m/L).
  // Computed at elaboration by a 30-step CORDIC rotation in Q30.
  function automatic longint twiddle_part(input longint m, input longint L,
                                          input bit part, input int unsigned frac);
    longint ang, x, y, xn, yn, c, s, r, tmp;
    bit     upper;
    ang   = (m <<< 32) / L;                 // angle in [0, pi) as 32-bit binary angle
    upper = (ang >= (64'sd1 <<< 30));        // past pi/2: rotate by pi/2 afterwards
    if (upper) ang = ang - (64'sd1 <<< 30);
    x = INV_K_Q30;
    y = 0;
    for (int i = 0; i < 30; i++) begin
      if (ang >= 0) begin
        xn  = x - (y >>> i);
        yn  = y + (x >>> i);
        ang = ang - longint'(atan32(i));
      end else begin
        xn  = x + (y >>> i);
        yn  = y - (x >>> i);
        ang = ang + longint'(atan32(i));
      end
      x = xn;
      y = yn;
    end
    if (upper) begin
      c = -y;
      s = x;
    end else begin
      c = x;
      s = y;
    end
    tmp = part ? -s : c;
    r = (tmp + (64'sd1 <<< (29 - frac))) >>> (30 - frac);
    return r;
  endfunction

  // Reverse the low `bits` bits of v.
  function automatic int unsigned bit_reverse(input int unsigned v, input int unsigned bits);
    int unsigned r;
    r = 0;
    for (int unsigned i = 0; i < bits; i++) r = (r << 1) | ((v >> i) & 1);
    return r;
  endfunction

endpackage
