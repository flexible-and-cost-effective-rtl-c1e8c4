// cordic_ref_pkg: reference models for the CORDIC testbenches.
//
// Everything here is computed from first principles in simulation, not taken
// from the RTL: the arctangent table is rebuilt with real arithmetic, the
// micro-rotation recurrence is a plain loop over 16-bit integers, and the
// ideal results use $sin/$cos. Angle words are 2^16/720 LSB per degree;
// magnitudes are integers scaled by 10000.
package cordic_ref_pkg;

  localparam real PI       = 3.14159265358979323846;
  localparam real LSB_DEG  = 65536.0 / 720.0;   // angle LSBs per degree
  localparam int  NIT      = 16;

  // round(atan(2^-i) in degrees * 65536/720)
  function automatic int atan_word(int i);
    real a;
    a = $atan(1.0 / (2.0 ** i)) * 180.0 / PI * LSB_DEG;
    return int'($floor(a + 0.5));
  endfunction

  // CORDIC gain of n micro-rotations: prod sqrt(1 + 2^-2i)
  function automatic real gain(int n);
    real g = 1.0;
    for (int i = 0; i < n; i++) g = g * $sqrt(1.0 + 2.0 ** (-2 * i));
    return g;
  endfunction

  function automatic real word_to_rad(shortint z);
    return real'(z) / LSB_DEG * PI / 180.0;
  endfunction

  // Bit-exact rotation-mode CORDIC on 16-bit two's complement words.
  function automatic void rotate(input shortint x0, input shortint y0,
                                 input shortint z0,
                                 output shortint xo, output shortint yo,
                                 output shortint zo);
    shortint x = x0, y = y0, z = z0, xt;
    for (int i = 0; i < NIT; i++) begin
      xt = x;
      if (z >= 0) begin
        x = x - (y >>> i);
        y = y + (xt >>> i);
        z = z - shortint'(atan_word(i));
      end else begin
        x = x + (y >>> i);
        y = y - (xt >>> i);
        z = z + shortint'(atan_word(i));
      end
    end
    xo = x; yo = y; zo = z;
  endfunction

  // Bit-exact spherical-to-Cartesian conversion with two cascaded stages.
  function automatic void sphere(input shortint r, input shortint th,
                                 input shortint ph,
                                 output shortint xo, output shortint yo,
                                 output shortint zo);
    shortint x1, y1, z1, z2;
    rotate(r, 16'sd0, th, x1, y1, z1);
    rotate(y1, 16'sd0, ph, xo, yo, z2);
    zo = x1;
  endfunction

  function automatic int iabs(int v);
    return (v < 0) ? -v : v;
  endfunction

endpackage
