// cordic_pkg: shared widths, number formats and the arctangent table of the
// spherical-to-Cartesian CORDIC processor.
//
// Number formats (both follow the paper):
//   * Angles are 16-bit two's complement words in which one degree is
//     2^16/720 ~= 91.02 LSB, so 45 deg = 16'h1000, 90 deg = 16'h2000 and the
//     word spans -360 .. +360 deg.
//   * Magnitudes (r, x, y, z) are 16-bit two's complement integers scaled by
//     10000, so 1.0 = 16'h2710. The processor applies the CORDIC gain
//     G ~= 1.6468 once per 2-D stage; the caller pre-scales the input by 1/G
//     per stage (r = 16'h0E68 for unit radius through both stages).
//
// ATAN_TABLE holds atan(2^-i) in the angle format, for i = 0..15:
//   ATAN_TABLE[i] = round( atan(2^-i) [deg] * 65536 / 720 )
// The paper prints the same values as hex digit strings with leading zeros
// dropped (e.g. "4FD9" for 16'h04FD.9); rounding those to whole LSBs is this
// design's reading of the table.
package cordic_pkg;

  // Width of every data and angle word (paper: x[15..0], angle[15..0]).
  localparam int unsigned DATA_W = 16;
  // Number of micro-rotations per 2-D stage (paper: LUT for 0 <= i <= 15,
  // latency 16 clock cycles).
  localparam int unsigned N_ITER = 16;
  // Address width of the angle look-up table (paper: address[3..0]).
  localparam int unsigned ADDR_W = 4;

  typedef logic signed [DATA_W-1:0] word_t;

  // One CORDIC state vector: two coordinates and the residual angle.
  typedef struct packed {
    word_t x;
    word_t y;
    word_t z;
  } vec_t;

  localparam logic [DATA_W-1:0] ATAN_TABLE [N_ITER] = '{
    16'h1000, 16'h0972, 16'h04FE, 16'h0289,
    16'h0146, 16'h00A3, 16'h0051, 16'h0029,
    16'h0014, 16'h000A, 16'h0005, 16'h0003,
    16'h0001, 16'h0001, 16'h0000, 16'h0000
  };

endpackage
