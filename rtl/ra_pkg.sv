// ra_pkg: constants and small helper functions shared by the resolution-adaptive
// receiver. The array sizes (32 antennas, 16 UEs, four PPAC instances, 1..4-bit
// equalization matrix, up to 8-bit z) are the published chip's. Word widths,
// the twiddle and arctangent tables and the angle format are this design's own
// fixed-point choices:
//   * twiddles: round(1024*cos(2*pi*k/32)) and round(1024*sin(2*pi*k/32)), k = 0..15
//   * CORDIC arctangents: round(atan(2^-i)/(2*pi) * 2^16), i = 0..13, so a full
//     turn is 2^16 angle units
package ra_pkg;

  // array sizes
  localparam int unsigned B      = 32;  // BS antennas
  localparam int unsigned U      = 16;  // UEs
  localparam int unsigned NINST  = 4;   // PPAC instances = time-interleaving factor
  localparam int unsigned XB_MAX = 4;   // bits per X^H entry (PPAC rows per PE)
  localparam int unsigned ZB_MAX = 8;   // bits per z entry the PPAC accepts
  localparam int unsigned CG     = 4;   // bit-cells per clock-gate group

  // fixed-point widths
  localparam int unsigned AW     = 16;  // "analog" input word: full scale is +-2^15
  localparam int unsigned ROWW   = $clog2(2*B) + 2;        // row inner product, signed
  localparam int unsigned PEW    = ROWW + XB_MAX;          // x^H z_dot, signed
  localparam int unsigned ACCW   = PEW + ZB_MAX;           // x^H z, signed
  localparam int unsigned HW     = 11;  // LS channel estimate word, signed
  localparam int unsigned DW     = 16;  // FFT/IFFT data word, signed
  localparam int unsigned MW     = 18;  // CORDIC magnitude, unsigned
  localparam int unsigned ANGW   = 16;  // CORDIC angle, 2^16 units per turn
  localparam int unsigned NIT    = 14;  // CORDIC iterations
  localparam int unsigned RF     = 16;  // fractional bits of the reciprocals in the scan
  localparam int unsigned RW     = RF + 1;                 // reciprocal word
  localparam int unsigned NW     = 32;  // noise variance word
  localparam int unsigned CW     = 96;  // SURE cost word
  localparam int unsigned TWF    = 10;  // twiddle fractional bits

  typedef logic signed [DW-1:0] dw_t;
  typedef struct packed {
    dw_t re;
    dw_t im;
  } cplx_t;

  // twiddle factors of the 32-point transform, cos and sin of 2*pi*k/32
  localparam int TW_COS [16] = '{1024, 1004, 946, 851, 724, 569, 392, 200,
                                 0, -200, -392, -569, -724, -851, -946, -1004};
  localparam int TW_SIN [16] = '{0, 200, 392, 569, 724, 851, 946, 1004,
                                 1024, 1004, 946, 851, 724, 569, 392, 200};

  // CORDIC arctangent table
  localparam int ATAN [NIT] = '{8192, 4836, 2555, 1297, 651, 326, 163, 81,
                                41, 20, 10, 5, 3, 1};

  // round(65536/K^2) for the CORDIC gain K = 1.64676 of NIT iterations (applied twice)
  localparam int KINV2_Q16 = 24167;

  // mid-rise reconstruction: code c of q bits stands for 2c - (2^q - 1)
  function automatic logic signed [ZB_MAX+1:0] midrise(input logic [ZB_MAX-1:0] c,
                                                       input logic [3:0] q);
    logic signed [ZB_MAX+1:0] v;
    v = $signed({2'b00, c}) * 2 - ((10'sd1 <<< q) - 10'sd1);
    return v;
  endfunction

endpackage
