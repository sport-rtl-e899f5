// sport_pkg: types, constants and elaboration-time helpers shared by the SPORT
// gaze-predictive truncation pipeline.
//
// Number formats used throughout the design (this design's own choice; the
// paper gives all quantities in floating point):
//   * angles are 32-bit binary angles (BAM): 2^32 units = 2*pi, so longitude
//     wraps for free; latitude is signed, +pi/2 = 2^30.
//   * sines and cosines are signed Q2.30 (1.0 = 2^30).
//   * WS-PSNR pixel weights cos(phi) are unsigned Q1.15 (1.0 = 2^15).
// Regions and their default truncation levels (FoV t=0, Border t=4,
// Background t=5) and the moderate WS-PSNR thresholds (40/35/30 dB) follow
// the paper.
package sport_pkg;

  // Perceptual regions of an ERP frame, in the order of the three banks.
  typedef enum logic [1:0] {
    REG_FOV    = 2'd0,
    REG_BORDER = 2'd1,
    REG_BG     = 2'd2
  } region_e;

  localparam int unsigned NUM_REGIONS = 3;

  // Pixel and SRAM word geometry.
  localparam int unsigned PIX_BITS    = 8;   // bits per colour channel
  localparam int unsigned CHANNELS    = 3;   // R, G, B
  localparam int unsigned WORD_BITS   = 32;  // TrunMEM word: 1024 x 32 bit
  localparam int unsigned BYTE_LANES  = WORD_BITS / PIX_BITS;

  typedef logic [2:0]  trunc_t;              // truncation level 0..7
  typedef logic [31:0] angle_t;              // binary angle
  typedef logic signed [31:0] q30_t;         // signed Q2.30

  // One tile metadata ROM entry: four 4-byte fields.
  typedef struct packed {
    q30_t   sin_lat;   // sin(phi_c)
    q30_t   cos_lat;   // cos(phi_c)
    angle_t lon;       // theta_c
    angle_t lat;       // phi_c
  } tile_meta_t;

  // Per-tile truncation levels chosen by Algorithm 2 for the three
  // region thresholds.
  typedef struct packed {
    trunc_t fov;
    trunc_t border;
    trunc_t bg;
  } level_set_t;

  // Binary-angle arctangent table: round(atan(2^-i) / (2*pi) * 2^32).
  localparam logic [31:0] ATAN_BAM [32] = '{
    32'd536870912, 32'd316933406, 32'd167458907, 32'd85004756,
    32'd42667331,  32'd21354465,  32'd10679838,  32'd5340245,
    32'd2670163,   32'd1335087,   32'd667544,    32'd333772,
    32'd166886,    32'd83443,     32'd41722,     32'd20861,
    32'd10430,     32'd5215,      32'd2608,      32'd1304,
    32'd652,       32'd326,       32'd163,       32'd81,
    32'd41,        32'd20,        32'd10,        32'd5,
    32'd3,         32'd1,         32'd1,         32'd0
  };

  // CORDIC gain compensation: prod(1/sqrt(1+2^-2i)) in Q2.30.
  localparam logic signed [31:0] CORDIC_K_Q30 = 32'sd652032874;

  // Integer rotation-mode CORDIC, used at elaboration and in initial blocks
  // to fill the constant tables. Returns {sin, cos} in Q2.30.
  function automatic logic [63:0] cordic_sincos(input logic [31:0] ang,
                                                input int iters);
    logic signed [33:0] x, y, xn, yn;
    logic signed [32:0] z;
    logic [31:0] a;
    logic        flip;
    // fold into [-pi/2, pi/2): angles in the second or third quadrant are
    // rotated by pi and the result negated
    flip = (ang[31:30] == 2'b01) || (ang[31:30] == 2'b10);
    a    = flip ? ang - 32'h8000_0000 : ang;
    x    = 34'(CORDIC_K_Q30);
    y    = '0;
    z    = 33'(signed'(a));
    for (int i = 0; i < iters; i++) begin
      if (z >= 0) begin
        xn = x - (y >>> i);
        yn = y + (x >>> i);
        z  = z - 33'(ATAN_BAM[i]);
      end else begin
        xn = x + (y >>> i);
        yn = y - (x >>> i);
        z  = z + 33'(ATAN_BAM[i]);
      end
      x = xn;
      y = yn;
    end
    if (flip) begin
      x = -x;
      y = -y;
    end
    return {y[31:0], x[31:0]};
  endfunction

  // cos of an angle given in whole degrees, Q2.30 (for thresholds).
  function automatic q30_t cos_deg_q30(input int deg);
    logic [63:0] sc;
    sc = cordic_sincos(32'((64'(deg) << 32) / 360), 30);
    return q30_t'(sc[31:0]);
  endfunction

endpackage
