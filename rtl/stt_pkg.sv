// Shared types, constants and fixed-point helpers of the STT online tracker.
//
// Hit records follow the number formats of the design: every wire coordinate
// is a 24-bit signed fixed-point number (1 sign bit, 7 integer bits, 16
// fraction bits, unit cm), a tube is named by a 14-bit identifier made of a
// 3-bit sector, a 5-bit layer and a 6-bit tube number, and a stored hit is
// 96 bits wide: x, y, z (72 bits), the tube identifier (14 bits) and a 10-bit
// time. The fit arithmetic works in 64-bit signed numbers with the same 16
// fraction bits (type fix_t). The layer plan (8 inner axial, 8 stereo, 11
// outer axial layers) follows the detector description; the drift velocity,
// the time unit and the order of the fields in a record are this design's
// choices.
package stt_pkg;

  // ---------------------------------------------------------------- formats
  localparam int FRAC = 16;                      // fraction bits everywhere
  typedef logic signed [23:0] coord_t;           // Q7.16, cm
  typedef logic signed [63:0] fix_t;             // Q47.16 working format
  typedef logic [9:0]         hit_idx_t;         // ring-buffer slot of a hit
  typedef logic [9:0]         dtime_t;           // drift time, 1 ns units
  typedef logic [11:0]        atime_t;           // arrival time in a burst, 1 ns

  typedef struct packed {
    logic [2:0] seg;                             // sector 0..5
    logic [4:0] layer;                           // layer 0..26
    logic [5:0] tube;                            // tube in the layer
  } tube_id_t;                                   // 14 bits

  // Hit as stored in the ring buffer: 72 + 14 + 10 = 96 bits.
  typedef struct packed {
    coord_t   x;
    coord_t   y;
    coord_t   z;
    tube_id_t id;
    dtime_t   t;                                 // drift time = arrival - T0
  } hit_t;

  // Hit as delivered by the burst source: arrival time instead of drift time.
  typedef struct packed {
    coord_t   x;
    coord_t   y;
    coord_t   z;
    tube_id_t id;
    atime_t   t_arr;
  } raw_hit_t;

  // One entry of a tracklet as passed from the track finder to the fitters.
  typedef struct packed {
    hit_idx_t   idx;
    logic [4:0] layer;
  } trk_hit_t;

  // Result of the transverse fit x^2 + y^2 + a x + b y = 0.
  typedef struct packed {
    logic ok;
    fix_t a;
    fix_t b;
    fix_t r;                                     // circle radius, cm
    fix_t inv_r;                                 // 1/r, 1/cm
    fix_t pt;                                    // GeV/c
  } pt_res_t;

  // Result of the longitudinal fit Z = m s + z0 (s = arc length in XY).
  typedef struct packed {
    logic ok;
    fix_t pt;                                    // GeV/c
    fix_t pz;                                    // GeV/c
    fix_t dzds;                                  // m = dZ/ds = pz/pt
    fix_t z0;                                    // cm, Z at the origin
  } pz_res_t;

  // ---------------------------------------------------------------- layers
  localparam int N_LAYERS     = 27;
  localparam int STEREO_FIRST = 8;
  localparam int STEREO_LAST  = 15;
  localparam int MAX_TUBES    = 64;

  // -------------------------------------------------------------- constants
  localparam fix_t ONE            = 64'sd65536;
  localparam fix_t DRIFT_VEL      = 64'sd164;     // 0.0025 cm/ns: 0.5 cm in 200 ns
  localparam fix_t TAN_SKEW       = 64'sd3320;    // tan(2.9 deg)
  localparam fix_t COT_SKEW       = 64'sd1293692; // 1/tan(2.9 deg)
  localparam fix_t PT_PER_CM      = 64'sd393;     // 0.3 * 2 T / 100: GeV/c per cm
  localparam fix_t ONE_24TH       = 64'sd2731;    // 1/24

  function automatic logic is_stereo(input logic [4:0] layer);
    return (layer >= 5'(STEREO_FIRST)) && (layer <= 5'(STEREO_LAST));
  endfunction

  // Stereo double-layers alternate their skew: layers 8,9 +, 10,11 -, ...
  function automatic logic skew_neg(input logic [4:0] layer);
    logic [4:0] rel;
    rel = layer - 5'(STEREO_FIRST);
    return rel[1];
  endfunction

  function automatic fix_t to_fix(input coord_t c);
    return fix_t'(c);
  endfunction

  // Product of two Q.16 numbers, rounded toward minus infinity.
  function automatic fix_t fmul(input fix_t p, input fix_t q);
    logic signed [127:0] w;
    w = 128'(p) * 128'(q);
    return fix_t'(w >>> FRAC);
  endfunction

  function automatic fix_t drift_radius(input dtime_t t);
    return fix_t'({1'b0, t}) * DRIFT_VEL;
  endfunction

  function automatic fix_t fabs(input fix_t p);
    return (p < 0) ? -p : p;
  endfunction

endpackage
