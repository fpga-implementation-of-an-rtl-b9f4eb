// fovea_pkg: types and constants shared by the event-driven selective-attention
// pipeline.
//
// Pixel coordinates are 8-bit (the 240x180 DAVIS240C array fits in 8 bits per
// axis). A pixel address is the concatenation {y, x}, so the state memories are
// 2^16 deep and no multiplier is needed to form an address; this packing is a
// choice of this design. The pixel state is the 21-bit signed fixed-point format
// given for RAM_FR (1 sign, 12 integer and 8 fractional bits). Timestamps are
// 32-bit counts of the timestamp tick (1 us by default).
//
// AER word format on the sensor bus (this design's choice, modelled on the
// DAVIS240 serial address format in which a row (y) word is followed by one or
// more column (x) words):
//   data[9]   : 1 = x (column) word, 0 = y (row) word
//   data[8]   : polarity, valid in x words (1 = ON, 0 = OFF)
//   data[7:0] : coordinate
package fovea_pkg;

  localparam int unsigned COORD_W = 8;
  localparam int unsigned ADDR_W  = 2 * COORD_W;
  localparam int unsigned AER_W   = 10;
  localparam int unsigned FR_W    = 21;  // pixel state width
  localparam int unsigned FR_FRAC = 8;   // fractional bits of the pixel state
  localparam int unsigned TS_W    = 32;  // timestamp width

  // Sensor size (DAVIS240C)
  localparam int unsigned SENSOR_W = 240;
  localparam int unsigned SENSOR_H = 180;

  typedef logic [COORD_W-1:0] coord_t;
  typedef logic signed [FR_W-1:0] fr_t;       // Q12.8 signed
  typedef logic [TS_W-1:0] ts_t;

  localparam fr_t FR_ONE = fr_t'(1 << FR_FRAC);  // 1.0 in Q12.8
  localparam fr_t FR_MAX = {1'b0, {(FR_W-1){1'b1}}};
  localparam fr_t FR_MIN = {1'b1, {(FR_W-1){1'b0}}};

  // Event leaving a DPE: a merged pixel_ID with polarity
  typedef struct packed {
    coord_t y;
    coord_t x;
    logic   pol;
  } pixel_ev_t;

  // Event leaving DPE (Fov): absolute pixel plus its position inside the FOA
  typedef struct packed {
    coord_t y;
    coord_t x;
    logic   pol;
    coord_t local_y;
    coord_t local_x;
  } fov_ev_t;

  // Region of interest used by both top-down biasing blocks (inclusive bounds)
  typedef struct packed {
    coord_t x_min;
    coord_t x_max;
    coord_t y_min;
    coord_t y_max;
  } roi_t;

  // Top-down biasing parameters (TDB-Parameters)
  typedef struct packed {
    roi_t roi;
    fr_t  gain_in;   // state-change gain for events inside the ROI (TDM)
    fr_t  gain_out;  // state-change gain for events outside the ROI (TDM)
  } tdb_params_t;

  function automatic logic in_roi(roi_t r, coord_t x, coord_t y);
    return (x >= r.x_min) && (x <= r.x_max) && (y >= r.y_min) && (y <= r.y_max);
  endfunction

  // Piecewise-linear exp(-u): breakpoints at u = k/2, k = 0..16, value
  // round(65536 * exp(-k/2)) in unsigned Q1.16. Beyond u = 8 the value is 0.
  localparam int unsigned EXP_SEGS = 16;
  localparam int unsigned EXP_Y_W  = 17;
  typedef logic [EXP_Y_W-1:0] exp_y_t;
  localparam exp_y_t EXP_Y [0:EXP_SEGS] = '{
    17'd65536, 17'd39750, 17'd24109, 17'd14623, 17'd8869, 17'd5380, 17'd3263,
    17'd1979,  17'd1200,  17'd728,   17'd442,   17'd268,  17'd162,  17'd99,
    17'd60,    17'd36,    17'd22
  };

  // Saturate a wide signed value into the pixel-state format
  function automatic fr_t sat_fr(logic signed [47:0] v);
    if (v > 48'(FR_MAX)) return FR_MAX;
    if (v < 48'(FR_MIN)) return FR_MIN;
    return fr_t'(v);
  endfunction

endpackage
