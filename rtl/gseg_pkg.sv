// gseg_pkg: types and constants shared by the solid-state lidar ground
// segmentation accelerator.
//
// Frame geometry (five subframes of 126 rows x 125 columns, 78,750 points per
// frame, three processing units) follows the paper. The point format (signed
// millimetre coordinates plus a validity flag), the angle encoding (2^16 units
// per full turn) and the default thresholds are this design's own choices.
package gseg_pkg;

  // Frame geometry.
  localparam int unsigned NUM_SLICES = 5;    // subframes per frame
  localparam int unsigned ROWS       = 126;  // scan lines per subframe
  localparam int unsigned COLS       = 125;  // points per scan line
  localparam int unsigned NUM_PU     = 3;    // slice processing units

  // Point format: signed coordinates in millimetres.
  localparam int unsigned COORD_W = 20;
  typedef logic signed [COORD_W-1:0] coord_t;

  typedef struct packed {
    logic   valid;  // 0 for a missing return (NaN in the sensor output)
    coord_t x;
    coord_t y;
    coord_t z;
  } point_t;

  // Angles: unsigned, 65536 units per full turn (1 unit = 0.0055 degree).
  localparam int unsigned ANG_W = 16;
  typedef logic [ANG_W-1:0] angle_t;

  // deg -> angle units, for constants only.
  function automatic angle_t deg2ang(int unsigned deg_x100);
    return angle_t'((longint'(deg_x100) * 65536 + 18000) / 36000);
  endfunction

  // Default thresholds: 30 degrees for a seed, 5 degrees between neighbours.
  localparam angle_t INIT_TH_DEFAULT  = 16'd5461;
  localparam angle_t DELTA_TH_DEFAULT = 16'd910;

  // Row index of a stream beat. Rows are streamed bottom-up (ROWS-1 first);
  // the negative values -1 and -2 mark the padding rows that flush the
  // row-delayed stages at the end of a subframe.
  typedef logic signed [7:0] row_t;
  typedef logic        [6:0] col_t;

  // CORDIC gain for 16 iterations, in Q2.14: 1.64676 * 16384.
  localparam int unsigned CORDIC_ITER = 16;
  localparam int unsigned CORDIC_K_Q14 = 26981;

endpackage
