// label_propagation: seed selection and one-pass ground label propagation.
//
// The smoothed angle matrix streams in bottom-up, row by row, left to right.
// A point is labelled ground when its angle is valid and one of these holds:
//   seed  - it is the lowest point of its column with a valid angle, and that
//           angle is below
//           init_th (the start of the ground at the bottom of the image);
//   below - the point under it is ground and their angles differ by less
//           than delta_th;
//   left  - the point to its left is ground and their angles differ by less
//           than delta_th.
// Because both the point below and the point to the left are decided before
// the current one, a single bottom-up pass propagates the label upward and
// to the right. The paper describes the step (initSeed, then labelPropagation
// in a pipelined "one-pass" module, working bottom-up) but not its rules; the
// rules above follow the elevation-angle method the paper uses, and the
// neighbourhood (below, left) and the seed rule are this design's choice.
// Algorithm 1's numIter iterations collapse to this one pass.
//
// A line buffer of one row keeps (ground, angle, valid-seen) of the row below.
//
// Timing: one beat per cycle, no stall, registered output, latency 1. The
// out_seed / out_below / out_left flags say which rule(s) made a point ground.
module label_propagation
  import gseg_pkg::*;
#(
  parameter int unsigned NROWS = ROWS,
  parameter int unsigned NCOLS = COLS
) (
  input  logic   clk,
  input  logic   rst_n,
  input  angle_t init_th,
  input  angle_t delta_th,
  input  logic   in_vld,
  input  row_t   in_row,
  input  col_t   in_col,
  input  angle_t in_alpha,
  input  logic   in_avalid,
  output logic   out_vld,
  output row_t   out_row,
  output col_t   out_col,
  output logic   out_ground,
  output logic   out_valid,
  output logic   out_seed,
  output logic   out_below,
  output logic   out_left
);
  typedef struct packed {
    logic   g;      // ground
    angle_t a;      // smoothed angle
    logic   seen;   // a valid point exists at or below this row in the column
  } ent_t;

  ent_t   lb [NCOLS];
  logic   left_g_q;
  angle_t left_a_q;

  ent_t   blw;
  logic   below_ok, seen_below, is_seed, by_below, by_left;

  function automatic angle_t absdiff(angle_t a, angle_t b);
    return (a > b) ? a - b : b - a;
  endfunction

  always_comb begin
    blw        = lb[in_col];
    below_ok   = (in_row < row_t'(NROWS-1));
    seen_below = below_ok && blw.seen;
    is_seed    = in_avalid && !seen_below && (in_alpha < init_th);
    by_below   = in_avalid && below_ok && blw.g && (absdiff(in_alpha, blw.a) < delta_th);
    by_left    = in_avalid && (in_col != '0) && left_g_q && (absdiff(in_alpha, left_a_q) < delta_th);
  end

  wire ground = is_seed || by_below || by_left;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_vld  <= 1'b0;
      left_g_q <= 1'b0;
    end else begin
      out_vld <= in_vld;
      if (in_vld) left_g_q <= ground;
    end
  end

  always_ff @(posedge clk) begin
    if (in_vld) begin
      lb[in_col] <= '{g: ground, a: in_alpha, seen: seen_below || in_avalid};
      left_a_q   <= in_alpha;
      out_row    <= in_row;
      out_col    <= in_col;
      out_ground <= ground;
      out_valid  <= in_avalid;
      out_seed   <= is_seed;
      out_below  <= by_below;
      out_left   <= by_left;
    end
  end
endmodule
