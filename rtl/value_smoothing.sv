// value_smoothing: smooths the elevation-angle matrix along each column.
//
// Each angle is replaced by the [1 2 1]/4 weighted mean of itself and its
// vertical neighbours in the same column: s(r) = (a(r+1) + 2 a(r) + a(r-1))/4.
// A neighbour that is missing (invalid, or outside the subframe) is replaced
// by the centre value; an invalid centre gives an invalid output. The paper
// has a "value smoothing module for elevation smoothing within the angular
// matrix" but gives no kernel; the column direction follows the range-image
// method the paper builds on, and the 3-tap kernel is this design's choice.
//
// Rows arrive bottom-up. Two line buffers keep the two rows below the input
// row; the output for row r is emitted when row r-1 arrives, so an input beat
// of row r produces an output beat of row r+1, and the bottom input row
// produces none. The stream must end with a padding row -1, which yields the
// top row's outputs.
//
// Timing: one beat per cycle, no stall, registered output (latency 1 cycle
// after the triggering input beat).
module value_smoothing
  import gseg_pkg::*;
#(
  parameter int unsigned NROWS = ROWS,
  parameter int unsigned NCOLS = COLS
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_vld,
  input  row_t   in_row,
  input  col_t   in_col,
  input  angle_t in_alpha,
  input  logic   in_avalid,
  output logic   out_vld,
  output row_t   out_row,
  output col_t   out_col,
  output angle_t out_alpha,
  output logic   out_avalid
);
  typedef struct packed {
    angle_t a;
    logic   v;
  } ent_t;

  ent_t lb1 [NCOLS];   // row in_row+1 (the output row)
  ent_t lb2 [NCOLS];   // row in_row+2 (below the output row)

  ent_t ctr, blw;
  logic has_below, has_above;
  angle_t a_b, a_c;
  logic [ANG_W+1:0] sum;

  always_comb begin
    ctr       = lb1[in_col];
    blw       = lb2[in_col];
    has_below = blw.v && (in_row + row_t'(2) <= row_t'(NROWS-1));
    has_above = in_avalid && (in_row >= 0);
    a_b       = has_below ? blw.a : ctr.a;
    a_c       = has_above ? in_alpha : ctr.a;
    sum       = (ANG_W+2)'(a_b) + (ANG_W+2)'({ctr.a, 1'b0}) + (ANG_W+2)'(a_c);
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) out_vld <= 1'b0;
    else        out_vld <= in_vld && (in_row < row_t'(NROWS-1));

  always_ff @(posedge clk) begin
    if (in_vld) begin
      lb2[in_col] <= lb1[in_col];
      lb1[in_col] <= '{a: in_alpha, v: in_avalid && (in_row >= 0)};
      out_row     <= in_row + row_t'(1);
      out_col     <= in_col;
      out_alpha   <= ANG_W'(sum >> 2);
      out_avalid  <= ctr.v;
    end
  end
endmodule
