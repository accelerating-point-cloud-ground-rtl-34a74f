// elevation_matrix: streams out the elevation-angle matrix of a subframe.
//
// For every point (r, c) it computes the angle, above the horizontal, of the
// segment joining it to the point (r-1, c) one scan line higher:
//     alpha(r, c) = atan2(|z(r) - z(r-1)|, |rho(r) - rho(r-1)|),
//     rho = sqrt(x^2 + y^2), the horizontal range.
// Flat ground gives angles near 0, a vertical wall angles near 90 degrees.
// This is the elevation-angle criterion of range-image ground segmentation
// that the paper builds on; the paper names the step (elevationMatrixCompute)
// but not its arithmetic, which is this design's: a CORDIC gives rho (scaled
// by the CORDIC gain K), the height difference is scaled by K with one
// constant multiplier so both legs share the scale, and a second CORDIC gives
// the angle.
//
// Rows arrive bottom-up (row ROWS-1 first), so the point above (r, c) arrives
// one row after it. A line buffer of one row of (rho, z, valid) holds the row
// below while the next row streams in; the angle of (r, c) is emitted when
// (r-1, c) arrives. Hence an input beat of row r produces an output beat of
// row r+1, and the first (bottom) input row produces none. The top row has no
// row above: the stream must end with two padding rows (-1, -2); row -1 yields
// the top row's angles, marked invalid, and row -2 yields a padding beat of
// row -1 for the next stage. An angle is valid only if both points are.
//
// Timing: one beat per cycle, no stall. Latency from an input beat to the
// output beat it triggers: 2*(CORDIC_ITER+1) + 2 cycles.
module elevation_matrix
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
  input  point_t in_pt,
  output logic   out_vld,
  output row_t   out_row,
  output col_t   out_col,
  output angle_t out_alpha,
  output logic   out_avalid
);
  localparam int unsigned RW = COORD_W + 1;   // rho*K width
  localparam int unsigned DW = COORD_W + 2;   // width of the CORDIC-2 legs

  typedef struct packed {
    logic [RW-1:0] rho;
    coord_t        z;
    logic          valid;
  } lb_t;

  // ---- stage 1: horizontal range of each point ---------------------------
  localparam int unsigned S1W = 8 + 7 + 1 + COORD_W;
  logic [COORD_W-1:0] ax, ay;
  logic               c1_vld;
  logic [RW-1:0]      c1_rho;
  logic [S1W-1:0]     c1_side;
  logic [15:0]        c1_ang_unused;

  assign ax = COORD_W'(in_pt.x < 0 ? -in_pt.x : in_pt.x);
  assign ay = COORD_W'(in_pt.y < 0 ? -in_pt.y : in_pt.y);

  cordic_vec #(.IN_W(COORD_W), .ITER(CORDIC_ITER), .SIDE_W(S1W)) u_rho (
    .clk, .rst_n,
    .in_vld  (in_vld),
    .in_x    (ax),
    .in_y    (ay),
    .in_side ({in_row, in_col, in_pt.valid, in_pt.z}),
    .out_vld (c1_vld),
    .out_mag (c1_rho),
    .out_ang (c1_ang_unused),
    .out_side(c1_side)
  );

  row_t   c1_row;
  col_t   c1_col;
  logic   c1_valid;
  coord_t c1_z;
  assign {c1_row, c1_col, c1_valid, c1_z} = c1_side;

  // ---- stage 2: line buffer and differences ------------------------------
  lb_t lb [NCOLS];
  lb_t below;
  assign below = lb[c1_col];

  logic          s2_vld, s2_av;
  row_t          s2_row;
  col_t          s2_col;
  logic [RW-1:0] s2_drho;
  logic [COORD_W:0] s2_dz;

  logic signed [RW:0]      drho_s;
  logic signed [COORD_W:0] dz_s;
  assign drho_s = $signed({1'b0, c1_rho}) - $signed({1'b0, below.rho});
  assign dz_s   = (COORD_W+1)'(c1_z) - (COORD_W+1)'(below.z);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) s2_vld <= 1'b0;
    else        s2_vld <= c1_vld && (c1_row < row_t'(NROWS-1));

  always_ff @(posedge clk) begin
    if (c1_vld) begin
      if (c1_row >= 0) lb[c1_col] <= '{rho: c1_rho, z: c1_z, valid: c1_valid};
      s2_row  <= c1_row + row_t'(1);
      s2_col  <= c1_col;
      s2_av   <= c1_valid && below.valid && (c1_row >= 0);
      s2_drho <= RW'(drho_s < 0 ? -drho_s : drho_s);
      s2_dz   <= (COORD_W+1)'(dz_s < 0 ? -dz_s : dz_s);
    end
  end

  // ---- stage 3: scale the height difference by the CORDIC gain -----------
  logic          s3_vld, s3_av;
  row_t          s3_row;
  col_t          s3_col;
  logic [DW-1:0] s3_x, s3_y;
  logic [COORD_W+15:0] dzk;
  assign dzk = (COORD_W+16)'(s2_dz) * (COORD_W+16)'(CORDIC_K_Q14);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) s3_vld <= 1'b0;
    else        s3_vld <= s2_vld;

  always_ff @(posedge clk) begin
    s3_row <= s2_row;
    s3_col <= s2_col;
    s3_av  <= s2_av;
    s3_x   <= DW'(s2_drho);
    s3_y   <= DW'(dzk >> 14);
  end

  // ---- stage 4: elevation angle -------------------------------------------
  localparam int unsigned S4W = 8 + 7 + 1;
  logic [S4W-1:0] c2_side;
  logic [DW:0]    c2_mag_unused;

  cordic_vec #(.IN_W(DW), .ITER(CORDIC_ITER), .SIDE_W(S4W)) u_alpha (
    .clk, .rst_n,
    .in_vld  (s3_vld),
    .in_x    (s3_x),
    .in_y    (s3_y),
    .in_side ({s3_row, s3_col, s3_av}),
    .out_vld (out_vld),
    .out_mag (c2_mag_unused),
    .out_ang (out_alpha),
    .out_side(c2_side)
  );
  assign {out_row, out_col, out_avalid} = c2_side;
endmodule
