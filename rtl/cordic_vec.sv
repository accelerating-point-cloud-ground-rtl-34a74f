// cordic_vec: pipelined CORDIC in vectoring mode for a first-quadrant vector.
//
// Given non-negative x and y it returns the angle atan2(y, x) and the
// magnitude K*sqrt(x^2 + y^2), where K = 1.64676 is the CORDIC gain of
// ITER iterations. One shift-add micro-rotation per pipeline stage; a new
// vector may enter every cycle and leaves ITER+1 cycles later. A SIDE_W-bit
// sideband travels alongside so callers can keep stream tags aligned.
// Used for the horizontal range of a point and for the elevation angle of a
// segment. CORDIC itself is this design's choice: the paper names the angle
// computation but not how it is done.
//
// Timing: in_vld at cycle t -> out_vld at cycle t+ITER+1. Angle units are
// 65536 per full turn, so the result lies in [0, 16384] (0 to 90 degrees),
// clamped to that range. Internally the vector carries 8 fractional guard
// bits so that short vectors still give accurate angles.
module cordic_vec #(
  parameter int unsigned IN_W   = 22,  // width of the unsigned inputs
  parameter int unsigned ITER   = 16,  // micro-rotations (max 16)
  parameter int unsigned SIDE_W = 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_vld,
  input  logic [IN_W-1:0]    in_x,
  input  logic [IN_W-1:0]    in_y,
  input  logic [SIDE_W-1:0]  in_side,
  output logic               out_vld,
  output logic [IN_W:0]      out_mag,   // K * |(x, y)|, one bit wider than the inputs
  output logic [15:0]        out_ang,
  output logic [SIDE_W-1:0]  out_side
);
  // atan(2^-i) in units of 2^-16 turn.
  localparam logic [15:0] ATAN_TAB [16] = '{
    16'd8192, 16'd4836, 16'd2555, 16'd1297, 16'd651, 16'd326, 16'd163, 16'd81,
    16'd41,   16'd20,   16'd10,   16'd5,    16'd3,   16'd1,   16'd1,   16'd0 };

  localparam int unsigned G = 8;         // fractional guard bits
  localparam int unsigned W = IN_W + G + 3;  // room for the gain and a sign

  logic signed [W-1:0] xs [ITER+1];
  logic signed [W-1:0] ys [ITER+1];
  logic signed [17:0]  zs [ITER+1];
  logic [SIDE_W-1:0]   ss [ITER+1];
  logic                vs [ITER+1];

  always_ff @(posedge clk) begin
    xs[0] <= W'(in_x) <<< G;
    ys[0] <= W'(in_y) <<< G;
    zs[0] <= '0;
    ss[0] <= in_side;
  end
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) vs[0] <= 1'b0;
    else        vs[0] <= in_vld;

  for (genvar i = 0; i < ITER; i++) begin : g_stage
    always_ff @(posedge clk) begin
      if (ys[i] >= 0) begin
        xs[i+1] <= xs[i] + (ys[i] >>> i);
        ys[i+1] <= ys[i] - (xs[i] >>> i);
        zs[i+1] <= zs[i] + 18'(ATAN_TAB[i]);
      end else begin
        xs[i+1] <= xs[i] - (ys[i] >>> i);
        ys[i+1] <= ys[i] + (xs[i] >>> i);
        zs[i+1] <= zs[i] - 18'(ATAN_TAB[i]);
      end
      ss[i+1] <= ss[i];
    end
    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n) vs[i+1] <= 1'b0;
      else        vs[i+1] <= vs[i];
  end

  assign out_vld  = vs[ITER];
  assign out_mag  = (IN_W+1)'(xs[ITER] >>> G);
  assign out_ang  = (zs[ITER] < 0) ? 16'd0 : (zs[ITER] > 18'sd16384) ? 16'd16384 : 16'(zs[ITER]);
  assign out_side = ss[ITER];

  initial assert (ITER <= 16) else $error("cordic_vec: ITER above 16");
endmodule
