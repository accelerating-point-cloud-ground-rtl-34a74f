// frame_repair: fills missing points of a subframe stream.
//
// The sensor marks points without a return as invalid (NaN). Points arrive
// row by row, left to right inside a row. A missing point is replaced by the
// last valid point seen earlier in the same row; a missing point with no
// valid point before it in its row stays missing. Padding beats (row < 0)
// pass through untouched. The paper names this step (frameRepair) without
// describing it; the hold-last-valid rule is this design's simplest choice.
//
// Timing: one beat per cycle, no stall, output registered (latency 1).
// out_fixed flags beats whose point was filled in.
module frame_repair
  import gseg_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_vld,
  input  row_t   in_row,
  input  col_t   in_col,
  input  point_t in_pt,
  output logic   out_vld,
  output row_t   out_row,
  output col_t   out_col,
  output point_t out_pt,
  output logic   out_fixed
);
  point_t hold_q;   // last valid point of the current row
  logic   have_q;   // hold_q is meaningful

  wire    row_start = (in_col == '0);
  wire    can_fill  = have_q && !row_start && in_row >= 0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_vld <= 1'b0;
      have_q  <= 1'b0;
    end else begin
      out_vld <= in_vld;
      if (in_vld) begin
        if (in_pt.valid) have_q <= 1'b1;
        else if (row_start) have_q <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_vld) begin
      out_row   <= in_row;
      out_col   <= in_col;
      out_fixed <= !in_pt.valid && can_fill;
      out_pt    <= (!in_pt.valid && can_fill) ? hold_q : in_pt;
      if (in_pt.valid) hold_q <= in_pt;
    end
  end
endmodule
