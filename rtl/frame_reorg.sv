// frame_reorg: turns the raw solid-state lidar point sequence into write
// addresses of the organized frame buffer.
//
// The sensor delivers a frame as one column of NUM_SLICES*ROWS*COLS points
// (78,750 for the paper's sensor). The frame consists of NUM_SLICES equal
// subframes sent one after the other, each a ROWS x COLS matrix sent row by row
// in a zig-zag: every second row arrives right-to-left. This block counts the
// incoming points and, for each, emits the subframe (bank) it belongs to and
// its row-major address row*COLS+col inside that subframe, with the column
// mirrored on the reversed rows. The five-way split, the 126 x 125 shape and
// the zig-zag follow the paper. Which rows are mirrored is this design's
// reading of the paper's "even rows": counting rows from one, the 2nd, 4th,
// ... rows, i.e. odd row indices counting from zero.
//
// Interface: valid-only input (the producer must hold off while in_rdy is
// low, which is the case only while frame_hold is high), registered write
// port, one-cycle frame_done pulse together with the write of the last point.
module frame_reorg
  import gseg_pkg::*;
#(
  parameter int unsigned NSLICE = NUM_SLICES,
  parameter int unsigned NROWS  = ROWS,
  parameter int unsigned NCOLS  = COLS,
  localparam int unsigned AW    = $clog2(NROWS*NCOLS),
  localparam int unsigned BW    = (NSLICE > 1) ? $clog2(NSLICE) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          frame_hold,   // high while the loaded frame is still being processed
  input  logic          in_vld,
  input  point_t        in_pt,
  output logic          in_rdy,
  output logic          wr_en,
  output logic [BW-1:0] wr_bank,
  output logic [AW-1:0] wr_addr,
  output point_t        wr_data,
  output logic          frame_done
);
  logic [BW-1:0] bank_q;
  logic [7:0]    row_q;
  logic [7:0]    j_q;      // position inside the row, in arrival order
  logic [AW-1:0] base_q;   // row_q * NCOLS

  assign in_rdy = !frame_hold;

  wire fire     = in_vld && in_rdy;
  wire last_col = (j_q == 8'(NCOLS-1));
  wire last_row = (row_q == 8'(NROWS-1));
  wire last_bnk = (bank_q == BW'(NSLICE-1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bank_q <= '0; row_q <= '0; j_q <= '0; base_q <= '0;
      wr_en <= 1'b0; frame_done <= 1'b0;
    end else begin
      wr_en      <= fire;
      frame_done <= fire && last_col && last_row && last_bnk;
      if (fire) begin
        if (!last_col) j_q <= j_q + 8'd1;
        else begin
          j_q <= '0;
          if (!last_row) begin
            row_q  <= row_q + 8'd1;
            base_q <= base_q + AW'(NCOLS);
          end else begin
            row_q  <= '0;
            base_q <= '0;
            bank_q <= last_bnk ? '0 : bank_q + BW'(1);
          end
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (fire) begin
      wr_bank <= bank_q;
      wr_addr <= base_q + (row_q[0] ? AW'(NCOLS-1) - AW'(j_q) : AW'(j_q));
      wr_data <= in_pt;
    end
  end
endmodule
