// slice_pu: slice processing unit. Segments the ground of one subframe.
//
// On start it reads its subframe from the frame buffer bottom-up (row
// NROWS-1 first), left to right inside a row, one point per cycle, followed by
// two padding rows that flush the row-delayed stages. The points pass through
//   frame_repair -> elevation_matrix -> value_smoothing -> label_propagation
// and a ground label per point streams out, again bottom-up. This is the
// processing unit of the paper's five-slice architecture, a chain of the
// steps of its Algorithm 1 (frame repair, elevation matrix, seed, label
// propagation) plus the smoothing module it names. Reading the subframe
// bottom-up so that the whole chain is one streaming pass is this design's
// choice.
//
// Interface: start (one cycle, while idle); a synchronous read port into the
// frame buffer (data one cycle after address); a label stream with no
// back-pressure; done pulses with the last label. Thresholds are held
// constant while busy.
//
// Timing: (NROWS+2)*NCOLS read cycles, and done follows the last read by the
// pipeline latency, 2*(CORDIC_ITER+1) + 7 cycles.
module slice_pu
  import gseg_pkg::*;
#(
  parameter int unsigned NROWS = ROWS,
  parameter int unsigned NCOLS = COLS,
  localparam int unsigned AW   = $clog2(NROWS*NCOLS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  angle_t        init_th,
  input  angle_t        delta_th,
  output logic          busy,
  output logic          done,
  // frame buffer read port
  output logic          rd_en,
  output logic [AW-1:0] rd_addr,
  input  point_t        rd_data,
  // label stream
  output logic          lbl_vld,
  output logic [6:0]    lbl_row,
  output col_t          lbl_col,
  output logic          lbl_ground,
  output logic          lbl_valid,
  // event flags, for statistics
  output logic          ev_fixed,
  output logic          ev_seed,
  output logic          ev_below,
  output logic          ev_left
);
  // ---- reader ---------------------------------------------------------------
  logic          rd_act;
  row_t          r_q;
  col_t          c_q;
  logic [AW-1:0] a_q;

  wire last_c = (c_q == col_t'(NCOLS-1));
  wire last_r = (r_q == row_t'(-2));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_act <= 1'b0;
      busy   <= 1'b0;
      r_q <= '0; c_q <= '0; a_q <= '0;
    end else begin
      if (start && !busy) begin
        rd_act <= 1'b1;
        busy   <= 1'b1;
        r_q    <= row_t'(NROWS-1);
        c_q    <= '0;
        a_q    <= AW'((NROWS-1)*NCOLS);
      end else if (rd_act) begin
        if (!last_c) begin
          c_q <= c_q + col_t'(1);
          a_q <= a_q + AW'(1);
        end else begin
          c_q <= '0;
          r_q <= r_q - row_t'(1);
          a_q <= a_q - AW'(2*NCOLS - 1);
          if (last_r) rd_act <= 1'b0;
        end
      end
      if (done) busy <= 1'b0;
    end
  end

  assign rd_en   = rd_act && (r_q >= 0);
  assign rd_addr = a_q;

  // Align the beat tag with the memory's one-cycle read latency.
  logic m_vld, m_pad;
  row_t m_row;
  col_t m_col;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) m_vld <= 1'b0;
    else        m_vld <= rd_act;
  always_ff @(posedge clk) begin
    m_row <= r_q;
    m_col <= c_q;
    m_pad <= (r_q < 0);
  end

  point_t m_pt;
  always_comb begin
    m_pt = rd_data;
    if (m_pad) m_pt.valid = 1'b0;
  end

  // ---- processing chain -----------------------------------------------------
  logic   f_vld;  row_t f_row;  col_t f_col;  point_t f_pt;
  logic   e_vld;  row_t e_row;  col_t e_col;  angle_t e_a;  logic e_av;
  logic   s_vld;  row_t s_row;  col_t s_col;  angle_t s_a;  logic s_av;
  logic   p_vld;  row_t p_row;  col_t p_col;  logic p_g, p_v;
  logic   f_fixed, p_seed, p_below, p_left;

  frame_repair u_repair (
    .clk, .rst_n,
    .in_vld(m_vld), .in_row(m_row), .in_col(m_col), .in_pt(m_pt),
    .out_vld(f_vld), .out_row(f_row), .out_col(f_col), .out_pt(f_pt),
    .out_fixed(f_fixed)
  );

  elevation_matrix #(.NROWS(NROWS), .NCOLS(NCOLS)) u_elev (
    .clk, .rst_n,
    .in_vld(f_vld), .in_row(f_row), .in_col(f_col), .in_pt(f_pt),
    .out_vld(e_vld), .out_row(e_row), .out_col(e_col),
    .out_alpha(e_a), .out_avalid(e_av)
  );

  value_smoothing #(.NROWS(NROWS), .NCOLS(NCOLS)) u_smooth (
    .clk, .rst_n,
    .in_vld(e_vld), .in_row(e_row), .in_col(e_col),
    .in_alpha(e_a), .in_avalid(e_av),
    .out_vld(s_vld), .out_row(s_row), .out_col(s_col),
    .out_alpha(s_a), .out_avalid(s_av)
  );

  label_propagation #(.NROWS(NROWS), .NCOLS(NCOLS)) u_prop (
    .clk, .rst_n, .init_th, .delta_th,
    .in_vld(s_vld), .in_row(s_row), .in_col(s_col),
    .in_alpha(s_a), .in_avalid(s_av),
    .out_vld(p_vld), .out_row(p_row), .out_col(p_col),
    .out_ground(p_g), .out_valid(p_v),
    .out_seed(p_seed), .out_below(p_below), .out_left(p_left)
  );

  assign ev_fixed   = f_vld && f_fixed;
  assign ev_seed    = p_vld && p_seed;
  assign ev_below   = p_vld && p_below;
  assign ev_left    = p_vld && p_left;
  assign lbl_vld    = p_vld;
  assign lbl_row    = 7'(p_row);
  assign lbl_col    = p_col;
  assign lbl_ground = p_g;
  assign lbl_valid  = p_v;
  assign done       = p_vld && (p_row == 0) && (p_col == col_t'(NCOLS-1));
endmodule
