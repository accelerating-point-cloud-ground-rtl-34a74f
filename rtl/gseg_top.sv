// gseg_top: parallel ground segmentation accelerator for a solid-state lidar.
//
// A frame of NSLICE*NROWS*NCOLS points (5 x 126 x 125 = 78,750 by default)
// streams in as the sensor sends it. frame_reorg undoes the sensor's zig-zag
// order and writes the points into frame_buffer, one bank per subframe. When
// the last point is written, pu_scheduler runs the NPU slice processing units
// (three by default) over the subframes in rounds; each unit segments the
// ground of one subframe in a single bottom-up streaming pass and writes its
// labels into label_mask_buffer, from which a host reads the ground mask.
// While a frame is being processed the input is held off (pt_rdy low); the
// next frame may be loaded once done has pulsed.
//
// The five-slice split, the 126 x 125 subframe, the set of processing units
// working on subframes in parallel (three in the paper's main configuration)
// and the steps inside a unit follow the paper. Load-then-process
// sequencing, the banked memories and the host read port are this design's.
//
// Interface: valid/ready point input; thresholds init_th and delta_th (angle
// units, 65536 per turn) held while busy; done pulse at the end of each
// frame; proc_cycles holds the cycles from the last point written to done;
// a synchronous label read port (data one cycle after rd_en); per-unit event
// flags for statistics.
module gseg_top
  import gseg_pkg::*;
#(
  parameter int unsigned NSLICE = NUM_SLICES,
  parameter int unsigned NPU    = NUM_PU,
  parameter int unsigned NROWS  = ROWS,
  parameter int unsigned NCOLS  = COLS,
  localparam int unsigned AW    = $clog2(NROWS*NCOLS),
  localparam int unsigned BW    = (NSLICE > 1) ? $clog2(NSLICE) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  angle_t         init_th,
  input  angle_t         delta_th,
  // point stream from the sensor
  input  logic           pt_vld,
  input  point_t         pt,
  output logic           pt_rdy,
  // status
  output logic           busy,
  output logic           done,
  output logic [31:0]    proc_cycles,
  output logic [3:0]     round,
  // label readout
  input  logic           rd_en,
  input  logic [BW-1:0]  rd_sub,
  input  logic [6:0]     rd_row,
  input  col_t           rd_col,
  output logic           rd_label,
  // per-unit events: point filled in, seed, propagated from below / left
  output logic [NPU-1:0] ev_fixed,
  output logic [NPU-1:0] ev_seed,
  output logic [NPU-1:0] ev_below,
  output logic [NPU-1:0] ev_left
);
  // ---- load -----------------------------------------------------------------
  logic          w_en, frame_done;
  logic [BW-1:0] w_bank;
  logic [AW-1:0] w_addr;
  point_t        w_data;

  frame_reorg #(.NSLICE(NSLICE), .NROWS(NROWS), .NCOLS(NCOLS)) u_reorg (
    .clk, .rst_n,
    .frame_hold(busy),
    .in_vld(pt_vld), .in_pt(pt), .in_rdy(pt_rdy),
    .wr_en(w_en), .wr_bank(w_bank), .wr_addr(w_addr), .wr_data(w_data),
    .frame_done
  );

  // ---- schedule -------------------------------------------------------------
  logic          pu_start [NPU];
  logic          pu_done  [NPU];
  logic [BW-1:0] pu_sub   [NPU];
  logic          sched_busy;

  pu_scheduler #(.NSLICE(NSLICE), .NPU(NPU)) u_sched (
    .clk, .rst_n,
    .start(frame_done),
    .pu_done, .pu_start, .pu_sub,
    .busy(sched_busy), .done, .round
  );

  // busy covers the cycle between the last write and the scheduler's start.
  logic started_q;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) started_q <= 1'b0;
    else        started_q <= frame_done;
  assign busy = frame_done || started_q || sched_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) proc_cycles <= '0;
    else if (frame_done) proc_cycles <= '0;
    else if (busy) proc_cycles <= proc_cycles + 32'd1;
  end

  // ---- frame buffer and processing units ------------------------------------
  logic          fb_en   [NPU];
  logic [AW-1:0] fb_addr [NPU];
  point_t        fb_data [NPU];

  frame_buffer #(.NSLICE(NSLICE), .NPU(NPU), .DEPTH(NROWS*NCOLS)) u_fbuf (
    .clk, .rst_n,
    .wr_en(w_en), .wr_bank(w_bank), .wr_addr(w_addr), .wr_data(w_data),
    .rd_en(fb_en), .rd_bank(pu_sub), .rd_addr(fb_addr), .rd_data(fb_data)
  );

  logic          l_vld    [NPU];
  logic [6:0]    l_row    [NPU];
  col_t          l_col    [NPU];
  logic          l_ground [NPU];

  for (genvar p = 0; p < NPU; p++) begin : g_pu
    logic l_valid_unused, pu_busy_unused;
    slice_pu #(.NROWS(NROWS), .NCOLS(NCOLS)) u_pu (
      .clk, .rst_n,
      .start(pu_start[p]), .init_th, .delta_th,
      .busy(pu_busy_unused), .done(pu_done[p]),
      .rd_en(fb_en[p]), .rd_addr(fb_addr[p]), .rd_data(fb_data[p]),
      .lbl_vld(l_vld[p]), .lbl_row(l_row[p]), .lbl_col(l_col[p]),
      .lbl_ground(l_ground[p]), .lbl_valid(l_valid_unused),
      .ev_fixed(ev_fixed[p]), .ev_seed(ev_seed[p]),
      .ev_below(ev_below[p]), .ev_left(ev_left[p])
    );
  end

  // ---- label masks ----------------------------------------------------------
  label_mask_buffer #(.NSLICE(NSLICE), .NPU(NPU), .NROWS(NROWS), .NCOLS(NCOLS)) u_lmask (
    .clk, .rst_n,
    .wr_en(l_vld), .wr_bank(pu_sub), .wr_row(l_row), .wr_col(l_col), .wr_label(l_ground),
    .rd_en, .rd_bank(rd_sub), .rd_row, .rd_col, .rd_label
  );
endmodule
