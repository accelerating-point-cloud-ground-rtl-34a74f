// tb_gseg_pu_sweep: the five unit-count configurations (one to five
// processing units, full-size 5 x 126 x 125 frames) side by side.
//
// The same synthetic frame is streamed into five accelerators that differ
// only in NPU. Each must produce exactly the same label mask, equal to the
// floating-point reference wherever that is not within a threshold margin,
// and must finish in ceil(5/NPU) rounds: its processing time is checked
// against that many subframe passes, and configurations with the same number
// of rounds (three and four units) must take the same time.
`timescale 1ns/1ps
module tb_gseg_pu_sweep;
  import gseg_pkg::*;
  import tb_ref_pkg::*;

  localparam int NS = NUM_SLICES, NR = ROWS, NC = COLS, DEPTH = NR * NC;
  localparam int NCFG = 5;
  localparam real MARGIN = 60.0;
  localparam int PASS = (NR + 2) * NC;   // read cycles of one subframe pass

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  angle_t init_th = INIT_TH_DEFAULT, delta_th = DELTA_TH_DEFAULT;
  logic   pt_vld = 0;
  point_t pt = '0;
  logic   rd_en = 0;
  logic [2:0] rd_sub = '0;
  logic [6:0] rd_row = '0;
  col_t   rd_col = '0;

  logic        rdy   [NCFG];
  logic        dn    [NCFG];
  logic        lbl   [NCFG];
  logic [31:0] pcyc  [NCFG];
  int          ndone [NCFG];

  for (genvar k = 0; k < NCFG; k++) begin : g_cfg
    logic busy_unused;
    logic [3:0] round_unused;
    logic [k:0] evf_unused, evs_unused, evb_unused, evl_unused;
    gseg_top #(.NPU(k + 1)) dut (
      .clk, .rst_n, .init_th, .delta_th,
      .pt_vld, .pt, .pt_rdy(rdy[k]),
      .busy(busy_unused), .done(dn[k]), .proc_cycles(pcyc[k]), .round(round_unused),
      .rd_en, .rd_sub, .rd_row, .rd_col, .rd_label(lbl[k]),
      .ev_fixed(evf_unused), .ev_seed(evs_unused), .ev_below(evb_unused), .ev_left(evl_unused)
    );
    always @(posedge clk) if (dn[k]) ndone[k]++;
  end

  int checks = 0, failures = 0, n_skip = 0, n_ground = 0;
  point_t frame [NS * DEPTH];

  initial begin
    point_t pin[];
    bit glo[], ghi[];
    int c, rounds, t [NCFG];
    for (int k = 0; k < NCFG; k++) ndone[k] = 0;
    for (int s = 0; s < NS; s++)
      for (int r = 0; r < NR; r++)
        for (int cc = 0; cc < NC; cc++)
          frame[s * DEPTH + r * NC + cc] = scene_point(s, r, cc, NR, NC, NS);
    repeat (4) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    // all five are idle and ready, so one stream feeds them all
    for (int s = 0; s < NS; s++)
      for (int r = 0; r < NR; r++)
        for (int j = 0; j < NC; j++) begin
          c = (r % 2 == 1) ? NC - 1 - j : j;
          pt_vld = 1;
          pt = frame[s * DEPTH + r * NC + c];
          @(negedge clk);
        end
    pt_vld = 0;
    // wait for the slowest (one unit)
    while (ndone[0] == 0) @(negedge clk);
    @(negedge clk);
    for (int k = 0; k < NCFG; k++) begin
      rounds = (NS + k) / (k + 1);
      t[k] = int'(pcyc[k]);
      $display("%0d unit(s): %0d rounds, %0d cycles (%.3f ms at 167.54 MHz)", k + 1, rounds, t[k], t[k] / 167.54e3);
      checks++;
      if (ndone[k] != 1 || t[k] < rounds * PASS || t[k] > rounds * (PASS + 60)) begin
        failures++; $display("FAIL %0d unit(s): %0d cycles, %0d done pulses", k + 1, t[k], ndone[k]);
      end
    end
    checks++;
    if (t[2] != t[3]) begin failures++; $display("FAIL three and four units differ in time"); end
    checks++;
    if (!(t[0] > t[1] && t[1] > t[2] && t[3] > t[4])) begin failures++; $display("FAIL time does not fall with more units"); end
    // label masks
    pin = new[DEPTH];
    for (int s = 0; s < NS; s++) begin
      for (int i = 0; i < DEPTH; i++) pin[i] = frame[s * DEPTH + i];
      ref_segment(pin, NR, NC, real'(init_th) - MARGIN, real'(delta_th) - MARGIN, glo);
      ref_segment(pin, NR, NC, real'(init_th) + MARGIN, real'(delta_th) + MARGIN, ghi);
      for (int i = 0; i < DEPTH; i++) begin
        @(negedge clk);
        rd_en = 1; rd_sub = 3'(s); rd_row = 7'(i / NC); rd_col = col_t'(i % NC);
        @(negedge clk);
        rd_en = 0;
        for (int k = 1; k < NCFG; k++) begin
          checks++;
          if (lbl[k] != lbl[0]) begin
            failures++;
            if (failures < 20) $display("FAIL s%0d r%0d c%0d: %0d units disagree with one", s, i / NC, i % NC, k + 1);
          end
        end
        if (glo[i] != ghi[i]) n_skip++;
        else begin
          checks++;
          n_ground += glo[i];
          if (lbl[0] != glo[i]) begin
            failures++;
            if (failures < 20) $display("FAIL s%0d r%0d c%0d: ground=%0b, reference %0b", s, i / NC, i % NC, lbl[0], glo[i]);
          end
        end
      end
    end
    $display("%0d ground points, %0d on a threshold skipped", n_ground, n_skip);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
