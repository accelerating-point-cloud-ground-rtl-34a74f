// tb_gseg_top: end-to-end testbench of the accelerator at its default size
// (five 126 x 125 subframes, three processing units).
//
// Two synthetic frames are streamed in the sensor's order (subframe after
// subframe, every second row right-to-left). The second frame is offered
// while the first is still being processed, so the input is held off. The
// second frame uses tighter thresholds. After each frame the whole label mask
// is read back through the read port and compared with the floating-point
// reference of tb_ref_pkg (points whose label flips within a small threshold
// margin are not compared). The processing time is checked against the
// two-round schedule and against the run time reported for three units at
// 167.54 MHz (0.28 ms, 46,911 cycles). Each mechanism (repair, seed,
// propagation from below and from the left, second scheduling round, input
// hold-off, threshold change, rejected points) must occur at least once.
`timescale 1ns/1ps
module tb_gseg_top;
  import gseg_pkg::*;
  import tb_ref_pkg::*;

  localparam int NS = NUM_SLICES, NR = ROWS, NC = COLS, NP = NUM_PU;
  localparam int DEPTH = NR * NC;
  localparam int NROUND = (NS + NP - 1) / NP;
  localparam real MARGIN = 60.0;
  localparam int PAPER_CYCLES = 46911;   // 0.28 ms at 167.54 MHz

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  angle_t init_th, delta_th;
  logic pt_vld = 0, pt_rdy, busy, done, rd_en = 0, rd_label;
  point_t pt;
  logic [31:0] proc_cycles;
  logic [3:0] round;
  logic [2:0] rd_sub;
  logic [6:0] rd_row;
  col_t rd_col;
  logic [NP-1:0] ev_fixed, ev_seed, ev_below, ev_left;

  gseg_top dut (.*);

  int checks = 0, failures = 0;
  int n_fixed = 0, n_seed = 0, n_below = 0, n_left = 0, n_round2 = 0, n_stall = 0;
  int n_reject = 0, n_thchange = 0, n_skip = 0;
  bit lab1 [NS * DEPTH];

  always @(posedge clk) begin
    n_fixed += $countones(ev_fixed);
    n_seed  += $countones(ev_seed);
    n_below += $countones(ev_below);
    n_left  += $countones(ev_left);
    if (busy && round == 4'd1) n_round2++;
    if (pt_vld && !pt_rdy) n_stall++;
  end

  point_t frame [NS * DEPTH];

  task automatic build_frame();
    for (int s = 0; s < NS; s++)
      for (int r = 0; r < NR; r++)
        for (int c = 0; c < NC; c++)
          frame[s * DEPTH + r * NC + c] = scene_point(s, r, c, NR, NC, NS);
  endtask

  // Sensor order: per subframe, row by row, odd rows right-to-left.
  task automatic send_frame();
    int c;
    for (int s = 0; s < NS; s++)
      for (int r = 0; r < NR; r++)
        for (int j = 0; j < NC; j++) begin
          c = (r % 2 == 1) ? NC - 1 - j : j;
          pt_vld = 1;
          pt = frame[s * DEPTH + r * NC + c];
          @(posedge clk);
          while (!pt_rdy) @(posedge clk);
          #0.1;
        end
    pt_vld = 0;
  endtask

  task automatic check_frame(int f);
    point_t pin[];
    bit glo[], ghi[];
    bit got;
    int ng = 0;
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
        got = rd_label;
        if (f == 1) lab1[s * DEPTH + i] = got;
        else if (lab1[s * DEPTH + i] != got) n_thchange++;
        if (pin[i].valid && !got) n_reject++;
        if (glo[i] != ghi[i]) begin n_skip++; continue; end
        checks++;
        if (got) ng++;
        if (got != glo[i]) begin
          failures++;
          if (failures < 20) $display("FAIL frame %0d s%0d r%0d c%0d: ground=%0b, reference %0b",
                                      f, s, i / NC, i % NC, got, glo[i]);
        end
      end
    end
    $display("frame %0d: %0d ground points, %0d points on a threshold skipped", f, ng, n_skip);
  endtask

  task automatic wait_done(int f);
    while (!done) @(posedge clk);
    checks++;
    $display("frame %0d: %0d cycles from last point to done (%.3f ms at 167.54 MHz)",
             f, proc_cycles, proc_cycles / 167.54e3);
    if (proc_cycles < NROUND * (NR + 2) * NC || proc_cycles > NROUND * ((NR + 2) * NC + 60)) begin
      failures++; $display("FAIL frame %0d: processing took %0d cycles", f, proc_cycles);
    end
    checks++;
    if (proc_cycles > PAPER_CYCLES) begin
      failures++; $display("FAIL frame %0d slower than the reported 0.28 ms", f);
    end
  endtask

  initial begin
    init_th = INIT_TH_DEFAULT;
    delta_th = DELTA_TH_DEFAULT;
    rd_sub = '0; rd_row = '0; rd_col = '0; pt = '0;
    repeat (4) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    build_frame();
    send_frame();
    // Offer the first point of the next frame at once: it must be held off.
    pt_vld = 1;
    pt = frame[0];
    repeat (50) @(posedge clk);
    pt_vld = 0;
    wait_done(1);
    check_frame(1);
    // Second frame, tighter thresholds (20 and 2 degrees).
    init_th = 16'd3641;
    delta_th = 16'd364;
    @(negedge clk);
    send_frame();
    wait_done(2);
    check_frame(2);

    checks += 8;
    if (n_fixed    == 0) begin failures++; $display("FAIL no repaired point"); end
    if (n_seed     == 0) begin failures++; $display("FAIL no seed"); end
    if (n_below    == 0) begin failures++; $display("FAIL no propagation from below"); end
    if (n_left     == 0) begin failures++; $display("FAIL no propagation from the left"); end
    if (n_round2   == 0) begin failures++; $display("FAIL no second round"); end
    if (n_stall    == 0) begin failures++; $display("FAIL input never held off"); end
    if (n_thchange == 0) begin failures++; $display("FAIL thresholds changed nothing"); end
    if (n_reject   == 0) begin failures++; $display("FAIL no valid point rejected"); end
    $display("events: fixed=%0d seed=%0d below=%0d left=%0d round2=%0d stall=%0d thchange=%0d reject=%0d",
             n_fixed, n_seed, n_below, n_left, n_round2, n_stall, n_thchange, n_reject);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
