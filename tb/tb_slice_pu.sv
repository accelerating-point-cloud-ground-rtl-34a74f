// tb_slice_pu: self-checking testbench of one slice processing unit.
//
// Two synthetic subframes (one with low walls, one with a slope) are placed
// in a behavioural frame-buffer model with one-cycle read latency. For each,
// the unit is started and every label it streams out is compared with the
// floating-point reference of tb_ref_pkg. The reference is evaluated with
// thresholds a small margin below and above the hardware's; a point is
// checked only when both agree, which removes decisions that sit on a
// threshold within the CORDIC's rounding. Also checked: every point labelled
// exactly once, the cycle count (one point per cycle plus two padding rows
// and the pipeline latency; also within the reported single-unit time of
// 0.137 ms at 167.54 MHz), and that seed, below and left propagation and
// repair all occurred.
`timescale 1ns/1ps
module tb_slice_pu;
  import gseg_pkg::*;
  import tb_ref_pkg::*;

  localparam int NR = ROWS, NC = COLS, DEPTH = NR * NC;
  localparam int AW = $clog2(DEPTH);
  localparam real MARGIN = 60.0;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic start = 0;
  angle_t init_th = INIT_TH_DEFAULT, delta_th = DELTA_TH_DEFAULT;
  logic busy, done, rd_en, lbl_vld, lbl_ground, lbl_valid;
  logic ev_fixed, ev_seed, ev_below, ev_left;
  logic [AW-1:0] rd_addr;
  point_t rd_data;
  logic [6:0] lbl_row;
  col_t lbl_col;

  slice_pu dut (.*);

  point_t mem [DEPTH];
  always_ff @(posedge clk) if (rd_en) rd_data <= mem[rd_addr];

  int checks = 0, failures = 0;
  int n_fixed = 0, n_seed = 0, n_below = 0, n_left = 0, n_ground = 0, n_skip = 0;
  int seen [DEPTH];
  bit got [DEPTH];

  always @(posedge clk) begin
    if (ev_fixed) n_fixed++;
    if (ev_seed)  n_seed++;
    if (ev_below) n_below++;
    if (ev_left)  n_left++;
    if (lbl_vld) begin
      seen[int'(lbl_row) * NC + int'(lbl_col)]++;
      got[int'(lbl_row) * NC + int'(lbl_col)] = lbl_ground;
    end
  end

  task automatic run_subframe(int s);
    point_t pin[];
    bit glo[], ghi[];
    int t0, cyc, lo_bound, hi_bound;
    pin = new[DEPTH];
    for (int r = 0; r < NR; r++)
      for (int c = 0; c < NC; c++) begin
        pin[r * NC + c] = scene_point(s, r, c, NR, NC, NUM_SLICES);
        mem[r * NC + c] = pin[r * NC + c];
      end
    foreach (seen[i]) seen[i] = 0;
    ref_segment(pin, NR, NC, real'(init_th) - MARGIN, real'(delta_th) - MARGIN, glo);
    ref_segment(pin, NR, NC, real'(init_th) + MARGIN, real'(delta_th) + MARGIN, ghi);
    @(negedge clk) start = 1;
    t0 = $time;
    @(negedge clk) start = 0;
    while (!done) @(negedge clk);
    cyc = ($time - t0) / 2;
    @(negedge clk);
    lo_bound = (NR + 2) * NC;
    hi_bound = (NR + 2) * NC + 2 * (CORDIC_ITER + 1) + 12;
    // The reported single-unit time, 0.137 ms at 167.54 MHz, is 22,953 cycles.
    checks++;
    if (cyc > 22953) begin failures++; $display("FAIL subframe %0d slower than 0.137 ms", s); end
    checks++;
    if (cyc < lo_bound || cyc > hi_bound) begin
      failures++;
      $display("FAIL subframe %0d: %0d cycles, expected %0d..%0d", s, cyc, lo_bound, hi_bound);
    end
    for (int i = 0; i < DEPTH; i++) begin
      checks++;
      if (seen[i] != 1) begin
        failures++;
        if (failures < 10) $display("FAIL point %0d labelled %0d times", i, seen[i]);
      end
      if (glo[i] != ghi[i]) n_skip++;
      else begin
        checks++;
        if (got[i] != glo[i]) begin
          failures++;
          if (failures < 20) $display("FAIL s%0d r%0d c%0d: ground=%0b, reference %0b", s, i / NC, i % NC, got[i], glo[i]);
        end
        if (glo[i]) n_ground++;
      end
    end
    $display("subframe %0d: %0d cycles, %0d points on a threshold skipped", s, cyc, n_skip);
  endtask

  initial begin
    repeat (4) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    run_subframe(0);
    run_subframe(1);
    checks += 4;
    if (n_seed  == 0) begin failures++; $display("FAIL no seed"); end
    if (n_below == 0) begin failures++; $display("FAIL no propagation from below"); end
    if (n_left  == 0) begin failures++; $display("FAIL no propagation from the left"); end
    if (n_fixed == 0) begin failures++; $display("FAIL no repaired point"); end
    checks++;
    if (n_ground < DEPTH / 4 || n_ground > 3 * DEPTH / 2) begin
      failures++; $display("FAIL implausible ground count %0d", n_ground);
    end
    $display("events: fixed=%0d seed=%0d below=%0d left=%0d ground=%0d", n_fixed, n_seed, n_below, n_left, n_ground);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
