// tb_frame_reorg: checks the zig-zag reorganisation at the default frame size.
// Every point of a 78,750-point frame carries its arrival index in x; the
// testbench checks each write's bank and address against the expected
// subframe/row/column (odd rows mirrored), the single frame_done pulse on the
// last point, and that nothing is written while frame_hold is high.
`timescale 1ns/1ps
module tb_frame_reorg;
  import gseg_pkg::*;
  localparam int NS = NUM_SLICES, NR = ROWS, NC = COLS, DEPTH = NR * NC;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic frame_hold = 0, in_vld = 0, in_rdy, wr_en, frame_done;
  point_t in_pt = '0, wr_data;
  logic [2:0] wr_bank;
  logic [13:0] wr_addr;

  frame_reorg dut (.*);

  int checks = 0, failures = 0, nwr = 0, ndone = 0;

  always @(posedge clk) if (rst_n) begin
    if (wr_en) begin
      int k, s, r, j, c;
      k = int'(wr_data.x);
      s = k / DEPTH; r = (k % DEPTH) / NC; j = k % NC;
      c = (r % 2 == 1) ? NC - 1 - j : j;
      checks++;
      if (int'(wr_bank) != s || int'(wr_addr) != r * NC + c || k != nwr) begin
        failures++;
        if (failures < 10) $display("FAIL point %0d: bank %0d addr %0d, expected %0d %0d", k, wr_bank, wr_addr, s, r * NC + c);
      end
      nwr++;
    end
    if (frame_done) begin
      ndone++;
      checks++;
      if (!(wr_en && int'(wr_data.x) == NS * DEPTH - 1)) begin failures++; $display("FAIL frame_done not on last point"); end
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < NS * DEPTH; k++) begin
      @(negedge clk);
      if (k == 1000) begin
        // hold-off: nothing may be accepted
        frame_hold = 1; in_vld = 1; in_pt.x = coord_t'(-5);
        @(negedge clk);
        checks++;
        if (in_rdy) begin failures++; $display("FAIL ready while held"); end
        repeat (5) @(negedge clk);
        frame_hold = 0;
      end
      in_vld = 1;
      in_pt.x = coord_t'(k);
      in_pt.valid = 1;
    end
    @(negedge clk);
    in_vld = 0;
    repeat (3) @(negedge clk);
    checks += 2;
    if (nwr != NS * DEPTH) begin failures++; $display("FAIL %0d writes", nwr); end
    if (ndone != 1) begin failures++; $display("FAIL %0d frame_done pulses", ndone); end
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
