// tb_frame_repair: streams rows with random missing points (and two padding
// rows) and checks each output against an independent hold-last-valid model:
// value, validity, the repaired flag and the one-cycle latency.
`timescale 1ns/1ps
module tb_frame_repair;
  import gseg_pkg::*;
  localparam int NR = 12, NC = 9;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic in_vld = 0, out_vld, out_fixed;
  row_t in_row = '0, out_row;
  col_t in_col = '0, out_col;
  point_t in_pt = '0, out_pt;

  frame_repair dut (.*);

  int checks = 0, failures = 0, nfixed = 0;

  initial begin
    point_t hold, exp_pt;
    bit have, exp_fixed;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = NR - 1; r >= -2; r--) begin
      have = 0;
      for (int c = 0; c < NC; c++) begin
        @(negedge clk);
        in_vld = 1; in_row = row_t'(r); in_col = col_t'(c);
        in_pt.x = coord_t'($urandom_range(60000) - 30000);
        in_pt.y = coord_t'($urandom_range(60000) - 30000);
        in_pt.z = coord_t'($urandom_range(6000) - 3000);
        in_pt.valid = (r >= 0) && ($urandom_range(3) != 0);
        exp_fixed = 0;
        exp_pt = in_pt;
        if (in_pt.valid) begin hold = in_pt; have = 1; end
        else if (have && c != 0 && r >= 0) begin exp_pt = hold; exp_fixed = 1; end
        @(posedge clk); #0.1;
        checks++;
        if (!out_vld || out_row != row_t'(r) || out_col != col_t'(c) || out_pt != exp_pt || out_fixed != exp_fixed) begin
          failures++;
          if (failures < 10) $display("FAIL r%0d c%0d: got %p fixed %0b, expected %p %0b", r, c, out_pt, out_fixed, exp_pt, exp_fixed);
        end
        if (exp_fixed) nfixed++;
        in_vld = 0;
      end
    end
    checks++;
    if (nfixed == 0) begin failures++; $display("FAIL nothing repaired"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
