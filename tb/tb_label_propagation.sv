// tb_label_propagation: streams structured random angle matrices bottom-up
// (low angles in the lower part, steep ones above, random gaps and jumps)
// and compares each label and each of the seed / below / left flags with an
// integer model of the propagation rules. Runs several matrices back to back
// with both threshold pairs, so the line buffer's state must not leak from
// one subframe into the next.
`timescale 1ns/1ps
module tb_label_propagation;
  import gseg_pkg::*;
  localparam int NR = 10, NC = 8;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  angle_t init_th, delta_th;
  logic in_vld = 0, in_avalid = 0;
  row_t in_row = '0, out_row;
  col_t in_col = '0, out_col;
  angle_t in_alpha = '0;
  logic out_vld, out_ground, out_valid, out_seed, out_below, out_left;

  label_propagation #(.NROWS(NR), .NCOLS(NC)) dut (.*);

  int checks = 0, failures = 0, nseed = 0, nbelow = 0, nleft = 0, nground = 0;

  function automatic int adiff(int a, int b); return a > b ? a - b : b - a; endfunction

  initial begin
    int A [NR][NC];
    bit V [NR][NC], G [NR][NC];
    bit seen [NC];
    bit sb, sd, bl, lf;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int m = 0; m < 12; m++) begin
      init_th  = (m % 2 == 0) ? INIT_TH_DEFAULT : angle_t'(2000);
      delta_th = (m % 2 == 0) ? DELTA_TH_DEFAULT : angle_t'(300);
      for (int r = 0; r < NR; r++)
        for (int c = 0; c < NC; c++) begin
          A[r][c] = (r >= NR / 2) ? $urandom_range(1500) : $urandom_range(16384);
          if ($urandom_range(7) == 0) A[r][c] = $urandom_range(16384);
          V[r][c] = $urandom_range(6) != 0;
        end
      for (int c = 0; c < NC; c++) seen[c] = 0;
      for (int r = NR - 1; r >= 0; r--)
        for (int c = 0; c < NC; c++) begin
          @(negedge clk);
          in_vld = 1; in_row = row_t'(r); in_col = col_t'(c);
          in_alpha = angle_t'(A[r][c]); in_avalid = V[r][c];
          sb = (r < NR - 1) && seen[c];
          sd = V[r][c] && !sb && A[r][c] < int'(init_th);
          bl = V[r][c] && (r < NR - 1) && G[r + 1][c] && adiff(A[r][c], A[r + 1][c]) < int'(delta_th);
          lf = V[r][c] && (c > 0) && G[r][c - 1] && adiff(A[r][c], A[r][c - 1]) < int'(delta_th);
          G[r][c] = sd || bl || lf;
          seen[c] = sb || V[r][c];
          @(posedge clk); #0.1;
          in_vld = 0;
          checks++;
          if (!out_vld || out_row != row_t'(r) || out_col != col_t'(c) || out_ground != G[r][c] ||
              out_valid != V[r][c] || out_seed != sd || out_below != bl || out_left != lf) begin
            failures++;
            if (failures < 10) $display("FAIL m%0d r%0d c%0d: g%0b s%0b b%0b l%0b expected g%0b s%0b b%0b l%0b",
              m, r, c, out_ground, out_seed, out_below, out_left, G[r][c], sd, bl, lf);
          end
          nseed += sd; nbelow += bl; nleft += lf; nground += G[r][c];
        end
    end
    checks++;
    if (nseed == 0 || nbelow == 0 || nleft == 0) begin failures++; $display("FAIL a rule never fired"); end
    $display("seed=%0d below=%0d left=%0d ground=%0d", nseed, nbelow, nleft, nground);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
