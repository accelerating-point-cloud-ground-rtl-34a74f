// tb_value_smoothing: feeds random angle rows bottom-up (ending with the
// padding row -1) and compares every output with an integer model of the
// [1 2 1]/4 column filter, including the substitution of missing neighbours
// by the centre value and the invalid-centre rule; checks output order and
// the one-cycle latency.
`timescale 1ns/1ps
module tb_value_smoothing;
  import gseg_pkg::*;
  localparam int NR = 8, NC = 6;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic in_vld = 0, in_avalid = 0, out_vld, out_avalid;
  row_t in_row = '0, out_row;
  col_t in_col = '0, out_col;
  angle_t in_alpha = '0, out_alpha;

  value_smoothing #(.NROWS(NR), .NCOLS(NC)) dut (.*);

  int A [NR][NC];
  bit V [NR][NC];
  int checks = 0, failures = 0, nout = 0;

  initial begin
    int e, ab, ac, rr;
    for (int m = 0; m < 3; m++) begin
      for (int r = 0; r < NR; r++)
        for (int c = 0; c < NC; c++) begin
          A[r][c] = $urandom_range(16384);
          V[r][c] = $urandom_range(4) != 0;
        end
      repeat (3) @(negedge clk);
      rst_n = 1;
      for (int r = NR - 1; r >= -1; r--)
        for (int c = 0; c < NC; c++) begin
          @(negedge clk);
          in_vld = 1; in_row = row_t'(r); in_col = col_t'(c);
          in_alpha = (r >= 0) ? angle_t'(A[r][c]) : angle_t'($urandom_range(100));
          in_avalid = (r >= 0) ? V[r][c] : 1'b0;
          @(posedge clk); #0.1;
          in_vld = 0;
          if (r < NR - 1) begin
            rr = r + 1;
            ab = (rr + 1 < NR && V[rr + 1][c]) ? A[rr + 1][c] : A[rr][c];
            ac = (rr > 0 && V[rr - 1][c]) ? A[rr - 1][c] : A[rr][c];
            e = (ab + 2 * A[rr][c] + ac) / 4;
            nout++;
            checks++;
            if (!out_vld || out_row != row_t'(rr) || out_col != col_t'(c) || out_avalid != V[rr][c] ||
                (V[rr][c] && int'(out_alpha) != e)) begin
              failures++;
              if (failures < 10) $display("FAIL r%0d c%0d: got %0d/%0b expected %0d/%0b", rr, c, out_alpha, out_avalid, e, V[rr][c]);
            end
          end else begin
            checks++;
            if (out_vld) begin failures++; $display("FAIL output for the bottom input row"); end
          end
        end
    end
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
