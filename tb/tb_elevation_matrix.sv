// tb_elevation_matrix: streams a small random subframe bottom-up with its two
// padding rows and compares every output with atan2 in floating point (to
// within 20 angle units, 0.11 degree). Column 0 holds points at equal height
// (angle 0), column 1 points stacked vertically (angle 90 degrees). Also
// checks the output order, the validity rule (both points valid, top row
// invalid) and the fixed latency between a beat and the output it triggers.
`timescale 1ns/1ps
module tb_elevation_matrix;
  import gseg_pkg::*;
  import tb_ref_pkg::*;
  localparam int NR = 7, NC = 5;
  // pipeline latency 2*(ITER+1)+2, plus one cycle for sampling here
  localparam int LAT = 2 * (CORDIC_ITER + 1) + 3;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic in_vld = 0, out_vld, out_avalid;
  row_t in_row = '0, out_row;
  col_t in_col = '0, out_col;
  point_t in_pt = '0;
  angle_t out_alpha;

  elevation_matrix #(.NROWS(NR), .NCOLS(NC)) dut (.*);

  point_t P [NR][NC];
  int checks = 0, failures = 0;
  int t_in [int];   // cycle of the input beat that triggers output (row, col)
  int cyc = 0, nout = 0;
  always @(posedge clk) cyc++;

  // expected output sequence
  int exp_r [$], exp_c [$];

  always @(posedge clk) if (rst_n && out_vld) begin
    int r, c;
    real ref_a, rho_a, rho_b, d;
    bit  ref_v;
    r = exp_r.pop_front(); c = exp_c.pop_front();
    nout++;
    checks++;
    if (out_row != row_t'(r) || out_col != col_t'(c)) begin
      failures++; $display("FAIL order: got r%0d c%0d expected r%0d c%0d", out_row, out_col, r, c);
    end
    checks++;
    if (cyc - t_in[r * 16 + c] != LAT) begin
      failures++; $display("FAIL latency %0d at r%0d c%0d", cyc - t_in[r * 16 + c], r, c);
    end
    if (r >= 0) begin
      ref_v = (r > 0) && P[r][c].valid && P[r - 1][c].valid;
      checks++;
      if (out_avalid != ref_v) begin failures++; $display("FAIL valid r%0d c%0d", r, c); end
      if (ref_v) begin
        rho_a = $sqrt(real'(P[r][c].x) ** 2 + real'(P[r][c].y) ** 2);
        rho_b = $sqrt(real'(P[r - 1][c].x) ** 2 + real'(P[r - 1][c].y) ** 2);
        ref_a = ang_units(rabs(real'(P[r][c].z - P[r - 1][c].z)), rabs(rho_a - rho_b));
        d = ref_a - real'(out_alpha);
        checks++;
        if (rabs(d) > 20.0) begin
          failures++;
          $display("FAIL angle r%0d c%0d: got %0d expected %.1f", r, c, out_alpha, ref_a);
        end
      end
    end
  end

  initial begin
    for (int r = 0; r < NR; r++)
      for (int c = 0; c < NC; c++) begin
        P[r][c].valid = ($urandom_range(5) != 0);
        P[r][c].x = coord_t'($urandom_range(80000) - 40000);
        P[r][c].y = coord_t'($urandom_range(80000) - 40000);
        P[r][c].z = coord_t'($urandom_range(8000) - 4000);
        if (c == 0) P[r][c].z = coord_t'(-1800);
        if (c == 1) begin P[r][c].x = coord_t'(9000); P[r][c].y = coord_t'(-300); P[r][c].z = coord_t'(200 * (NR - r)); end
      end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = NR - 1; r >= -2; r--)
      for (int c = 0; c < NC; c++) begin
        @(negedge clk);
        in_vld = 1; in_row = row_t'(r); in_col = col_t'(c);
        in_pt = (r >= 0) ? P[r][c] : '0;
        if (r < NR - 1) begin
          exp_r.push_back(r + 1); exp_c.push_back(c);
          t_in[(r + 1) * 16 + c] = cyc;
        end
      end
    @(negedge clk) in_vld = 0;
    repeat (LAT + 5) @(negedge clk);
    checks++;
    if (nout != (NR + 1) * NC) begin failures++; $display("FAIL %0d outputs", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
