// tb_label_mask_buffer: three write ports write random labels into three
// different banks in the same cycles (rotating the bank assignment), then
// every label of every bank is read back through the read port and compared
// with the model, data one cycle after the read.
`timescale 1ns/1ps
module tb_label_mask_buffer;
  import gseg_pkg::*;
  localparam int NS = 5, NP = 3, NR = 6, NC = 7;

  logic clk = 0;
  logic rst_n = 1;
  always #1 clk = ~clk;

  logic wr_en [NP], wr_label [NP];
  logic [2:0] wr_bank [NP];
  logic [6:0] wr_row [NP];
  col_t wr_col [NP];
  logic rd_en = 0, rd_label;
  logic [2:0] rd_bank = '0;
  logic [6:0] rd_row = '0;
  col_t rd_col = '0;

  label_mask_buffer #(.NSLICE(NS), .NPU(NP), .NROWS(NR), .NCOLS(NC)) dut (.*);

  bit model [NS][NR][NC];
  int checks = 0, failures = 0;

  initial begin
    for (int p = 0; p < NP; p++) begin wr_en[p] = 0; wr_label[p] = 0; wr_bank[p] = '0; wr_row[p] = '0; wr_col[p] = '0; end
    for (int pass = 0; pass < 3; pass++)
      for (int r = 0; r < NR; r++)
        for (int c = 0; c < NC; c++) begin
          @(negedge clk);
          for (int p = 0; p < NP; p++) begin
            int b;
            b = (p + pass * 2 + r) % NS;
            wr_en[p] = 1; wr_bank[p] = 3'(b); wr_row[p] = 7'(r); wr_col[p] = col_t'(c);
            wr_label[p] = $urandom_range(1);
            model[b][r][c] = wr_label[p];
          end
        end
    @(negedge clk);
    for (int p = 0; p < NP; p++) wr_en[p] = 0;
    for (int b = 0; b < NS; b++)
      for (int r = 0; r < NR; r++)
        for (int c = 0; c < NC; c++) begin
          @(negedge clk);
          rd_en = 1; rd_bank = 3'(b); rd_row = 7'(r); rd_col = col_t'(c);
          @(negedge clk);
          rd_en = 0;
          checks++;
          if (rd_label != model[b][r][c]) begin
            failures++;
            if (failures < 10) $display("FAIL bank %0d r%0d c%0d", b, r, c);
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
