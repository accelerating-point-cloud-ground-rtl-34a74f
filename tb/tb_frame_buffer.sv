// tb_frame_buffer: fills every bank with known points, then has the three
// read ports read different banks in the same cycles (a new bank rotation
// every cycle) and compares each read with the expected point one cycle
// after the address.
`timescale 1ns/1ps
module tb_frame_buffer;
  import gseg_pkg::*;
  localparam int NS = 5, NP = 3, DEPTH = 200, AW = $clog2(DEPTH);

  logic clk = 0;
  logic rst_n = 1;
  always #1 clk = ~clk;

  logic wr_en = 0;
  logic [2:0] wr_bank = '0;
  logic [AW-1:0] wr_addr = '0;
  point_t wr_data = '0;
  logic rd_en [NP];
  logic [2:0] rd_bank [NP];
  logic [AW-1:0] rd_addr [NP];
  point_t rd_data [NP];

  frame_buffer #(.NSLICE(NS), .NPU(NP), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;

  function automatic point_t pat(int b, int a);
    point_t p;
    p.valid = ((a + b) % 3) != 0;
    p.x = coord_t'(b * 1000 + a);
    p.y = coord_t'(-a * 7 - b);
    p.z = coord_t'(a ^ (b << 5));
    return p;
  endfunction

  initial begin
    for (int p = 0; p < NP; p++) begin rd_en[p] = 0; rd_bank[p] = '0; rd_addr[p] = '0; end
    for (int b = 0; b < NS; b++)
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk);
        wr_en = 1; wr_bank = 3'(b); wr_addr = AW'(a); wr_data = pat(b, a);
      end
    @(negedge clk) wr_en = 0;
    for (int t = 0; t < 400; t++) begin
      int eb [NP], ea [NP];
      for (int p = 0; p < NP; p++) begin
        eb[p] = (t + p) % NS;
        ea[p] = $urandom_range(DEPTH - 1);
        rd_en[p] = ((t + p) % 4) != 0;
        rd_bank[p] = 3'(eb[p]);
        rd_addr[p] = AW'(ea[p]);
      end
      @(negedge clk);
      for (int p = 0; p < NP; p++) if (rd_en[p]) begin
        checks++;
        if (rd_data[p] != pat(eb[p], ea[p])) begin
          failures++;
          if (failures < 10) $display("FAIL port %0d bank %0d addr %0d", p, eb[p], ea[p]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
