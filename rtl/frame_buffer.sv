// frame_buffer: the organized data frame, one memory bank per subframe.
//
// Each bank holds DEPTH = ROWS*COLS points of one subframe at row-major
// addresses. There is one write port, fed by frame_reorg, and one read port
// per processing unit. A read port names a bank and an address; the bank's
// single read port takes the address of whichever unit selects it, so
// different units can read different subframes in the same cycle. Two units
// must never select the same bank (the scheduler guarantees it; an assertion
// checks it). The banked organisation is this design's way of letting the
// paper's parallel processing units work on their subframes at once.
//
// Timing: synchronous read, data one cycle after the address. rst_n only
// switches the bank-conflict assertion off during reset.
module frame_buffer
  import gseg_pkg::*;
#(
  parameter int unsigned NSLICE = NUM_SLICES,
  parameter int unsigned NPU    = NUM_PU,
  parameter int unsigned DEPTH  = ROWS*COLS,
  localparam int unsigned AW    = $clog2(DEPTH),
  localparam int unsigned BW    = (NSLICE > 1) ? $clog2(NSLICE) : 1
) (
  input  logic          clk,
  input  logic          rst_n,    // only qualifies the assertion
  input  logic          wr_en,
  input  logic [BW-1:0] wr_bank,
  input  logic [AW-1:0] wr_addr,
  input  point_t        wr_data,
  input  logic          rd_en   [NPU],
  input  logic [BW-1:0] rd_bank [NPU],
  input  logic [AW-1:0] rd_addr [NPU],
  output point_t        rd_data [NPU]
);
  point_t        bank_rdata [NSLICE];
  logic [BW-1:0] bank_sel_q [NPU];

  for (genvar b = 0; b < NSLICE; b++) begin : g_bank
    point_t        mem [DEPTH];
    logic          ren;
    logic [AW-1:0] raddr;

    always_comb begin
      ren   = 1'b0;
      raddr = '0;
      for (int p = 0; p < NPU; p++)
        if (rd_en[p] && rd_bank[p] == BW'(b)) begin
          ren   = 1'b1;
          raddr = rd_addr[p];
        end
    end

    always_ff @(posedge clk) begin
      if (wr_en && wr_bank == BW'(b)) mem[wr_addr] <= wr_data;
      if (ren) bank_rdata[b] <= mem[raddr];
    end
  end

  for (genvar p = 0; p < NPU; p++) begin : g_port
    always_ff @(posedge clk) if (rd_en[p]) bank_sel_q[p] <= rd_bank[p];
    assign rd_data[p] = bank_rdata[bank_sel_q[p]];
  end

  // No two units may read the same bank in one cycle.
  always_ff @(posedge clk)
    for (int p = 0; p < NPU; p++)
      for (int q = p + 1; q < NPU; q++)
        if (rst_n) assert (!(rd_en[p] && rd_en[q] && rd_bank[p] == rd_bank[q]))
          else $error("frame_buffer: units %0d and %0d read bank %0d", p, q, rd_bank[p]);
endmodule
