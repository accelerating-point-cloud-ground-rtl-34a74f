// label_mask_buffer: the output label masks, one bank per subframe.
//
// Every processing unit writes the ground label of each point of the
// subframe it works on, addressed by (subframe, row, column); a host reads
// the mask back one label at a time. Each bank takes the write of the unit
// currently assigned to its subframe, so all units write in the same cycle.
// The paper's algorithm collects its per-subframe label masks in one output
// array; the banked single-bit layout and the read port are this design's.
//
// Timing: writes take effect at the clock edge; reads are synchronous, data
// one cycle after rd_en. rst_n only switches the bank-conflict assertion off
// during reset.
module label_mask_buffer
  import gseg_pkg::*;
#(
  parameter int unsigned NSLICE = NUM_SLICES,
  parameter int unsigned NPU    = NUM_PU,
  parameter int unsigned NROWS  = ROWS,
  parameter int unsigned NCOLS  = COLS,
  localparam int unsigned DEPTH = NROWS*NCOLS,
  localparam int unsigned AW    = $clog2(DEPTH),
  localparam int unsigned BW    = (NSLICE > 1) ? $clog2(NSLICE) : 1
) (
  input  logic          clk,
  input  logic          rst_n,    // only qualifies the assertion
  input  logic          wr_en    [NPU],
  input  logic [BW-1:0] wr_bank  [NPU],
  input  logic [6:0]    wr_row   [NPU],
  input  col_t          wr_col   [NPU],
  input  logic          wr_label [NPU],
  input  logic          rd_en,
  input  logic [BW-1:0] rd_bank,
  input  logic [6:0]    rd_row,
  input  col_t          rd_col,
  output logic          rd_label
);
  logic          bank_q [NSLICE];
  logic [BW-1:0] rd_bank_q;

  function automatic logic [AW-1:0] addr_of(logic [6:0] r, col_t c);
    return AW'(r) * AW'(NCOLS) + AW'(c);
  endfunction

  for (genvar b = 0; b < NSLICE; b++) begin : g_bank
    logic          mem [DEPTH];
    logic          wen, wdat;
    logic [AW-1:0] waddr;

    always_comb begin
      wen = 1'b0; wdat = 1'b0; waddr = '0;
      for (int p = 0; p < NPU; p++)
        if (wr_en[p] && wr_bank[p] == BW'(b)) begin
          wen   = 1'b1;
          wdat  = wr_label[p];
          waddr = addr_of(wr_row[p], wr_col[p]);
        end
    end

    always_ff @(posedge clk) begin
      if (wen) mem[waddr] <= wdat;
      if (rd_en && rd_bank == BW'(b)) bank_q[b] <= mem[addr_of(rd_row, rd_col)];
    end
  end

  always_ff @(posedge clk) if (rd_en) rd_bank_q <= rd_bank;
  assign rd_label = bank_q[rd_bank_q];

  always_ff @(posedge clk)
    for (int p = 0; p < NPU; p++)
      for (int q = p + 1; q < NPU; q++)
        if (rst_n) assert (!(wr_en[p] && wr_en[q] && wr_bank[p] == wr_bank[q]))
          else $error("label_mask_buffer: units %0d and %0d write bank %0d", p, q, wr_bank[p]);
endmodule
