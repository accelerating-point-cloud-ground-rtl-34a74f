// pu_scheduler: hands the subframes of a frame to the processing units.
//
// With NPU units and NSLICE subframes the work runs in ceil(NSLICE/NPU)
// rounds. In round k unit p processes subframe k*NPU + p, if it exists. A
// round starts all its units together and ends when every started unit has
// reported done; then the next round starts. With the paper's five subframes
// and three units that is two rounds (subframes 0-2, then 3-4); one to five
// units need 5, 3, 2, 2 and 1 rounds. The
// round-robin order and the all-done barrier between rounds are this design's
// choice.
//
// Interface: start pulse (ignored while busy); per unit a start pulse and the
// subframe index it works on (held until the next round); done pulses one
// cycle after the last unit of the last round finishes. rst_n also disables
// the handshake assertion, which lint reports as a synchronous use of a
// reset that is otherwise asynchronous; it has no effect on the circuit.
module pu_scheduler
  import gseg_pkg::*;
#(
  parameter int unsigned NSLICE = NUM_SLICES,
  parameter int unsigned NPU    = NUM_PU,
  localparam int unsigned BW    = (NSLICE > 1) ? $clog2(NSLICE) : 1,
  localparam int unsigned NROUND = (NSLICE + NPU - 1) / NPU
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          pu_done  [NPU],
  output logic          pu_start [NPU],
  output logic [BW-1:0] pu_sub   [NPU],
  output logic          busy,
  output logic          done,
  output logic [3:0]    round
);
  typedef enum logic [1:0] {IDLE, LAUNCH, WAIT} state_t;
  state_t         st_q;
  logic [NPU-1:0] pend_q;     // units of this round still running

  function automatic logic used(int unsigned k, int unsigned p);
    return (k * NPU + p) < NSLICE;
  endfunction

  logic [NPU-1:0] done_v;
  always_comb for (int p = 0; p < NPU; p++) done_v[p] = pu_done[p];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q   <= IDLE;
      pend_q <= '0;
      round  <= '0;
      done   <= 1'b0;
      for (int p = 0; p < NPU; p++) pu_start[p] <= 1'b0;
    end else begin
      done <= 1'b0;
      for (int p = 0; p < NPU; p++) pu_start[p] <= 1'b0;
      unique case (st_q)
        IDLE: if (start) begin
          round <= '0;
          st_q  <= LAUNCH;
        end
        LAUNCH: begin
          for (int p = 0; p < NPU; p++) begin
            pu_start[p] <= used(int'(round), p);
            pend_q[p]   <= used(int'(round), p);
          end
          st_q <= WAIT;
        end
        WAIT: begin
          pend_q <= pend_q & ~done_v;
          if ((pend_q & ~done_v) == '0) begin
            if (int'(round) == NROUND - 1) begin
              st_q <= IDLE;
              done <= 1'b1;
            end else begin
              round <= round + 4'd1;
              st_q  <= LAUNCH;
            end
          end
        end
        default: st_q <= IDLE;
      endcase
    end
  end

  always_ff @(posedge clk)
    if (st_q == LAUNCH)
      for (int p = 0; p < NPU; p++) pu_sub[p] <= BW'(int'(round) * NPU + p);

  assign busy = (st_q != IDLE);

  // A unit must not finish before it was started.
  a_no_spurious_done: assert property (@(posedge clk) disable iff (!rst_n)
    (st_q == WAIT) |-> ((done_v & ~pend_q) == '0))
    else $error("pu_scheduler: done from a unit that was not started");
endmodule
