// tb_pu_scheduler: three behavioural processing units with random run times
// answer the scheduler's start pulses with done pulses. For two frames the
// testbench checks that each subframe is processed exactly once, that a
// round's units start together on subframes round*3+p, that the second round
// (subframes 3 and 4, unit 2 idle) starts only after every unit of the first
// has finished, and that done pulses once, after the last unit.
`timescale 1ns/1ps
module tb_pu_scheduler;
  import gseg_pkg::*;
  localparam int NS = NUM_SLICES, NP = NUM_PU;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic start = 0, busy, done;
  logic pu_done [NP], pu_start [NP];
  logic [2:0] pu_sub [NP];
  logic [3:0] round;

  pu_scheduler dut (.*);

  int checks = 0, failures = 0;
  int cnt [NP];
  int processed [NS];
  int running = 0, last_done_cyc = 0, cyc = 0, ndone = 0, starts_this_cycle;

  always @(posedge clk) cyc++;

  // behavioural units
  for (genvar p = 0; p < NP; p++) begin : g_pu
    always @(posedge clk) begin
      pu_done[p] <= 1'b0;
      if (!rst_n) cnt[p] = 0;
      else if (pu_start[p]) cnt[p] = 3 + $urandom_range(30);
      else if (cnt[p] > 0) begin
        cnt[p]--;
        if (cnt[p] == 0) pu_done[p] <= 1'b1;
      end
    end
  end

  always @(negedge clk) if (rst_n) begin
    starts_this_cycle = 0;
    for (int p = 0; p < NP; p++) if (pu_start[p]) begin
      starts_this_cycle++;
      checks++;
      if (int'(pu_sub[p]) != int'(round) * NP + p) begin
        failures++; $display("FAIL unit %0d got subframe %0d in round %0d", p, pu_sub[p], round);
      end
      checks++;
      if (running != 0) begin failures++; $display("FAIL round started while units still run"); end
      processed[pu_sub[p]]++;
    end
    for (int p = 0; p < NP; p++) if (pu_done[p]) running--;
    running += starts_this_cycle;
    if (starts_this_cycle != 0) begin
      checks++;
      if (starts_this_cycle != ((round == 0) ? 3 : 2)) begin
        failures++; $display("FAIL %0d units started in round %0d", starts_this_cycle, round);
      end
    end
    if (done) begin
      ndone++;
      checks++;
      if (running != 0) begin failures++; $display("FAIL done while units run"); end
    end
  end

  initial begin
    for (int p = 0; p < NP; p++) pu_done[p] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < 2; f++) begin
      foreach (processed[i]) processed[i] = 0;
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      checks++;
      if (!busy) begin failures++; $display("FAIL not busy after start"); end
      while (!done) @(negedge clk);
      @(negedge clk);
      for (int i = 0; i < NS; i++) begin
        checks++;
        if (processed[i] != 1) begin failures++; $display("FAIL subframe %0d processed %0d times", i, processed[i]); end
      end
      checks++;
      if (busy) begin failures++; $display("FAIL busy after done"); end
    end
    checks++;
    if (ndone != 2) begin failures++; $display("FAIL %0d done pulses", ndone); end
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
