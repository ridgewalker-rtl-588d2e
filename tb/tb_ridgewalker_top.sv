// tb_ridgewalker_top: end-to-end test of ridgewalker_top at N = 4 pipelines
// with a 512-walk in-flight limit and walk length 20, on a 512-vertex random
// graph (8 % dead ends). The body (graph, memories, scoreboard, phases and
// mechanism counters) is in rw_e2e.svh; see there.
module tb_ridgewalker_top;
  localparam int N = 4, MAXI = 512, V = 512, DEAD_PCT = 8, MAXL = 20, RMAT_EF = 0;
  localparam int Q1 = 600, Q2 = 400, Q3 = 4000;
  localparam longint WATCH = 400000;
  localparam real THRU_MIN = 0.50;
  `include "rw_e2e.svh"
  ridgewalker_top #(.N(N), .MAX_INFLIGHT(MAXI)) dut (.*);

  // watchdog
  initial begin
    #1;
    wait (cyc > WATCH);
    failures++;
    $display("watchdog: phase %0d, %0d queries sent, inflight %0d", phase, nq, inflight);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
