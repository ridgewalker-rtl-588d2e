// tb_ridgewalker_rmat: the paper's skewed synthetic workload, scaled down.
// ridgewalker_top at its defaults (16 pipelines, 4096 walks in flight, walk
// length 80) runs URW and PPR walks on an RMAT graph with the Graph500
// initiator (a = 0.57, b = c = 0.19, d = 0.05), scale 12 (4096 vertices) and
// edge factor 16. The paper's graphs are scale 24 and up; the scale and edge
// factor here are chosen to simulate in about a minute. Degrees are highly
// skewed, so walks end at very different lengths and hub lists load some
// channels far more than others: the case the zero-bubble scheduler is meant
// for. The checks and counters are those of rw_e2e.svh.
module tb_ridgewalker_rmat;
  localparam int N = 16, MAXI = 4096, V = 4096, DEAD_PCT = 0, MAXL = 80, RMAT_EF = 16;
  localparam int Q1 = 8000, Q2 = 800, Q3 = 3000;
  localparam longint WATCH = 3000000;
  localparam real THRU_MIN = 0.45;
  `include "rw_e2e.svh"
  ridgewalker_top dut (.*);

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
