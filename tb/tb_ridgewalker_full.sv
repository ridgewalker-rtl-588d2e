// tb_ridgewalker_full: end-to-end test of ridgewalker_top with every
// parameter at its default: 16 pipelines on 32 memory channels, 4096 walks in
// flight, walk length 80 (the register's reset value, written again), on a
// 4096-vertex random graph with 2 % dead ends. Phase 1 submits more walks
// than the in-flight limit, so the credit stall occurs. The body is in
// rw_e2e.svh; see there.
module tb_ridgewalker_full;
  localparam int N = 16, MAXI = 4096, V = 4096, DEAD_PCT = 2, MAXL = 80, RMAT_EF = 0;
  localparam int Q1 = 5000, Q2 = 800, Q3 = 3000;
  localparam longint WATCH = 3000000;
  localparam real THRU_MIN = 0.65;
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
