// tb_zero_bubble_scheduler: N = 4 scheduler with the default 65-entry
// pipeline FIFOs.
//  A: new queries saturate all inputs, all pipelines ready: after warm-up no
//     pipeline sees a single idle cycle (zero bubbles).
//  B: pipeline 1 accepts only 30 % of cycles: the other three keep receiving
//     at least 85 % of cycles. (They lose a few percent: a dispatcher that
//     finds both outputs full waits on the not-last-served one, which is
//     sometimes the slow path.)
//  C: unfinished tasks return on every lane every cycle: they have strict
//     priority, so new queries stop entering once the first balancer is full,
//     and returned tasks flow at N per cycle.
//  All phases: every accepted task reaches a pipeline exactly once.
module tb_zero_bubble_scheduler;
  import rw_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  logic new_valid [N], new_ready [N], ret_valid [N], ret_ready [N];
  logic pipe_valid [N], pipe_ready [N];
  task_t new_data [N], ret_data [N], pipe_data [N];
  int checks = 0, failures = 0;
  int cyc = 0;
  int nseq [N], rseq [N];
  int seen [int];
  int bubbles [N], got [N], nacc, racc;
  int slow = -1;

  zero_bubble_scheduler #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #4000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at cycle %0d", m, cyc); end
  endtask

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      for (int i = 0; i < N; i++) begin
        if (new_valid[i] && new_ready[i]) begin nseq[i]++; nacc++; end
        if (ret_valid[i] && ret_ready[i]) begin rseq[i]++; racc++; end
        if (!pipe_valid[i]) bubbles[i]++;
        if (pipe_valid[i] && pipe_ready[i]) begin
          got[i]++;
          if (seen.exists(int'(pipe_data[i].qid))) seen[int'(pipe_data[i].qid)]++;
          else seen[int'(pipe_data[i].qid)] = 1;
        end
      end
    end
  end

  always @(negedge clk) begin
    for (int i = 0; i < N; i++) begin
      new_data[i] = '0; new_data[i].qid = QID_W'(i * 65536 + nseq[i]);
      ret_data[i] = '0; ret_data[i].qid = QID_W'(22'h200000 + i * 65536 + rseq[i]);
      ret_data[i].step = 8'd1;
      pipe_ready[i] = (i == slow) ? (($urandom % 100) < 30) : 1'b1;
    end
  end

  task automatic clear();
    for (int i = 0; i < N; i++) begin bubbles[i] = 0; got[i] = 0; end
    nacc = 0; racc = 0;
  endtask

  initial begin
    for (int i = 0; i < N; i++) begin new_valid[i] = 0; ret_valid[i] = 0; nseq[i] = 0; rseq[i] = 0; end
    clear();
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---- A
    @(negedge clk); for (int i = 0; i < N; i++) new_valid[i] = 1;
    repeat (60) @(posedge clk);
    clear();
    repeat (1000) @(posedge clk);
    for (int i = 0; i < N; i++) chk(bubbles[i] == 0, $sformatf("A: pipeline %0d idle %0d cycles", i, bubbles[i]));
    // ---- B
    slow = 1;
    repeat (200) @(posedge clk);
    clear();
    repeat (1000) @(posedge clk);
    for (int i = 0; i < N; i++) if (i != slow)
      chk(got[i] >= 850, $sformatf("B: pipeline %0d got %0d of 1000", i, got[i]));
    chk(got[slow] > 200 && got[slow] < 400, "B: slow pipeline served at its own rate");
    $display("B: served %0d %0d %0d %0d", got[0], got[1], got[2], got[3]);
    slow = -1;
    // ---- C
    @(negedge clk); for (int i = 0; i < N; i++) ret_valid[i] = 1;
    repeat (100) @(posedge clk);
    clear();
    repeat (1000) @(posedge clk);
    chk(nacc == 0, $sformatf("C: %0d new queries overtook returning tasks", nacc));
    chk(racc >= 4 * 1000 - 4, $sformatf("C: %0d returned tasks in 1000 cycles", racc));
    // drain and check conservation
    @(negedge clk); for (int i = 0; i < N; i++) begin ret_valid[i] = 0; new_valid[i] = 0; end
    repeat (400) @(posedge clk);
    begin
      int tot = 0;
      for (int i = 0; i < N; i++) tot += nseq[i] + rseq[i];
      chk(seen.num() == tot, $sformatf("all %0d tasks delivered (%0d)", tot, seen.num()));
      foreach (seen[k]) if (seen[k] != 1) begin chk(0, "duplicate"); break; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
