// tb_task_dispatcher: checks the balanced-dispatch policy of task_dispatcher.
//  A: both outputs free, back-to-back input -> strict alternation starting
//     with out_2 (last_selection resets to 0), II = 1, latency 2 cycles.
//  B: out_2 stalled -> out_2 takes tasks until its 2-entry FIFO is full,
//     then every task goes to out_1 (expected order worked out by hand from
//     the scode table).
//  C: both outputs full and last served = out_1 -> code 0b110 -> the next task
//     waits for out_2 even when out_1 drains first (fairness blocking).
module tb_task_dispatcher;
  localparam int W = 16;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out1_valid, out1_ready, out2_valid, out2_ready;
  logic [W-1:0] in_data, out1_data, out2_data;
  int checks = 0, failures = 0;
  int cyc = 0;
  logic [W-1:0] got1 [$], got2 [$];
  int t1 [$], t2 [$];

  task_dispatcher #(.WIDTH(W)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && out1_valid && out1_ready) begin got1.push_back(out1_data); t1.push_back(cyc); end
    if (rst_n && out2_valid && out2_ready) begin got2.push_back(out2_data); t2.push_back(cyc); end
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at cycle %0d", m, cyc); end
  endtask

  // send one task, waiting for acceptance
  task automatic send(input logic [W-1:0] d);
    @(negedge clk); in_valid = 1; in_data = d;
    do @(posedge clk); while (!in_ready);
    @(negedge clk); in_valid = 0;
  endtask

  initial begin
    int c0;
    in_valid = 0; in_data = 0; out1_ready = 1; out2_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---- A: alternation, II = 1, latency 2
    @(negedge clk); c0 = cyc;
    for (int k = 0; k < 20; k++) begin
      in_valid = 1; in_data = W'(k);
      @(posedge clk); chk(in_ready, "A: II=1, input never stalls");
      @(negedge clk);
    end
    in_valid = 0;
    repeat (5) @(posedge clk);
    chk(got1.size() == 10 && got2.size() == 10, "A: 10 tasks per output");
    for (int k = 0; k < 10; k++) begin
      chk(got2[k] == W'(2*k),   "A: out_2 gets even tasks");
      chk(got1[k] == W'(2*k+1), "A: out_1 gets odd tasks");
    end
    chk(t2[0] == c0 + 2, "A: latency two cycles");
    got1.delete(); got2.delete(); t1.delete(); t2.delete();
    // ---- B: out_2 stalled
    // reset so last_selection is 0 again
    rst_n = 0; repeat (2) @(posedge clk); rst_n = 1;
    out2_ready = 0;
    @(negedge clk);
    for (int k = 0; k < 10; k++) begin
      in_valid = 1; in_data = W'(100 + k);
      @(posedge clk); @(negedge clk);
    end
    in_valid = 0;
    repeat (4) @(posedge clk);
    chk(got2.size() == 0, "B: nothing leaves the stalled output");
    chk(got1.size() == 8, "B: eight tasks took out_1");
    if (got1.size() == 8) begin
      chk(got1[0] == 101 && got1[1] == 103, "B: alternation before out_2 fills");
      for (int k = 2; k < 8; k++) chk(got1[k] == W'(102 + k), "B: rest to out_1 once out_2 full");
    end
    @(negedge clk); out2_ready = 1;
    repeat (4) @(posedge clk);
    chk(got2.size() == 2 && got2[0] == 100 && got2[1] == 102, "B: out_2 drains its two tasks");
    got1.delete(); got2.delete();
    // ---- C: both full, fairness block on the not-last-served output
    rst_n = 0; repeat (2) @(posedge clk); rst_n = 1;
    out1_ready = 0; out2_ready = 0;
    for (int k = 0; k < 4; k++) begin send(W'(200 + k)); repeat (3) @(posedge clk); end
    // now both FIFOs hold two tasks and the last one went to out_1
    send(W'(204));
    repeat (3) @(posedge clk);
    @(negedge clk); out1_ready = 1;          // only out_1 drains
    repeat (6) @(posedge clk);
    chk(got1.size() == 2, "C: out_1 delivers only its own two tasks");
    chk(got1.size() == 2 && got1[0] == 201 && got1[1] == 203, "C: out_1 order");
    @(negedge clk); out2_ready = 1;
    repeat (6) @(posedge clk);
    chk(got2.size() == 3, "C: blocked task waited for out_2");
    chk(got2.size() == 3 && got2[0] == 200 && got2[1] == 202 && got2[2] == 204, "C: out_2 order");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
