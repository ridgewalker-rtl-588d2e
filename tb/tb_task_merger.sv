// tb_task_merger: checks the balanced-merge policy of task_merger and the
// strict-priority variant.
//  A: both inputs always valid -> output alternates in_2, in_1, in_2 ...
//     (last_selection resets to 0), II = 1.
//  B: only in_1 valid -> all forwarded; latency 2 cycles.
//  C: PRIO_IN1 = 1 with both inputs valid -> in_1 always wins.
module tb_task_merger;
  localparam int W = 16;
  logic clk = 0, rst_n = 0;
  logic i1v, i1r, i2v, i2r, ov, orr;
  logic [W-1:0] i1d, i2d, od;
  logic p1r, p2r, pv;
  logic [W-1:0] pd;
  int checks = 0, failures = 0;
  int cyc = 0;
  logic [W-1:0] got [$], gotp [$];
  int tg [$];
  int n1 = 0, n2 = 0;

  task_merger #(.WIDTH(W)) dut (.clk, .rst_n,
    .in1_valid(i1v), .in1_ready(i1r), .in1_data(i1d),
    .in2_valid(i2v), .in2_ready(i2r), .in2_data(i2d),
    .out_valid(ov), .out_ready(orr), .out_data(od));
  task_merger #(.WIDTH(W), .PRIO_IN1(1'b1)) dutp (.clk, .rst_n,
    .in1_valid(i1v), .in1_ready(p1r), .in1_data(i1d),
    .in2_valid(i2v), .in2_ready(p2r), .in2_data(i2d),
    .out_valid(pv), .out_ready(orr), .out_data(pd));

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && ov && orr) begin got.push_back(od); tg.push_back(cyc); end
    if (rst_n && pv && orr) gotp.push_back(pd);
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

  initial begin
    int c0;
    i1v = 0; i2v = 0; i1d = 0; i2d = 0; orr = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---- A + C: both inputs valid; sources advance on their own handshake
    @(negedge clk);
    i1v = 1; i2v = 1; i1d = 16'h1000; i2d = 16'h2000;
    for (int k = 0; k < 40; k++) begin
      @(posedge clk);
      if (i1r) begin n1++; end
      if (i2r) begin n2++; end
      @(negedge clk);
      i1d = 16'h1000 + W'(n1); i2d = 16'h2000 + W'(n2);
    end
    i1v = 0; i2v = 0;
    repeat (5) @(posedge clk);
    chk(got.size() == 40, "A: one task per cycle");
    for (int k = 0; k + 1 < got.size() && k < 38; k += 2) begin
      chk(got[k] == 16'h2000 + W'(k/2),   "A: in_2 on even slots");
      chk(got[k+1] == 16'h1000 + W'(k/2), "A: in_1 on odd slots");
    end
    got.delete(); tg.delete();
    // ---- B: only in_1, latency 2
    @(negedge clk); c0 = cyc;
    i1v = 1; i1d = 16'h3000;
    @(posedge clk); @(negedge clk); i1v = 0;
    repeat (4) @(posedge clk);
    chk(got.size() == 1 && got[0] == 16'h3000, "B: lone input forwarded");
    chk(tg.size() == 1 && tg[0] == c0 + 2, "B: latency two cycles");
    // ---- C: priority variant saw the A traffic; in_1 always won while valid
    chk(gotp.size() >= 40, "C: priority merger forwarded");
    for (int k = 0; k < 40 && k < gotp.size(); k++)
      chk(gotp[k][15:12] == 4'h1, "C: in_1 has strict priority");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
