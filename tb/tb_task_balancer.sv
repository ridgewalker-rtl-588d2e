// tb_task_balancer: N = 4 butterfly balancer.
//  1: one task crosses in 4*log2(N) = 8 cycles.
//  2: all inputs saturated, all outputs ready: N tasks per cycle, every task
//     delivered exactly once.
//  3: output 2 accepts one task in 25 cycles, the others every cycle (the
//     throttled-output example): congestion must spread evenly, so all four
//     inputs are accepted at nearly the same rate, and the fast outputs keep
//     running.
//  4: random input valid and random output ready for 3000 cycles, then a
//     drain: every accepted task comes out exactly once.
//  Every delivery is also checked on its own: it must be a task that was
//  accepted and not delivered before.
module tb_task_balancer;
  localparam int N = 4, W = 16;
  logic clk = 0, rst_n = 0;
  logic in_valid [N], in_ready [N], out_valid [N], out_ready [N];
  logic [W-1:0] in_data [N], out_data [N];
  int checks = 0, failures = 0;
  int cyc = 0;
  int seqn [N];
  int acc_in [N], acc_out [N];
  int seen [int];
  int phase = 0;
  int slow = -1;

  task_balancer #(.N(N), .WIDTH(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
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
        if (in_valid[i] && in_ready[i]) begin acc_in[i]++; seqn[i]++; end
        if (out_valid[i] && out_ready[i]) begin
          acc_out[i]++;
          chk(!seen.exists(int'(out_data[i])) && int'(out_data[i][13:0]) < seqn[out_data[i][15:14]],
              "delivered task was accepted and is delivered once");
          if (seen.exists(int'(out_data[i]))) seen[int'(out_data[i])]++;
          else seen[int'(out_data[i])] = 1;
        end
      end
    end
  end

  always @(negedge clk) begin
    for (int i = 0; i < N; i++) begin
      in_data[i]   = {2'(i), 14'(seqn[i])};
      out_ready[i] = (i == slow) ? (cyc % 25 == 0) : (phase == 4) ? (($urandom % 100) < 50) : 1'b1;
      if (phase == 4 && !(in_valid[i] && !in_ready[i])) in_valid[i] = ($urandom % 100) < 70;
    end
  end

  task automatic clear();
    for (int i = 0; i < N; i++) begin acc_in[i] = 0; acc_out[i] = 0; end
  endtask

  initial begin
    int c0, lat, tot;
    real r [N];
    real mx, mn;
    for (int i = 0; i < N; i++) begin in_valid[i] = 0; seqn[i] = 0; acc_in[i] = 0; acc_out[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---- 1: latency
    @(negedge clk); c0 = cyc; in_valid[1] = 1;
    @(posedge clk); @(negedge clk); in_valid[1] = 0;
    lat = -1;
    for (int k = 0; k < 20 && lat < 0; k++) begin
      @(posedge clk);
      for (int i = 0; i < N; i++) if (out_valid[i]) lat = cyc - c0;
    end
    chk(lat == 8, $sformatf("1: latency %0d, expected 8", lat));
    repeat (3) @(posedge clk);
    // ---- 2: saturated
    @(negedge clk);
    for (int i = 0; i < N; i++) in_valid[i] = 1;
    repeat (20) @(posedge clk);
    clear();
    repeat (400) @(posedge clk);
    tot = 0; for (int i = 0; i < N; i++) tot += acc_out[i];
    chk(tot >= 4 * 400 - 4, $sformatf("2: throughput %0d of 1600", tot));
    @(negedge clk); for (int i = 0; i < N; i++) in_valid[i] = 0;
    repeat (30) @(posedge clk);
    tot = 0; for (int i = 0; i < N; i++) tot += seqn[i];
    chk(seen.num() == tot, "2: every accepted task delivered");
    foreach (seen[k]) if (seen[k] != 1) begin chk(0, "2: task delivered twice"); break; end
    // ---- 3: one slow output
    slow = 2;
    @(negedge clk); for (int i = 0; i < N; i++) in_valid[i] = 1;
    repeat (300) @(posedge clk);
    clear();
    repeat (5000) @(posedge clk);
    mx = 0; mn = 1e9;
    for (int i = 0; i < N; i++) begin
      r[i] = real'(acc_in[i]) / 5000.0;
      if (r[i] > mx) mx = r[i];
      if (r[i] < mn) mn = r[i];
    end
    $display("3: input rates %.3f %.3f %.3f %.3f  output rates %.3f %.3f %.3f %.3f", r[0], r[1], r[2], r[3],
             real'(acc_out[0])/5000.0, real'(acc_out[1])/5000.0, real'(acc_out[2])/5000.0, real'(acc_out[3])/5000.0);
    chk(mx - mn < 0.05, "3: congestion spread evenly over the inputs");
    chk(acc_out[0] > 2500 && acc_out[1] > 2500 && acc_out[3] > 2500, "3: fast outputs keep flowing");
    chk(acc_out[2] <= 201, "3: slow output limited to its rate");
    // ---- 4: random input and output handshakes, then drain: conservation
    slow = -1; phase = 4;
    repeat (3000) @(posedge clk);
    phase = 5;
    for (int i = 0; i < N; i++) wait (!in_valid[i] || in_ready[i]);
    @(negedge clk); for (int i = 0; i < N; i++) in_valid[i] = 0;
    repeat (60) @(posedge clk);
    tot = 0; for (int i = 0; i < N; i++) tot += seqn[i];
    chk(seen.num() == tot, "4: every accepted task delivered after random handshakes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
