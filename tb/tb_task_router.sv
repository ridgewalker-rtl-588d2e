// tb_task_router: N = 4 butterfly router.
//  1: a task from each input to each destination arrives at out[dest] in
//     3*log2(N) = 6 cycles when the path is free.
//  2: random destinations, random output back-pressure: every task arrives
//     exactly once and only at the output its channel field names.
//  3: all inputs send to dest = (input + 1) mod N (a permutation) with all
//     outputs ready: full rate, N tasks per cycle.
module tb_task_router;
  import rw_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid [N], in_ready [N], out_valid [N], out_ready [N];
  task_t in_data [N], out_data [N];
  int checks = 0, failures = 0;
  int cyc = 0;
  int seqn [N];
  int seen [int];
  int nout = 0, bp = 0;
  int mode = 0;   // 1 random, 2 permutation
  int lat_c0 = -1, lat_got = -1;
  int fdest = 0;
  bit stopping = 0;   // drop each input's valid right after its next handshake

  task_router #(.N(N)) dut (.*);

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

  function automatic int dest_of(int i, int s);
    if (mode == 2) return (i + 1) % N;
    if (mode == 3) return fdest;
    return int'({i[3:0], s[11:0]} * 2654435761 >> 7) % N;
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      for (int i = 0; i < N; i++) begin
        if (in_valid[i] && in_ready[i]) begin seqn[i]++; if (stopping) in_valid[i] <= 1'b0; end
        if (out_valid[i] && out_ready[i]) begin
          nout++;
          if (lat_got < 0 && lat_c0 >= 0) lat_got = cyc - lat_c0;
          if (int'(out_data[i].chan) % N != i) begin failures++; checks++; $display("FAIL misrouted"); end
          else checks++;
          if (seen.exists(int'(out_data[i].qid))) seen[int'(out_data[i].qid)]++;
          else seen[int'(out_data[i].qid)] = 1;
        end
      end
    end
  end

  always @(negedge clk) begin
    for (int i = 0; i < N; i++) begin
      in_data[i]      = '0;
      in_data[i].qid  = QID_W'(i * 65536 + seqn[i]);
      in_data[i].chan = CHAN_W'(dest_of(i, seqn[i]) + N * (seqn[i] % 4));   // upper bits ignored by the router
      out_ready[i]    = (mode == 1) ? (($urandom % 100) < 60) : 1'b1;
    end
  end

  initial begin
    int tot, c1;
    for (int i = 0; i < N; i++) begin in_valid[i] = 0; seqn[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---- 1: latency, every input to every destination
    for (int i = 0; i < N; i++) begin
      for (int d = 0; d < N; d++) begin
        @(negedge clk);
        mode = 3;
        in_valid[i] = 1; lat_got = -1; lat_c0 = cyc;
        fdest = d; in_data[i].chan = CHAN_W'(d);
        @(posedge clk); @(negedge clk); in_valid[i] = 0;
        repeat (8) @(posedge clk);
        chk(lat_got == 3 * $clog2(N), $sformatf("1: latency %0d from %0d to %0d", lat_got, i, d));
      end
    end
    lat_c0 = -1;
    // ---- 2: random traffic
    mode = 1;
    @(negedge clk); for (int i = 0; i < N; i++) in_valid[i] = 1;
    repeat (3000) @(posedge clk);
    stopping = 1;
    for (int i = 0; i < N; i++) wait (!in_valid[i]);
    stopping = 0;
    mode = 0;
    repeat (40) @(posedge clk);
    tot = 0; for (int i = 0; i < N; i++) tot += seqn[i];
    chk(seen.num() == tot, $sformatf("2: %0d of %0d tasks delivered", seen.num(), tot));
    foreach (seen[k]) if (seen[k] != 1) begin chk(0, "2: duplicate"); break; end
    // ---- 3: permutation at full rate
    mode = 2;
    @(negedge clk); for (int i = 0; i < N; i++) in_valid[i] = 1;
    repeat (20) @(posedge clk);
    c1 = nout;
    repeat (400) @(posedge clk);
    chk(nout - c1 >= 4 * 400 - 4, $sformatf("3: %0d tasks in 400 cycles", nout - c1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
