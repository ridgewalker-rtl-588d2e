// tb_sampling: the sampler against an independent software model of the same
// generator and formula (index = (r[31:0] * deg) >> 32; PPR stop when
// r[63:32] < alpha).
//  1: URW mode, random degrees including 0: every sampled address matches the
//     model, lies inside the neighbour list, degree 0 stops the walk.
//  2: PPR mode, alpha = 0.25: the stop rate over 3000 tasks is 0.25 +- 0.03
//     and every decision matches the model.
//  3: degree 4: each neighbour is chosen 25 % +- 3 % of the time.
//  Throughput: II = 1 and two cycles of latency with the output ready.
module tb_sampling;
  import rw_pkg::*;
  localparam logic [63:0] SEED = 64'h1234_5678_9ABC_DEF1;
  logic clk = 0, rst_n = 0;
  logic cfg_ppr = 0;
  logic [31:0] cfg_alpha = 32'h4000_0000;
  logic in_valid, in_ready, out_valid, out_ready;
  task_t in_task, out_task;
  int checks = 0, failures = 0, cyc = 0, sent = 0, rcv = 0, nstop = 0, nreq = 0;
  int hist [4];
  logic [63:0] rng;
  task_t q [$];
  int qc [$];
  int lat_bad = 0;
  bit bp = 0;

  sampling #(.SEED(SEED)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL %s at cycle %0d", m, cyc); end
  endtask

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (in_valid && in_ready) begin q.push_back(in_task); qc.push_back(cyc); sent++; end
      if (out_valid && out_ready) begin
        task_t e;
        logic [63:0] p;
        logic [31:0] idx;
        logic st;
        int c;
        e = q.pop_front(); c = qc.pop_front();
        if (!bp && cyc - c != 2) lat_bad++;
        p   = 64'(rng[31:0]) * 64'(e.deg);
        idx = 32'(p >> 32);
        st  = (e.deg == 0) || (cfg_ppr && rng[63:32] < cfg_alpha);
        rng = xorshift64(rng);
        chk(out_task.qid == e.qid, "order");
        chk(out_task.stop == st, "stop decision");
        chk(out_task.cl_addr == e.cl_addr + idx, "sampled address");
        chk(e.deg == 0 || idx < 32'(e.deg), "index inside the list");
        if (out_task.stop) nstop++;
        if (e.deg == 4) hist[idx[1:0]]++;
        rcv++;
      end
    end
  end

  always @(negedge clk) begin
    if (!(in_valid && !in_ready)) begin
      in_task         = '0;
      in_task.qid     = QID_W'(sent);
      in_task.cl_addr = 32'($urandom % 100000);
      in_task.deg     = (nreq > 6000) ? 24'd4 : 24'($urandom % 40);
      in_valid        = rst_n && (sent < nreq);
    end
    out_ready = bp ? (($urandom % 100) < 60) : 1'b1;
  end

  initial begin
    int s0;
    in_valid = 0; rng = SEED;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---- 1: URW
    nreq = 3000;
    wait (rcv == 3000);
    chk(lat_bad == 0, "II = 1, latency two cycles");
    // ---- 2: PPR, with back-pressure
    @(negedge clk); cfg_ppr = 1; bp = 1; s0 = nstop;
    nreq = 6000;
    wait (rcv == 6000);
    begin
      real f;
      f = real'(nstop - s0) / 3000.0;
      $display("2: stop fraction %.3f", f);
      chk(f > 0.24 && f < 0.40, "PPR stop fraction (alpha plus dead ends)");
    end
    // ---- 3: uniformity
    @(negedge clk); cfg_ppr = 0; bp = 0;
    nreq = 10001;
    wait (rcv == 10001);
    for (int k = 0; k < 4; k++) begin
      $display("3: neighbour %0d chosen %0d of %0d", k, hist[k], hist[0]+hist[1]+hist[2]+hist[3]);
      chk(hist[k] > 880 && hist[k] < 1120, "uniform choice");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
