// tb_query_writer: Query Writer with N = 2 lanes, 4 records per beat, an
// 8-entry return FIFO and a 5-cycle flush timer. Random tasks (30 % done)
// with random back-pressure on the write ports and return outputs. Checks:
//  - every accepted task appears as one record, in order, in its lane's
//    write beats (wr_count records per beat, unused slots zero);
//  - every accepted task that is not done comes out of the return FIFO, in
//    order, unchanged; done tasks never do;
//  - done_cnt and completed count the finished walks;
//  - phase 2 (no back-pressure): one task per cycle per lane (II = 1);
//  - full beats, flushed partial beats and a full return FIFO all happen.
module tb_query_writer;
  import rw_pkg::*;
  localparam int N = 2, G = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid [N], in_ready [N], ret_valid [N], ret_ready [N], wr_valid [N], wr_ready [N];
  task_t in_task [N], ret_data [N];
  logic [G*64-1:0] wr_data [N];
  logic [$clog2(G):0] wr_count [N];
  logic [$clog2(N):0] done_cnt;
  logic [31:0] completed;
  int checks = 0, failures = 0, cyc = 0, ndone = 0, dsum = 0;
  int sent [N], rq_n [N];
  int nfull = 0, nflush = 0, retfull = 0, stalls2 = 0;
  bit phase2 = 0;
  task_t recq [N][$], retq [N][$];

  query_writer #(.N(N), .WRITE_GRAN(G), .RET_DEPTH(8), .FLUSH_CYCLES(5)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL %s at cycle %0d", m, cyc); end
  endtask

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      dsum = dsum + int'(done_cnt);
      for (int i = 0; i < N; i++) begin
        if (in_valid[i] && in_ready[i]) begin
          recq[i].push_back(in_task[i]);
          if (!in_task[i].done) retq[i].push_back(in_task[i]); else ndone++;
          sent[i]++;
        end
        if (in_valid[i] && !in_ready[i]) begin
          if (!in_task[i].done && ret_valid[i] && !ret_ready[i]) retfull++;
          if (phase2) stalls2++;
        end
        if (wr_valid[i] && wr_ready[i]) begin
          int c;
          c = int'(wr_count[i]);
          if (c == G) nfull++; else nflush++;
          chk(c >= 1 && c <= G, "record count");
          for (int k = 0; k < G; k++) begin
            rec_t r;
            r = rec_t'(wr_data[i][k*64 +: 64]);
            if (k < c) begin
              task_t e;
              e = recq[i].pop_front();
              chk(r.vertex == e.v && r.qid == e.qid && r.step == e.step && r.hop == e.hop && r.done == e.done, "record content and order");
            end else chk(r == '0, "unused slot zero");
          end
        end
        if (ret_valid[i] && ret_ready[i]) begin
          task_t e;
          e = retq[i].pop_front();
          chk(ret_data[i] == e, "returned task");
          rq_n[i]++;
        end
      end
    end
  end

  always @(negedge clk) begin
    for (int i = 0; i < N; i++) begin
      if (!(in_valid[i] && !in_ready[i])) begin
        in_task[i]      = '0;
        in_task[i].v    = $urandom;
        in_task[i].qid  = QID_W'(sent[i] * N + i);
        in_task[i].step = 8'($urandom);
        in_task[i].hop  = 1'($urandom);
        in_task[i].done = ($urandom % 100) < 30;
        in_valid[i]     = rst_n && sent[i] < (phase2 ? 1600 : 800) && (phase2 || ($urandom % 100) < 60);
      end
      wr_ready[i]  = phase2 || (($urandom % 100) < 60);
      ret_ready[i] = phase2 || (($urandom % 100) < 40);
    end
  end

  initial begin
    for (int i = 0; i < N; i++) begin in_valid[i] = 0; sent[i] = 0; rq_n[i] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (sent[0] == 800 && sent[1] == 800);
    repeat (100) @(negedge clk);
    phase2 = 1;
    wait (sent[0] == 1600 && sent[1] == 1600);
    repeat (100) @(negedge clk);
    for (int i = 0; i < N; i++) chk(recq[i].size() == 0 && retq[i].size() == 0, "all records written, all returns delivered");
    chk(dsum == ndone && completed == 32'(ndone), "done_cnt and completed");
    chk(stalls2 == 0, "II = 1 without back-pressure");
    $display("full beats %0d, flushed beats %0d, return-full stalls %0d", nfull, nflush, retfull);
    chk(nfull > 0 && nflush > 0 && retfull > 0, "full beat, flush and return-full stall all happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
