// tb_query_loader: Query Loader with N = 4 lanes and an in-flight limit of 10.
// Host beats carry random masks and vertices; the lane outputs see random
// back-pressure; the testbench plays the writer and returns credits
// (done_cnt) at random for walks it has taken. Checks:
//  - every masked lane becomes exactly one step-0 task with qid = beat*N+lane
//    and its own vertex, on its own lane; unmasked lanes produce nothing;
//  - a new beat is accepted only after all lanes of the previous one left;
//  - inflight equals (accepted queries - returned credits) and never exceeds
//    the limit; the credit stall (host waiting on the limit) happens.
module tb_query_loader;
  import rw_pkg::*;
  localparam int N = 4, LIM = 10;
  logic clk = 0, rst_n = 0;
  logic q_valid, q_ready;
  logic [N-1:0] q_mask;
  logic [31:0] q_vertex [N];
  logic [$clog2(N):0] done_cnt;
  logic new_valid [N], new_ready [N];
  task_t new_data [N];
  logic [31:0] inflight;
  int checks = 0, failures = 0, cyc = 0, beats = 0, outst = 0, taken = 0, model = 0;
  int credit_stall = 0, lane_bp = 0;
  logic [N-1:0] pend_m;
  logic [31:0] vert_m [N];
  int base_m;

  query_loader #(.N(N), .MAX_INFLIGHT(LIM)) dut (.*);

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
      chk(inflight == 32'(model) && inflight <= LIM, "inflight count and limit");
      for (int k = 0; k < N; k++) begin
        chk(new_valid[k] == pend_m[k], "lane valid matches the masked lanes");
        if (new_valid[k] && new_ready[k]) begin
          chk(new_data[k].qid == QID_W'(base_m + k) && new_data[k].v == vert_m[k] &&
              new_data[k].step == 0 && !new_data[k].done && !new_data[k].stop, "task fields");
          pend_m[k] = 1'b0;
          outst++; taken++;
        end
        if (new_valid[k] && !new_ready[k]) lane_bp++;
      end
      if (q_valid && !q_ready && pend_m == '0) credit_stall++;
      model = model - int'(done_cnt);
      outst = outst - int'(done_cnt);
      if (q_valid && q_ready) begin
        chk(pend_m == '0, "beat accepted only after the previous one left");
        pend_m = q_mask; base_m = beats * N;
        for (int k = 0; k < N; k++) vert_m[k] = q_vertex[k];
        model = model + $countones(q_mask);
        beats++;
      end
    end
  end

  always @(negedge clk) begin
    if (!(q_valid && !q_ready)) begin
      q_mask  = N'($urandom);
      if (q_mask == 0) q_mask = 1;
      for (int k = 0; k < N; k++) q_vertex[k] = $urandom;
      q_valid = rst_n && (beats < 300) && (($urandom % 100) < 70);
    end
    for (int k = 0; k < N; k++) new_ready[k] = ($urandom % 100) < 60;
    done_cnt = (outst > 0 && ($urandom % 100) < 50) ? ($clog2(N)+1)'(1 + $urandom % (outst < N ? outst : N)) : '0;
  end

  initial begin
    q_valid = 0; done_cnt = 0; pend_m = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (beats == 300 && pend_m == 0);
    $display("queries %0d, credit stalls %0d, lane back-pressure %0d", taken, credit_stall, lane_bp);
    chk(credit_stall > 0, "credit stall happened");
    chk(lane_bp > 0, "lane back-pressure happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
