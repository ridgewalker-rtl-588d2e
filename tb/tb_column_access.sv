// tb_column_access: Column Access against the memory model holding a column
// list (word a = vertex a*7+3 in bits [31:0], junk in [63:32]). Tasks with
// random list addresses and steps, every seventh one already stopped:
//  - fetched tasks leave with v = word[31:0], step + 1, hop set, done exactly
//    when step + 1 reaches the walk length (80);
//  - stopped tasks leave with done set, v and step unchanged, and cost no read;
//  - order is kept under random back-pressure.
module tb_column_access;
  import rw_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, ar_valid, ar_ready, r_valid, out_valid, out_ready;
  task_t in_task, out_task;
  logic [7:0] cfg_max_len = 8'd80;
  logic [39:0] ar_addr; logic [5:0] ar_id, r_id; logic [63:0] r_data;
  logic wr_en; logic [31:0] wr_addr; logic [63:0] wr_data;
  int ooo, reads;
  int checks = 0, failures = 0, cyc = 0, sent = 0, rcv = 0, nstop = 0, nreads = 0, ndone = 0;
  task_t q [$];

  column_access dut (.*);
  hbm_model #(.DEPTH(1024), .LAT_MIN(20), .LAT_MAX(60), .READY_PCT(80)) mem (
    .clk, .ar_valid, .ar_ready, .ar_addr, .ar_id, .r_valid, .r_id, .r_data,
    .wr_en, .wr_addr, .wr_data, .ooo, .reads);

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
      if (ar_valid && ar_ready) nreads++;
      if (in_valid && in_ready) begin q.push_back(in_task); sent++; if (in_task.stop) nstop++; end
      if (out_valid && out_ready) begin
        task_t e;
        e = q.pop_front();
        chk(out_task.qid == e.qid, "order");
        if (e.stop) begin
          chk(out_task.done && !out_task.hop && out_task.v == e.v && out_task.step == e.step, "stopped walk ends in place");
        end else begin
          chk(out_task.hop && out_task.v == e.cl_addr * 7 + 3 && out_task.step == e.step + 1, "moved to fetched neighbour");
          chk(out_task.done == (e.step + 1 >= 80), "done at walk length");
        end
        if (out_task.done) ndone++;
        rcv++;
      end
    end
  end

  always @(negedge clk) begin
    if (!(in_valid && !in_ready)) begin
      in_task         = '0;
      in_task.v       = 32'($urandom);
      in_task.qid     = QID_W'(sent);
      in_task.step    = 8'(70 + $urandom % 10);
      in_task.cl_addr = 32'($urandom % 1024);
      in_task.stop    = (sent % 7 == 6);
      in_valid        = rst_n && (sent < 500) && (($urandom % 100) < 85);
    end
    out_ready = ($urandom % 100) < 70;
  end

  initial begin
    wr_en = 0; in_valid = 0;
    @(negedge clk);
    for (int k = 0; k < 1024; k++) begin wr_en = 1; wr_addr = k; wr_data = {32'hDEAD_0000 | 32'(k), 32'(k * 7 + 3)}; @(negedge clk); end
    wr_en = 0;
    rst_n = 1;
    wait (rcv == 500);
    chk(nreads == 500 - nstop, "stopped tasks issue no read");
    chk(ndone > nstop, "length-limited walks finished too");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
