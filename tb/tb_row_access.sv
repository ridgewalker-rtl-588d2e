// tb_row_access: Row Access against the memory model holding a row-pointer
// array (entry of vertex v: channel v*5 mod 256, degree v*3 mod 50, list
// address v*37). 400 tasks with random vertices and random output
// back-pressure must come out in order with the query fields untouched and
// the row fields unpacked from the entry of their vertex.
module tb_row_access;
  import rw_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, ar_valid, ar_ready, r_valid, out_valid, out_ready;
  task_t in_task, out_task;
  logic [39:0] ar_addr; logic [5:0] ar_id, r_id; logic [63:0] r_data;
  logic wr_en; logic [31:0] wr_addr; logic [63:0] wr_data;
  int ooo, reads;
  int checks = 0, failures = 0, cyc = 0, sent = 0, rcv = 0;
  int vq [$];

  row_access dut (.*);
  hbm_model #(.DEPTH(512), .LAT_MIN(20), .LAT_MAX(60), .READY_PCT(80)) mem (
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
  function automatic logic [63:0] entry(int v);
    return {8'(v * 5), 24'(v * 3 % 50), 32'(v * 37)};
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (in_valid && in_ready) begin vq.push_back(int'(in_task.v)); sent++; end
      if (out_valid && out_ready) begin
        int v;
        v = vq.pop_front();
        chk(out_task.qid == QID_W'(rcv) && out_task.v == 32'(v) && out_task.step == 8'(rcv % 80), "query fields kept, order");
        chk({out_task.chan, out_task.deg, out_task.cl_addr} == entry(v), "row fields from entry");
        rcv++;
      end
    end
  end

  always @(negedge clk) begin
    if (!(in_valid && !in_ready)) begin
      in_task      = '0;
      in_task.v    = 32'($urandom % 512);
      in_task.qid  = QID_W'(sent);
      in_task.step = 8'(sent % 80);
      in_task.deg  = '1;    // must be overwritten
      in_valid     = rst_n && (sent < 400) && (($urandom % 100) < 80);
    end
    out_ready = ($urandom % 100) < 70;
  end

  initial begin
    wr_en = 0; in_valid = 0;
    @(negedge clk);
    for (int k = 0; k < 512; k++) begin wr_en = 1; wr_addr = k; wr_data = entry(k); @(negedge clk); end
    wr_en = 0;
    rst_n = 1;
    wait (rcv == 400);
    chk(ooo > 0, "memory returned out of order");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
