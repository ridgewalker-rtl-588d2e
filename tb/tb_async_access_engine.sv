// tb_async_access_engine: the engine against the behavioural memory model
// (random latency 60..100 cycles, responses out of order across IDs).
//  1: 600 back-to-back requests with the output always ready: one request
//     per cycle apart from the latency (II = 1), and responses really come
//     back out of order.
//  2: 600 requests, every fifth one no-fetch, random output back-pressure:
//     no-fetch requests issue no read, and the queue fills to its 128 limit
//     without exceeding it.
//  Both: results leave in request order with the metadata of the request and
//  the memory word of its address (word k holds k * 0x9E3779B1 + 7).
module tb_async_access_engine;
  localparam int MW = 32, AW = 40;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, in_nofetch, ar_valid, ar_ready, r_valid, out_valid, out_ready;
  logic [MW-1:0] in_meta, out_meta;
  logic [AW-1:0] in_addr, ar_addr;
  logic [5:0] ar_id, r_id;
  logic [63:0] r_data, out_data;
  logic wr_en; logic [31:0] wr_addr; logic [63:0] wr_data;
  int ooo, reads;
  int checks = 0, failures = 0;
  int cyc = 0;
  int nreads = 0, stalls = 0;
  int sent = 0, rcv = 0, nreq = 0, maxout = 0, outst = 0, maxocc = 0;
  bit nf_mode = 0;
  bit randbp = 0;

  async_access_engine #(.META_W(MW), .ADDR_W(AW)) dut (.*);
  hbm_model #(.DEPTH(1024), .LAT_MIN(60), .LAT_MAX(100), .READY_PCT(100)) mem (
    .clk, .ar_valid, .ar_ready, .ar_addr, .ar_id, .r_valid, .r_id, .r_data,
    .wr_en, .wr_addr, .wr_data, .ooo, .reads);

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at cycle %0d", m, cyc); end
  endtask

  function automatic logic [63:0] word(int k);
    return 64'(k) * 64'h9E37_79B1 + 64'd7;
  endfunction
  function automatic bit is_nf(int k);
    return nf_mode && (k % 5 == 3);
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (ar_valid && ar_ready) begin outst++; nreads++; end
      if (r_valid) outst--;
      if (outst > maxout) maxout = outst;
      if (sent - rcv > maxocc) maxocc = sent - rcv;
      if (in_valid && in_ready) sent++;
      if (in_valid && !in_ready && !randbp) stalls++;
      if (out_valid && out_ready) begin
        int k;
        k = int'(out_meta);
        if (k != rcv && failures < 3) $display("k=%0d rcv=%0d data=%h", k, rcv, out_data);
        chk(k == rcv, "in order");
        chk(is_nf(k) || out_data == word(k % 1024), "data matches address");
        rcv++;
      end
    end
  end

  always @(negedge clk) begin
    in_meta    = MW'(sent);
    in_addr    = AW'((sent % 1024) * 8);
    in_nofetch = is_nf(sent);
    in_valid   = (sent < nreq);
    out_ready  = randbp ? (($urandom % 100) < 50) : 1'b1;
  end

  initial begin
    int c0;
    wr_en = 0; wr_addr = 0; wr_data = 0;
    @(negedge clk);
    for (int k = 0; k < 1024; k++) begin
      wr_en = 1; wr_addr = k; wr_data = word(k);
      @(negedge clk);
    end
    wr_en = 0;
    rst_n = 1;
    repeat (2) @(posedge clk);
    // ---- 1
    c0 = cyc; nreq = 600;
    wait (rcv == 600);
    $display("1: 600 results after %0d cycles, max in flight %0d, out-of-order returns %0d", cyc - c0, maxout, ooo);
    chk(stalls == 0, "1: II = 1, a request accepted every cycle");
    chk(cyc - c0 <= 600 + 100 + 80, "1: all results within request time + latency + return queueing");
    chk(ooo > 50, "1: memory answered out of order");
    // ---- 2
    @(negedge clk); nf_mode = 1; randbp = 1; nreq = 1200;
    wait (rcv == 1200);
    $display("2: reads %0d, max occupancy %0d, max reads in flight %0d", nreads, maxocc, maxout);
    chk(nreads == 600 + 480, "2: no-fetch requests issue no read");
    chk(maxocc == 129 && maxout <= 128, "2: 128 queue entries plus the output register fill");
    chk(rcv == sent, "all results delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
