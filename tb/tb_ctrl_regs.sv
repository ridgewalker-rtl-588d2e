// tb_ctrl_regs: AXI4-Lite register file. Checks reset values (mode URW,
// alpha 0x26666666 = 0.15, walk length 80), write then read-back of every
// writable register with random data, the read-only completed counter, that
// writes to it are ignored, and that a response waits for its ready.
module tb_ctrl_regs;
  logic clk = 0, rst_n = 0;
  logic s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready;
  logic s_arvalid, s_arready, s_rvalid, s_rready;
  logic [7:0] s_awaddr, s_araddr;
  logic [31:0] s_wdata, s_rdata, completed;
  logic cfg_ppr; logic [31:0] cfg_alpha; logic [7:0] cfg_max_len;
  int checks = 0, failures = 0;

  ctrl_regs dut (.*);
  always #5 clk = ~clk;
  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); s_awvalid = 1; s_wvalid = 1; s_awaddr = a; s_wdata = d; s_bready = 0;
    do @(posedge clk); while (!(s_awready && s_wready));
    @(negedge clk); s_awvalid = 0; s_wvalid = 0;
    repeat ($urandom % 3) begin @(negedge clk); chk(s_bvalid, "write response held"); end
    s_bready = 1;
    do @(posedge clk); while (!s_bvalid);
    @(negedge clk); s_bready = 0;
  endtask
  task automatic rd(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk); s_arvalid = 1; s_araddr = a; s_rready = 0;
    do @(posedge clk); while (!s_arready);
    @(negedge clk); s_arvalid = 0;
    repeat ($urandom % 3) begin @(negedge clk); chk(s_rvalid, "read response held"); end
    s_rready = 1;
    do @(posedge clk); while (!s_rvalid);
    d = s_rdata;
    @(negedge clk); s_rready = 0;
  endtask

  initial begin
    logic [31:0] d, a, l;
    s_awvalid = 0; s_wvalid = 0; s_arvalid = 0; s_bready = 0; s_rready = 0;
    completed = 32'd1234;
    repeat (3) @(negedge clk);
    rst_n = 1;
    rd(8'h00, d); chk(d == 0 && !cfg_ppr, "reset mode");
    rd(8'h04, d); chk(d == 32'h2666_6666 && cfg_alpha == d, "reset alpha 0.15");
    rd(8'h08, d); chk(d == 80 && cfg_max_len == 80, "reset walk length 80");
    rd(8'h0C, d); chk(d == 1234, "completed counter");
    for (int k = 0; k < 20; k++) begin
      a = $urandom; l = $urandom % 256;
      wr(8'h00, {31'd0, 1'(k)}); wr(8'h04, a); wr(8'h08, l); wr(8'h0C, 32'hFFFF_FFFF);
      completed = $urandom;
      rd(8'h00, d); chk(d == 32'(k & 1) && cfg_ppr == 1'(k), "mode");
      rd(8'h04, d); chk(d == a && cfg_alpha == a, "alpha");
      rd(8'h08, d); chk(d == l && cfg_max_len == 8'(l), "walk length");
      rd(8'h0C, d); chk(d == completed, "completed is read-only");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
