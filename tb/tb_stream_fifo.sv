// tb_stream_fifo: self-checking test of stream_fifo with a non-power-of-two
// depth. Random writes and reads are compared against a queue model: data
// order, in_ready low exactly when the model holds DEPTH words, out_valid high
// exactly when it holds any, and one cycle from write to readable.
module tb_stream_fifo;
  localparam int W = 16, D = 5;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  int checks = 0, failures = 0;
  logic [W-1:0] model [$];
  int fulls = 0;
  bit hold = 0;

  stream_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at %0t", m, $time); end
  endtask

  initial begin
    in_valid = 0; in_data = 0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // single write then read: one-cycle latency
    @(negedge clk); in_valid = 1; in_data = 16'hBEEF;
    @(posedge clk); #1; in_valid = 0;
    chk(out_valid && out_data == 16'hBEEF, "visible one cycle after write");
    @(negedge clk); out_ready = 1;
    @(posedge clk); #1; out_ready = 0;
    chk(!out_valid, "empty after read");
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      if (!hold) begin
        in_valid = ($urandom % 100) < (cyc < 1500 ? 70 : 30);
        in_data  = W'($urandom);
      end
      out_ready = ($urandom % 100) < (cyc < 1500 ? 30 : 70);
      @(posedge clk);
      chk(in_ready == (model.size() < D), "in_ready matches occupancy");
      chk(out_valid == (model.size() > 0), "out_valid matches occupancy");
      if (!in_ready) fulls++;
      if (out_valid && out_ready) begin
        chk(out_data == model[0], "data order");
        void'(model.pop_front());
      end
      if (in_valid && in_ready) model.push_back(in_data);
      hold = in_valid && !in_ready;
    end
    chk(fulls > 0, "full state reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
