// stream_fifo: first-in first-out buffer with a valid/ready (AXI-Stream style)
// handshake on both sides.
//
// Every link between modules of the accelerator goes through one of these, and
// its full/empty state (in_ready low / out_valid low) is what the scheduler's
// dispatchers and mergers observe as back-pressure. A word written at a clock
// edge can be read in the next cycle (one cycle of latency); the read side
// shows the head entry directly from the storage array. Full and empty come
// from a registered occupancy count, so in_ready does not depend on out_ready
// and chains of FIFOs have no combinational ready path. DEPTH need not be a
// power of two (the scheduler uses 65). Reset empties the FIFO.
module stream_fifo #(
  parameter int WIDTH = rw_pkg::TASK_W,
  parameter int DEPTH = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic [AW:0]      count;

  wire push = in_valid && in_ready;
  wire pop  = out_valid && out_ready;

  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= inc(wr_ptr);
      if (pop)  rd_ptr <= inc(rd_ptr);
      case ({push, pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  // A producer must hold its word until it is taken.
  a_hold: assert property (
    @(posedge clk) disable iff (!rst_n) (in_valid && !in_ready) |=> (in_valid && $stable(in_data)));
endmodule
