// row_access: first stage of an asynchronous pipeline. Reads the row-pointer
// entry of the task's current vertex and fills the task's channel, degree and
// neighbour-list address from it.
//
// The request proxy turns vertex v into the byte address RP_BASE + 8*v (one
// 64-bit row-pointer word per vertex, the whole array readable through this
// pipeline's channel), hands the task to the async_access_engine as metadata
// and, when the word returns, the response proxy unpacks it as
//   [63:56] channel id, [55:32] degree, [31:0] word address of the list.
// The entry layout and base address are this design's choices.
//
// Interface: valid/ready task in and out, one AXI read channel. Timing: II=1,
// latency = memory latency + 2 cycles, up to 128 reads in flight.
// Constant output bits: the low 3 read-address bits (8-byte words), the top
// address bits above RP_BASE + 8 * 2^32 at base 0, and the task's stop, hop
// and done flags (still clear at this stage; the sampler and Column Access
// set them).
module row_access #(
  parameter logic [39:0] RP_BASE = '0
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  output logic               in_ready,
  input  rw_pkg::task_t      in_task,
  output logic               ar_valid,
  input  logic               ar_ready,
  output logic [39:0]        ar_addr,
  output logic [5:0]         ar_id,
  input  logic               r_valid,
  input  logic [5:0]         r_id,
  input  logic [63:0]        r_data,
  output logic               out_valid,
  input  logic               out_ready,
  output rw_pkg::task_t      out_task
);
  import rw_pkg::*;
  task_t     meta;
  logic [63:0] data;
  rp_entry_t e;

  async_access_engine #(.META_W(TASK_W), .ADDR_W(40), .DATA_W(64)) u_eng (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_meta(in_task),
    .in_addr(RP_BASE + {5'd0, in_task.v, 3'b000}), .in_nofetch(1'b0),
    .ar_valid, .ar_ready, .ar_addr, .ar_id,
    .r_valid, .r_id, .r_data,
    .out_valid, .out_ready, .out_meta(meta), .out_data(data));

  always_comb begin
    e        = rp_entry_t'(data);
    out_task = meta;
    out_task.chan    = e.chan;
    out_task.deg     = e.deg;
    out_task.cl_addr = e.addr;
    out_task.stop    = 1'b0;
    out_task.hop     = 1'b0;
    out_task.done    = 1'b0;
  end
endmodule
