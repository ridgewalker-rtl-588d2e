// column_access: last stage of an asynchronous pipeline. Reads the sampled
// neighbour from the column-list channel, moves the task to it and decides
// whether the walk has ended.
//
// The request proxy turns the sampled list address a into the byte address
// CL_BASE + 8*a (one 64-bit word per neighbour, vertex id in bits [31:0]).
// A task whose walk already stopped (dead end or PPR stop) passes through the
// engine's no-fetch path in order and leaves with done set and hop clear. A
// fetched task leaves with v = neighbour, step + 1, hop set, and done set when
// step + 1 reaches cfg_max_len. Layout and base address are this design's.
//
// Interface: valid/ready task in and out, one AXI read channel, cfg_max_len.
// Timing: II = 1, latency = memory latency + 2 cycles.
// Constant output bits: the low 3 read-address bits (8-byte words) and the
// top address bits above CL_BASE + 8 * 2^32 at base 0.
module column_access #(
  parameter logic [39:0] CL_BASE = '0
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [7:0]         cfg_max_len,
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
  task_t       meta;
  logic [63:0] data;
  logic [7:0]  nstep;

  async_access_engine #(.META_W(TASK_W), .ADDR_W(40), .DATA_W(64)) u_eng (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_meta(in_task),
    .in_addr(CL_BASE + {5'd0, in_task.cl_addr, 3'b000}), .in_nofetch(in_task.stop),
    .ar_valid, .ar_ready, .ar_addr, .ar_id,
    .r_valid, .r_id, .r_data,
    .out_valid, .out_ready, .out_meta(meta), .out_data(data));

  always_comb begin
    nstep    = meta.step + 1'b1;
    out_task = meta;
    if (meta.stop) begin
      out_task.hop  = 1'b0;
      out_task.done = 1'b1;
    end else begin
      out_task.v    = data[31:0];
      out_task.step = nstep;
      out_task.hop  = 1'b1;
      out_task.done = (nstep >= cfg_max_len);
    end
  end
endmodule
