// zero_bubble_scheduler: feeds N asynchronous pipelines so that none of them
// idles while work exists anywhere.
//
// Three parts, in order:
//  (1) a task_balancer that spreads newly loaded queries over N lanes
//      according to back-pressure, so a burst of new queries never stalls;
//  (2) one task_merger per lane joining the lane's new queries with the
//      unfinished walks coming back from the pipelines; the returning walks
//      have strict priority (PRIO_IN1), new queries fill the remaining slots;
//  (3) a second task_balancer that hands ready tasks to whichever pipelines
//      can take them, followed by one PIPE_FIFO_DEPTH-entry FIFO per pipeline.
// The scheduler only ever looks at FIFO full/empty flags; it has no start or
// stop control and no global state. The per-pipeline FIFO is the buffer that
// covers the feedback delay of the balancer: the queuing bound N + 4N log2 N
// needs 1 + 4 log2 N entries per pipeline (17 for N = 16); the default of 65
// is the depth used in the original hardware.
//
// Interface: new_* from the query loader, ret_* unfinished tasks, pipe_* to
// the Row Access units, all valid/ready arrays of N. Timing: II = 1 per lane;
// a task needs 2 + 8 log2 N cycles from ret_* to the head of a pipe FIFO.
module zero_bubble_scheduler #(
  parameter int N               = 16,
  parameter int PIPE_FIFO_DEPTH = 65
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          new_valid  [N],
  output logic          new_ready  [N],
  input  rw_pkg::task_t new_data   [N],
  input  logic          ret_valid  [N],
  output logic          ret_ready  [N],
  input  rw_pkg::task_t ret_data   [N],
  output logic          pipe_valid [N],
  input  logic          pipe_ready [N],
  output rw_pkg::task_t pipe_data  [N]
);
  import rw_pkg::*;
  logic                b1_v [N], b1_r [N];
  logic [TASK_W-1:0]   b1_d [N];
  logic                m_v [N], m_r [N];
  logic [TASK_W-1:0]   m_d [N];
  logic                b3_v [N], b3_r [N];
  logic [TASK_W-1:0]   b3_d [N];
  logic [TASK_W-1:0]   new_w [N];
  logic [TASK_W-1:0]   pipe_w [N];

  for (genvar i = 0; i < N; i++) begin : g_cast
    assign new_w[i]     = new_data[i];
    assign pipe_data[i] = task_t'(pipe_w[i]);
  end

  task_balancer #(.N(N), .WIDTH(TASK_W)) u_bal_new (
    .clk, .rst_n,
    .in_valid(new_valid), .in_ready(new_ready), .in_data(new_w),
    .out_valid(b1_v), .out_ready(b1_r), .out_data(b1_d));

  for (genvar i = 0; i < N; i++) begin : g_lane
    task_merger #(.WIDTH(TASK_W), .PRIO_IN1(1'b1)) u_merge (
      .clk, .rst_n,
      .in1_valid(ret_valid[i]), .in1_ready(ret_ready[i]), .in1_data(ret_data[i]),
      .in2_valid(b1_v[i]), .in2_ready(b1_r[i]), .in2_data(b1_d[i]),
      .out_valid(m_v[i]), .out_ready(m_r[i]), .out_data(m_d[i]));

    stream_fifo #(.WIDTH(TASK_W), .DEPTH(PIPE_FIFO_DEPTH)) u_pipe_fifo (
      .clk, .rst_n,
      .in_valid(b3_v[i]), .in_ready(b3_r[i]), .in_data(b3_d[i]),
      .out_valid(pipe_valid[i]), .out_ready(pipe_ready[i]), .out_data(pipe_w[i]));
  end

  task_balancer #(.N(N), .WIDTH(TASK_W)) u_bal_pipe (
    .clk, .rst_n,
    .in_valid(m_v), .in_ready(m_r), .in_data(m_d),
    .out_valid(b3_v), .out_ready(b3_r), .out_data(b3_d));
endmodule
