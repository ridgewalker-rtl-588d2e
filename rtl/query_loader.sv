// query_loader: turns host query beats into first-hop tasks.
//
// The host delivers beats of N start vertices (one 512-bit beat holds 16
// 32-bit ids) with a mask of valid lanes. Query i of the stream gets query id
// i = beat number * N + lane, which is also the index the host uses to find
// its path records. Lane k of a beat becomes a step-0 task on output k, which
// feeds input k of the scheduler's first balancer; lanes are released
// independently, and the next beat is taken in the cycle the last pending lane
// of the current one leaves (II = 1 beat per cycle when nothing stalls).
// A beat is only taken while the number of walks in flight plus the beat's
// query count stays within MAX_INFLIGHT; done_cnt (walks finished this cycle,
// from the query writer) returns credits. The credit limit is this design's
// own: it bounds the number of tasks circulating in the closed
// scheduler/pipeline loop, and the query writer's return buffers are sized to
// hold that many, so the loop cannot lock up with every buffer full.
// Output bits that are constant by design: a new task has step 0 and no
// channel, list address, degree or flags yet (Row Access fills them in).
module query_loader #(
  parameter int N            = 16,
  parameter int MAX_INFLIGHT = 4096
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 q_valid,
  output logic                 q_ready,
  input  logic [N-1:0]         q_mask,
  input  logic [31:0]          q_vertex [N],
  input  logic [$clog2(N):0]   done_cnt,
  output logic                 new_valid [N],
  input  logic                 new_ready [N],
  output rw_pkg::task_t        new_data  [N],
  output logic [31:0]          inflight
);
  import rw_pkg::*;
  localparam int LW = $clog2(N);

  logic [N-1:0]       pend;
  logic [31:0]        vert [N];
  logic [QID_W-1:0]   qbase, beat_base;
  logic [N-1:0]       taken;
  logic [LW:0]        nq;

  always_comb begin
    taken = '0;
    for (int k = 0; k < N; k++) taken[k] = new_valid[k] && new_ready[k];
    nq = '0;
    for (int k = 0; k < N; k++) nq = nq + (LW+1)'(q_mask[k]);
  end

  wire beat_ends = ((pend & ~taken) == '0);
  assign q_ready = beat_ends && ((inflight + 32'(nq)) <= 32'(MAX_INFLIGHT));
  wire q_take = q_valid && q_ready;

  for (genvar k = 0; k < N; k++) begin : g_lane
    assign new_valid[k] = pend[k];
    always_comb begin
      new_data[k]      = '0;
      new_data[k].v    = vert[k];
      new_data[k].qid  = beat_base + QID_W'(k);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend      <= '0;
      qbase     <= '0;
      beat_base <= '0;
      inflight  <= '0;
    end else begin
      pend <= pend & ~taken;
      if (q_take) begin
        pend      <= q_mask;
        beat_base <= qbase;
        qbase     <= qbase + QID_W'(N);
      end
      inflight <= inflight + (q_take ? 32'(nq) : 32'd0) - 32'(done_cnt);
    end
  end

  always_ff @(posedge clk) begin
    if (q_take) for (int k = 0; k < N; k++) vert[k] <= q_vertex[k];
  end
endmodule
