// query_writer: collects the path of every walk and returns unfinished walks
// to the scheduler.
//
// One lane per pipeline. Every task leaving Column Access produces one 64-bit
// path record {vertex, query id, step, hop, done}; the lane packs WRITE_GRAN
// records into one write beat (8 x 64 = 512 bits by default) and emits it on
// its own write port, so write-back never throttles the pipelines. A partly
// filled beat is sent after FLUSH_CYCLES cycles without new records. The host
// rebuilds each path from the query id and step of the records with hop set;
// the record with done set closes the walk. Tasks that are not done are
// forwarded, in the same cycle as their record, into a RET_DEPTH-entry return
// FIFO that feeds the scheduler's merger. A task is taken only when both its
// record and (if not done) its return entry can be accepted.
// done_cnt counts walks finished this cycle (credits for the query loader) and
// completed counts all finished walks since reset.
// Beat packing, the flush timer and the return FIFO depth (at least the
// loader's in-flight limit, so the closed loop never fills) are this design's.
module query_writer #(
  parameter int N            = 16,
  parameter int WRITE_GRAN   = 8,
  parameter int RET_DEPTH    = 4096,
  parameter int FLUSH_CYCLES = 16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid  [N],
  output logic                          in_ready  [N],
  input  rw_pkg::task_t                 in_task   [N],
  output logic                          ret_valid [N],
  input  logic                          ret_ready [N],
  output rw_pkg::task_t                 ret_data  [N],
  output logic                          wr_valid  [N],
  input  logic                          wr_ready  [N],
  output logic [WRITE_GRAN*64-1:0]      wr_data   [N],
  output logic [$clog2(WRITE_GRAN):0]   wr_count  [N],
  output logic [$clog2(N):0]            done_cnt,
  output logic [31:0]                   completed
);
  import rw_pkg::*;
  localparam int CW = $clog2(WRITE_GRAN);
  localparam int TW = $clog2(FLUSH_CYCLES + 1);

  logic [N-1:0] fin;   // a finished walk was recorded this cycle

  for (genvar i = 0; i < N; i++) begin : g_lane
    rec_t             buf_q [WRITE_GRAN];
    logic [CW:0]      cnt;
    logic [TW-1:0]    idle;
    logic             rf_ready;
    logic [TASK_W-1:0] ret_w;
    rec_t             rec;

    assign rec = '{vertex: in_task[i].v, qid: in_task[i].qid, step: in_task[i].step,
                   hop: in_task[i].hop, done: in_task[i].done};

    wire out_free = !wr_valid[i] || wr_ready[i];
    wire full_now = (cnt == (CW+1)'(WRITE_GRAN));
    wire flush    = (cnt != '0) && (idle >= TW'(FLUSH_CYCLES));
    wire xfer     = (full_now || flush) && out_free;
    wire pk_ready = !full_now || xfer;

    assign in_ready[i] = pk_ready && (in_task[i].done || rf_ready);
    wire acc = in_valid[i] && in_ready[i];
    assign fin[i] = acc && in_task[i].done;

    stream_fifo #(.WIDTH(TASK_W), .DEPTH(RET_DEPTH)) u_ret (
      .clk, .rst_n,
      .in_valid(acc && !in_task[i].done), .in_ready(rf_ready),
      .in_data(in_task[i]),
      .out_valid(ret_valid[i]), .out_ready(ret_ready[i]), .out_data(ret_w));
    assign ret_data[i] = task_t'(ret_w);

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        cnt         <= '0;
        idle        <= '0;
        wr_valid[i] <= 1'b0;
        wr_count[i] <= '0;
      end else begin
        if (xfer) begin
          wr_valid[i] <= 1'b1;
          wr_count[i] <= cnt;
        end else if (wr_ready[i]) begin
          wr_valid[i] <= 1'b0;
        end
        if (acc) cnt <= (xfer ? (CW+1)'(0) : cnt) + 1'b1;
        else if (xfer) cnt <= '0;
        if (acc) idle <= '0;
        else if (idle < TW'(FLUSH_CYCLES)) idle <= idle + 1'b1;
      end
    end

    always_ff @(posedge clk) begin
      if (xfer) begin
        for (int k = 0; k < WRITE_GRAN; k++)
          wr_data[i][k*64 +: 64] <= (k < int'(cnt)) ? 64'(buf_q[k]) : 64'd0;
      end
      if (acc) buf_q[xfer ? 0 : CW'(cnt)] <= rec;
    end
  end

  always_comb begin
    done_cnt = '0;
    for (int i = 0; i < N; i++) done_cnt = done_cnt + ($clog2(N)+1)'(fin[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) completed <= '0;
    else        completed <= completed + 32'(done_cnt);
  end
endmodule
