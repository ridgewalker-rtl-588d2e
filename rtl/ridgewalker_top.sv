// ridgewalker_top: graph random-walk accelerator with N asynchronous
// pipelines and a zero-bubble scheduler.
//
// A walk query is split into stateless per-hop tasks (rw_pkg::task_t). Tasks
// circulate in a closed loop:
//   query_loader -> zero_bubble_scheduler -> row_access[i] -> task_router
//   -> sampling[j] -> column_access[j] -> query_writer[j] -> scheduler ...
// Row Access i reads the row-pointer entry of the task's vertex from memory
// channel RA[i]; the router then moves the task to pipeline j, the one whose
// column channel CA[j] holds that vertex's neighbour list; Sampling j picks a
// neighbour; Column Access j reads it and decides termination; the writer
// records the hop and hands an unfinished walk back to the scheduler, which
// may send its next hop to any pipeline. Nothing in a pipeline waits for a
// particular walk: memory latency of one walk is covered by hops of others.
// Every link is a valid/ready stream through a LINK_DEPTH-entry FIFO.
//
// Ports: host query beats (q_*), 2N memory read channels (ra_* for row
// pointers, ca_* for column lists; single-beat 64-bit AXI reads with 6-bit
// IDs), N path write-back ports (wr_*), and the AXI4-Lite control slave.
// The memory channels, the host link and the DMA engines behind wr_* are
// outside this design. N = 16 pipelines on 32 channels is the main
// configuration; the link FIFO depth of 32 is one LUT-RAM FIFO.
// The loader's in-flight limit (MAX_INFLIGHT) equals the depth of each return
// FIFO in the writer, so a hop reaching the writer can always be parked and
// the closed loop cannot lock; that limit, the record write-back format and
// the register map are this design's choices. The low 3 and top 5 bits of
// every 40-bit read address are constant (8-byte words, 32-bit word
// addresses at base 0).
module ridgewalker_top #(
  parameter int N            = 16,
  parameter int LINK_DEPTH   = 32,
  parameter int MAX_INFLIGHT = 4096,
  parameter int WRITE_GRAN   = 8
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // host query stream
  input  logic                        q_valid,
  output logic                        q_ready,
  input  logic [N-1:0]                q_mask,
  input  logic [31:0]                 q_vertex [N],
  // row-pointer channels
  output logic                        ra_ar_valid [N],
  input  logic                        ra_ar_ready [N],
  output logic [39:0]                 ra_ar_addr  [N],
  output logic [5:0]                  ra_ar_id    [N],
  input  logic                        ra_r_valid  [N],
  input  logic [5:0]                  ra_r_id     [N],
  input  logic [63:0]                 ra_r_data   [N],
  // column-list channels
  output logic                        ca_ar_valid [N],
  input  logic                        ca_ar_ready [N],
  output logic [39:0]                 ca_ar_addr  [N],
  output logic [5:0]                  ca_ar_id    [N],
  input  logic                        ca_r_valid  [N],
  input  logic [5:0]                  ca_r_id     [N],
  input  logic [63:0]                 ca_r_data   [N],
  // path write-back
  output logic                        wr_valid [N],
  input  logic                        wr_ready [N],
  output logic [WRITE_GRAN*64-1:0]    wr_data  [N],
  output logic [$clog2(WRITE_GRAN):0] wr_count [N],
  // AXI4-Lite control
  input  logic                        s_awvalid,
  output logic                        s_awready,
  input  logic [7:0]                  s_awaddr,
  input  logic                        s_wvalid,
  output logic                        s_wready,
  input  logic [31:0]                 s_wdata,
  output logic                        s_bvalid,
  input  logic                        s_bready,
  input  logic                        s_arvalid,
  output logic                        s_arready,
  input  logic [7:0]                  s_araddr,
  output logic                        s_rvalid,
  input  logic                        s_rready,
  output logic [31:0]                 s_rdata,
  output logic [31:0]                 inflight
);
  import rw_pkg::*;

  logic        cfg_ppr;
  logic [31:0] cfg_alpha;
  logic [7:0]  cfg_max_len;
  logic [31:0] completed;
  logic [$clog2(N):0] done_cnt;

  logic  new_v [N], new_r [N];  task_t new_d [N];
  logic  ret_v [N], ret_r [N];  task_t ret_d [N];
  logic  pip_v [N], pip_r [N];  task_t pip_d [N];
  logic  ra_v  [N], ra_r  [N];  task_t ra_d  [N];   // RA out
  logic  rtin_v[N], rtin_r[N];  task_t rtin_d[N];   // router in
  logic  rto_v [N], rto_r [N];  task_t rto_d [N];   // router out
  logic  spin_v[N], spin_r[N];  task_t spin_d[N];   // sampler in
  logic  sp_v  [N], sp_r  [N];  task_t sp_d  [N];   // sampler out
  logic  cain_v[N], cain_r[N];  task_t cain_d[N];   // CA in
  logic  ca_v  [N], ca_r  [N];  task_t ca_d  [N];   // CA out

  ctrl_regs u_ctrl (
    .clk, .rst_n,
    .s_awvalid, .s_awready, .s_awaddr, .s_wvalid, .s_wready, .s_wdata,
    .s_bvalid, .s_bready, .s_arvalid, .s_arready, .s_araddr,
    .s_rvalid, .s_rready, .s_rdata,
    .completed, .cfg_ppr, .cfg_alpha, .cfg_max_len);

  query_loader #(.N(N), .MAX_INFLIGHT(MAX_INFLIGHT)) u_loader (
    .clk, .rst_n, .q_valid, .q_ready, .q_mask, .q_vertex, .done_cnt,
    .new_valid(new_v), .new_ready(new_r), .new_data(new_d), .inflight);

  zero_bubble_scheduler #(.N(N)) u_sched (
    .clk, .rst_n,
    .new_valid(new_v), .new_ready(new_r), .new_data(new_d),
    .ret_valid(ret_v), .ret_ready(ret_r), .ret_data(ret_d),
    .pipe_valid(pip_v), .pipe_ready(pip_r), .pipe_data(pip_d));

  for (genvar i = 0; i < N; i++) begin : g_pipe
    row_access u_ra (
      .clk, .rst_n,
      .in_valid(pip_v[i]), .in_ready(pip_r[i]), .in_task(pip_d[i]),
      .ar_valid(ra_ar_valid[i]), .ar_ready(ra_ar_ready[i]), .ar_addr(ra_ar_addr[i]), .ar_id(ra_ar_id[i]),
      .r_valid(ra_r_valid[i]), .r_id(ra_r_id[i]), .r_data(ra_r_data[i]),
      .out_valid(ra_v[i]), .out_ready(ra_r[i]), .out_task(ra_d[i]));

    stream_fifo #(.WIDTH(TASK_W), .DEPTH(LINK_DEPTH)) u_l_ra (
      .clk, .rst_n, .in_valid(ra_v[i]), .in_ready(ra_r[i]), .in_data(ra_d[i]),
      .out_valid(rtin_v[i]), .out_ready(rtin_r[i]), .out_data(rtin_d[i]));

    stream_fifo #(.WIDTH(TASK_W), .DEPTH(LINK_DEPTH)) u_l_rt (
      .clk, .rst_n, .in_valid(rto_v[i]), .in_ready(rto_r[i]), .in_data(rto_d[i]),
      .out_valid(spin_v[i]), .out_ready(spin_r[i]), .out_data(spin_d[i]));

    sampling #(.SEED(64'h9E37_79B9_7F4A_7C15 ^ (64'(i) << 32) ^ 64'(i + 1))) u_sp (
      .clk, .rst_n, .cfg_ppr, .cfg_alpha,
      .in_valid(spin_v[i]), .in_ready(spin_r[i]), .in_task(spin_d[i]),
      .out_valid(sp_v[i]), .out_ready(sp_r[i]), .out_task(sp_d[i]));

    stream_fifo #(.WIDTH(TASK_W), .DEPTH(LINK_DEPTH)) u_l_sp (
      .clk, .rst_n, .in_valid(sp_v[i]), .in_ready(sp_r[i]), .in_data(sp_d[i]),
      .out_valid(cain_v[i]), .out_ready(cain_r[i]), .out_data(cain_d[i]));

    column_access u_ca (
      .clk, .rst_n, .cfg_max_len,
      .in_valid(cain_v[i]), .in_ready(cain_r[i]), .in_task(cain_d[i]),
      .ar_valid(ca_ar_valid[i]), .ar_ready(ca_ar_ready[i]), .ar_addr(ca_ar_addr[i]), .ar_id(ca_ar_id[i]),
      .r_valid(ca_r_valid[i]), .r_id(ca_r_id[i]), .r_data(ca_r_data[i]),
      .out_valid(ca_v[i]), .out_ready(ca_r[i]), .out_task(ca_d[i]));
  end

  task_router #(.N(N)) u_router (
    .clk, .rst_n,
    .in_valid(rtin_v), .in_ready(rtin_r), .in_data(rtin_d),
    .out_valid(rto_v), .out_ready(rto_r), .out_data(rto_d));

  query_writer #(.N(N), .WRITE_GRAN(WRITE_GRAN), .RET_DEPTH(MAX_INFLIGHT)) u_writer (
    .clk, .rst_n,
    .in_valid(ca_v), .in_ready(ca_r), .in_task(ca_d),
    .ret_valid(ret_v), .ret_ready(ret_r), .ret_data(ret_d),
    .wr_valid, .wr_ready, .wr_data, .wr_count,
    .done_cnt, .completed);
endmodule
