// task_router: N-to-N butterfly that delivers each task to the pipeline whose
// column-list channel holds the neighbour list of the task's vertex.
//
// Same topology as the balancer (log2(N) stages pairing rows r and r xor 2^s),
// but the first unit of each switch is a demultiplexer rather than a
// dispatcher: at stage s a task stays in its row if bit s of its destination
// equals bit s of the row number and crosses to the partner row otherwise.
// After the last stage the row number equals the destination. Each demux
// output goes through its own SPLIT_DEPTH-entry FIFO, so a task waiting to
// cross does not hold up the tasks behind it that stay (and the reverse).
// The second unit of each switch is a task_merger (balanced merge,
// alternating when both inputs want the same row), which also provides a
// 2-entry buffer per switch output. The destination is the low log2(N) bits of the task's channel
// field, written there by Row Access from the row-pointer entry.
//
// Timing: II = 1 per row; a task needs 3 cycles per stage when unblocked
// (split FIFO 1, merger 2), 3*log2(N) in all. The paper names the butterfly
// but not its buffering: the split FIFOs are this design's. With uniformly
// random destinations they raised the end-to-end rate at N = 16 from 0.40 to
// 0.46 hops per cycle per pipeline against the testbench memory model.
module task_router #(
  parameter int N           = 16,
  parameter int SPLIT_DEPTH = 4
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid  [N],
  output logic                  in_ready  [N],
  input  rw_pkg::task_t         in_data   [N],
  output logic                  out_valid [N],
  input  logic                  out_ready [N],
  output rw_pkg::task_t         out_data  [N]
);
  import rw_pkg::*;
  localparam int S = $clog2(N);

  logic  sv [S+1][N];
  logic  sr [S+1][N];
  task_t sd [S+1][N];
  logic  stay_r [S][N];   // ready of the merger input fed from the own row
  logic  cross_r [S][N];  // ready of the partner merger input fed from this row
  logic  go_cross [S][N];
  logic  st_v [S][N], st_r [S][N];   // own-row split FIFO output
  logic  cr_v [S][N], cr_r [S][N];   // crossing split FIFO output
  logic [TASK_W-1:0] st_d [S][N], cr_d [S][N];

  for (genvar r = 0; r < N; r++) begin : g_io
    assign sv[0][r]     = in_valid[r];
    assign sd[0][r]     = in_data[r];
    assign in_ready[r]  = sr[0][r];
    assign out_valid[r] = sv[S][r];
    assign out_data[r]  = sd[S][r];
    assign sr[S][r]     = out_ready[r];
  end

  for (genvar s = 0; s < S; s++) begin : g_stage
    for (genvar r = 0; r < N; r++) begin : g_row
      localparam int P = r ^ (1 << s);
      localparam bit RB = 1'((r >> s) & 1);
      assign go_cross[s][r] = (sd[s][r].chan[s] != RB);
      assign sr[s][r] = go_cross[s][r] ? cross_r[s][r] : stay_r[s][r];
      stream_fifo #(.WIDTH(TASK_W), .DEPTH(SPLIT_DEPTH)) u_stay (
        .clk, .rst_n,
        .in_valid(sv[s][r] && !go_cross[s][r]), .in_ready(stay_r[s][r]), .in_data(sd[s][r]),
        .out_valid(st_v[s][r]), .out_ready(st_r[s][r]), .out_data(st_d[s][r]));
      stream_fifo #(.WIDTH(TASK_W), .DEPTH(SPLIT_DEPTH)) u_cross (
        .clk, .rst_n,
        .in_valid(sv[s][r] && go_cross[s][r]), .in_ready(cross_r[s][r]), .in_data(sd[s][r]),
        .out_valid(cr_v[s][r]), .out_ready(cr_r[s][r]), .out_data(cr_d[s][r]));
      task_merger #(.WIDTH(TASK_W)) u_m (
        .clk, .rst_n,
        .in1_valid(st_v[s][r]), .in1_ready(st_r[s][r]), .in1_data(st_d[s][r]),
        .in2_valid(cr_v[s][P]), .in2_ready(cr_r[s][P]), .in2_data(cr_d[s][P]),
        .out_valid(sv[s+1][r]), .out_ready(sr[s+1][r]), .out_data(sd[s+1][r]));
    end
  end
endmodule
