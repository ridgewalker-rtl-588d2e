// task_balancer: N-to-N load balancer built as a butterfly of dispatchers and
// mergers.
//
// There are log2(N) stages. Stage s is a column of N task_dispatcher units
// followed by a column of N task_merger units. The dispatcher of row r sends
// its out_1 stream to the merger of its own row and its out_2 stream to the
// merger of row r xor 2^s, so every stage pairs rows that differ in bit s
// (stage 0 pairs rows 0/1 and 2/3, stage 1 pairs rows 0/2 and 1/3, ...).
// Each unit only compares two streams, so a slow output pulls at most half of
// the traffic of each upstream unit, and congestion is spread over all inputs
// stage by stage instead of being decided by a central arbiter.
// Tasks are not steered to a particular output: any task may leave on any
// output. Merger in_1 is the same-row dispatcher (a choice of this design).
//
// Interface: N valid/ready streams in and out. Timing: II = 1 on every row;
// latency 4*log2(N) cycles (two cycles per dispatcher and per merger) when
// nothing is full. N must be a power of two, at least 2.
module task_balancer #(
  parameter int N     = 16,
  parameter int WIDTH = rw_pkg::TASK_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid  [N],
  output logic             in_ready  [N],
  input  logic [WIDTH-1:0] in_data   [N],
  output logic             out_valid [N],
  input  logic             out_ready [N],
  output logic [WIDTH-1:0] out_data  [N]
);
  localparam int S = $clog2(N);

  logic             sv [S+1][N];
  logic             sr [S+1][N];
  logic [WIDTH-1:0] sd [S+1][N];
  // dispatcher outputs of each stage
  logic             d1v [S][N], d1r [S][N], d2v [S][N], d2r [S][N];
  logic [WIDTH-1:0] d1d [S][N], d2d [S][N];

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
      task_dispatcher #(.WIDTH(WIDTH)) u_d (
        .clk, .rst_n,
        .in_valid(sv[s][r]), .in_ready(sr[s][r]), .in_data(sd[s][r]),
        .out1_valid(d1v[s][r]), .out1_ready(d1r[s][r]), .out1_data(d1d[s][r]),
        .out2_valid(d2v[s][r]), .out2_ready(d2r[s][r]), .out2_data(d2d[s][r]));
      task_merger #(.WIDTH(WIDTH)) u_m (
        .clk, .rst_n,
        .in1_valid(d1v[s][r]), .in1_ready(d1r[s][r]), .in1_data(d1d[s][r]),
        .in2_valid(d2v[s][P]), .in2_ready(d2r[s][P]), .in2_data(d2d[s][P]),
        .out_valid(sv[s+1][r]), .out_ready(sr[s+1][r]), .out_data(sd[s+1][r]));
    end
  end
endmodule
