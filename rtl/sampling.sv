// sampling: uniform neighbour sampling for unweighted walks (URW, and PPR when
// cfg_ppr is set).
//
// Each accepted task draws a fresh 64-bit random word r from a per-instance
// xorshift64 generator. The neighbour index is floor(r[31:0] * deg / 2^32),
// which is uniform over 0..deg-1 up to a 2^-32 bias, and is added to the
// task's neighbour-list address. In PPR mode the walk stops here with
// probability alpha (r[63:32] < cfg_alpha, alpha given as a 32-bit fraction).
// A vertex of degree 0 is a dead end and also stops the walk. The task leaves
// with stop set; Column Access then ends the walk without a memory read.
// The xorshift generator stands in for the high-throughput generator the
// original hardware pairs with each sampler.
//
// Timing: two pipeline stages (multiply, then add), II = 1, valid/ready on
// both sides; a stalled output holds both stages.
module sampling #(
  parameter logic [63:0] SEED = 64'h9E37_79B9_7F4A_7C15
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               cfg_ppr,
  input  logic [31:0]        cfg_alpha,
  input  logic               in_valid,
  output logic               in_ready,
  input  rw_pkg::task_t      in_task,
  output logic               out_valid,
  input  logic               out_ready,
  output rw_pkg::task_t      out_task
);
  import rw_pkg::*;
  logic [63:0] rng;
  logic        s1_v;
  task_t       s1_t;
  logic [55:0] s1_prod;
  logic        s1_stop;

  wire s2_free = !out_valid || out_ready;
  wire s1_free = !s1_v || s2_free;
  assign in_ready = s1_free;
  wire take = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rng       <= SEED;
      s1_v      <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      if (take) rng <= xorshift64(rng);
      if (s1_free) s1_v <= take;
      if (s2_free) out_valid <= s1_v;
    end
  end

  always_ff @(posedge clk) begin
    if (take) begin
      s1_t    <= in_task;
      s1_prod <= rng[31:0] * in_task.deg;
      s1_stop <= (in_task.deg == '0) || (cfg_ppr && (rng[63:32] < cfg_alpha));
    end
    if (s2_free && s1_v) begin
      out_task         <= s1_t;
      out_task.cl_addr <= s1_t.cl_addr + {8'd0, s1_prod[55:32]};
      out_task.stop    <= s1_stop;
    end
  end
endmodule
