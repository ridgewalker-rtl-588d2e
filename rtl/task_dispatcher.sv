// task_dispatcher: one task stream in, two task streams out, balanced under
// back-pressure (the "D" unit of the scheduler's butterfly balancer).
//
// The policy is the balanced-dispatch algorithm: a three-bit code
// scode = {out_2 full, out_1 full, last_selection} selects the output.
//   0b001, 0b111, 0b101, 0b100 -> out_1 ; all other codes -> out_2
// so with both outputs free or both full the not-last-served output is taken
// (alternation, and fairness while blocked), and with one output full the
// other one is taken. last_selection records the chosen output.
//
// Hardware: the task is read into a holding register and the choice is made
// at that moment from the full flags of the two 2-entry output FIFOs; the
// register then waits (blocking write) until the chosen FIFO has room. A new
// task can be read in the same cycle the held one leaves, so the initiation
// interval is one cycle, and a task presented in cycle t appears on an output
// in cycle t+2 when nothing is full. The output FIFO depth and the moment the
// full flags are sampled are this design's choices.
module task_dispatcher #(
  parameter int WIDTH     = rw_pkg::TASK_W,
  parameter int OUT_DEPTH = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out1_valid,
  input  logic             out1_ready,
  output logic [WIDTH-1:0] out1_data,
  output logic             out2_valid,
  input  logic             out2_ready,
  output logic [WIDTH-1:0] out2_data
);
  logic             a_valid;
  logic [WIDTH-1:0] a_data;
  logic             a_tgt;      // 0: out_1, 1: out_2
  logic             last_sel;
  logic             f1_ready, f2_ready;
  logic [2:0]       scode;
  logic             pick;

  assign scode = {!f2_ready, !f1_ready, last_sel};

  always_comb begin
    unique case (scode)
      3'b001, 3'b111, 3'b101, 3'b100: pick = 1'b0;
      default:                        pick = 1'b1;
    endcase
  end

  wire a_go = a_valid && (a_tgt ? f2_ready : f1_ready);
  assign in_ready = !a_valid || a_go;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_valid  <= 1'b0;
      a_tgt    <= 1'b0;
      last_sel <= 1'b0;
    end else if (in_valid && in_ready) begin
      a_valid  <= 1'b1;
      a_tgt    <= pick;
      last_sel <= pick;
    end else if (a_go) begin
      a_valid  <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) a_data <= in_data;
  end

  stream_fifo #(.WIDTH(WIDTH), .DEPTH(OUT_DEPTH)) u_f1 (
    .clk, .rst_n,
    .in_valid(a_valid && !a_tgt), .in_ready(f1_ready), .in_data(a_data),
    .out_valid(out1_valid), .out_ready(out1_ready), .out_data(out1_data));

  stream_fifo #(.WIDTH(WIDTH), .DEPTH(OUT_DEPTH)) u_f2 (
    .clk, .rst_n,
    .in_valid(a_valid && a_tgt), .in_ready(f2_ready), .in_data(a_data),
    .out_valid(out2_valid), .out_ready(out2_ready), .out_data(out2_data));
endmodule
