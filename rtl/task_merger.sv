// task_merger: two task streams in, one out (the "M" unit of the scheduler).
//
// Default policy (PRIO_IN1 = 0) is the balanced-merge algorithm: a three-bit
// code scode = {in_2 empty, in_1 empty, last_selection} selects the input.
//   0b111, 0b110               -> nothing to do
//   0b101, 0b100, 0b001        -> take in_1
//   all other codes            -> take in_2
// so a lone valid input is always forwarded and two valid inputs alternate on
// the not-last-served one, which bounds the wait of either stream.
// With PRIO_IN1 = 1 the unit instead always prefers in_1 when it holds data;
// the scheduler uses that to let unfinished walks overtake new queries.
//
// Hardware: the chosen head is read into a holding register, which drains into
// a 2-entry output FIFO (blocking write). II is one cycle; a task presented in
// cycle t is at the output in cycle t+2 when the output is not full.
module task_merger #(
  parameter int WIDTH     = rw_pkg::TASK_W,
  parameter int OUT_DEPTH = 2,
  parameter bit PRIO_IN1  = 1'b0
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in1_valid,
  output logic             in1_ready,
  input  logic [WIDTH-1:0] in1_data,
  input  logic             in2_valid,
  output logic             in2_ready,
  input  logic [WIDTH-1:0] in2_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data
);
  logic             a_valid;
  logic [WIDTH-1:0] a_data;
  logic             last_sel;
  logic             f_ready;
  logic [2:0]       scode;
  logic             pick;      // 0: in_1, 1: in_2
  logic             any;

  assign scode = {!in2_valid, !in1_valid, last_sel};
  assign any   = in1_valid || in2_valid;

  always_comb begin
    if (PRIO_IN1) begin
      pick = !in1_valid;
    end else begin
      unique case (scode)
        3'b101, 3'b100, 3'b001: pick = 1'b0;
        default:                pick = 1'b1;
      endcase
    end
  end

  wire a_go     = a_valid && f_ready;
  wire can_load = !a_valid || a_go;
  assign in1_ready = can_load && any && !pick;
  assign in2_ready = can_load && any && pick;
  wire load = can_load && any;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_valid  <= 1'b0;
      last_sel <= 1'b0;
    end else if (load) begin
      a_valid  <= 1'b1;
      last_sel <= pick;
    end else if (a_go) begin
      a_valid  <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (load) a_data <= pick ? in2_data : in1_data;
  end

  stream_fifo #(.WIDTH(WIDTH), .DEPTH(OUT_DEPTH)) u_f (
    .clk, .rst_n,
    .in_valid(a_valid), .in_ready(f_ready), .in_data(a_data),
    .out_valid, .out_ready, .out_data);
endmodule
