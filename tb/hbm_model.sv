// hbm_model: behavioural model of one memory channel seen through a
// single-beat AXI read port (not synthesizable; testbench use only).
//
// Reads are accepted when the per-ID queue has room and a random ready gate
// (READY_PCT percent of cycles) is open. Each read gets a random latency in
// LAT_MIN..LAT_MAX cycles. Every cycle at most one read returns: the model
// scans the IDs from a random starting point and returns the oldest read of
// the first ID whose latency has elapsed. Reads with the same ID therefore
// return in order, reads with different IDs in any order, as AXI allows.
// The contents (64-bit words, word address = byte address / 8, modulo DEPTH)
// are loaded through the wr_* port before traffic starts.
// Counters: ooo counts responses that overtook an older read.
module hbm_model #(
  parameter int DEPTH     = 4096,
  parameter int LAT_MIN   = 8,
  parameter int LAT_MAX   = 40,
  parameter int READY_PCT = 80
) (
  input  logic        clk,
  input  logic        ar_valid,
  output logic        ar_ready,
  input  logic [39:0] ar_addr,
  input  logic [5:0]  ar_id,
  output logic        r_valid,
  output logic [5:0]  r_id,
  output logic [63:0] r_data,
  input  logic        wr_en,
  input  logic [31:0] wr_addr,
  input  logic [63:0] wr_data,
  output int          ooo,
  output int          reads
);
  localparam int QD = 4;
  logic [63:0] mem [DEPTH];
  logic [39:0] qa   [64][QD];
  longint      qdue [64][QD];
  longint      qseq [64][QD];
  int          qcnt [64];
  longint      cyc, seq, max_ret;
  logic        gate;

  initial begin
    for (int i = 0; i < 64; i++) qcnt[i] = 0;
    for (int i = 0; i < DEPTH; i++) mem[i] = '0;
    cyc = 0; seq = 0; max_ret = -1; ooo = 0; reads = 0;
    r_valid = 0; r_id = 0; r_data = 0; gate = 1;
  end

  assign ar_ready = gate && (qcnt[ar_id] < QD);

  always @(posedge clk) begin
    int id, start;
    bit found, take;
    take = ar_valid && ar_ready;
    cyc <= cyc + 1;
    if (wr_en) mem[wr_addr % DEPTH] <= wr_data;
    // return path
    found = 0;
    start = int'($urandom % 64);
    for (int k = 0; k < 64 && !found; k++) begin
      id = (start + k) % 64;
      if (qcnt[id] > 0 && qdue[id][0] <= cyc) found = 1;
    end
    if (found) begin
      r_valid <= 1'b1;
      r_id    <= 6'(id);
      r_data  <= mem[(qa[id][0] >> 3) % DEPTH];
      if (qseq[id][0] < max_ret) ooo <= ooo + 1;
      if (qseq[id][0] > max_ret) max_ret = qseq[id][0];
      for (int j = 0; j < QD - 1; j++) begin
        qa[id][j] = qa[id][j+1]; qdue[id][j] = qdue[id][j+1]; qseq[id][j] = qseq[id][j+1];
      end
      qcnt[id] = qcnt[id] - 1;
    end else begin
      r_valid <= 1'b0;
    end
    // request path (uses the ready value seen before this edge)
    if (take) begin
      qa[ar_id][qcnt[ar_id]]   = ar_addr;
      qdue[ar_id][qcnt[ar_id]] = cyc + LAT_MIN + longint'($urandom % (LAT_MAX - LAT_MIN + 1));
      qseq[ar_id][qcnt[ar_id]] = seq;
      qcnt[ar_id] = qcnt[ar_id] + 1;
      seq = seq + 1;
      reads <= reads + 1;
    end
    gate <= (int'($urandom % 100) < READY_PCT);
  end
endmodule
