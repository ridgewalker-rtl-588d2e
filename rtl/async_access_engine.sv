// async_access_engine: non-blocking random-read engine shared by Row Access
// and Column Access.
//
// A request (address plus metadata, here the whole task) is accepted every
// cycle as long as a slot is free. The request side gets a sequence number
// seq; its metadata is written into slot seq of a circular metadata queue.
// Reads are numbered separately (f); read f goes out on the AXI read-address
// channel with ID = f mod NUM_IDS and the queue slot it belongs to is noted in
// slot_of[f mod OUTSTANDING]. The memory engine never waits for earlier reads
// to return: up to OUTSTANDING reads are in flight. AXI returns reads with
// the same ID in order, so a returning beat with ID i is read number
// {par[i], i} (mod OUTSTANDING), where par[i] counts the returns seen on ID
// i; its data is parked in the queue slot noted for it (reorder buffer). The response side pops the queue head as soon as its data
// has arrived and emits {metadata, data}. Output order therefore equals
// request order, whatever order memory answers in.
// A request with in_nofetch set takes a slot but issues no read (its slot is
// complete at once); terminated walks use this to stay in order without
// spending memory bandwidth. That bypass is this design's own.
//
// Interface: in_* valid/ready request, ar_* AXI read address (single-beat,
// 64-bit reads), r_* AXI read data (always accepted, a slot is reserved for
// every read), out_* valid/ready result. Timing: II = 1; a request reaches the
// AR register one cycle after acceptance; the result appears one cycle after
// its data (and all older data) has returned. OUTSTANDING must be a power of
// two multiple of NUM_IDS.
module async_access_engine #(
  parameter int OUTSTANDING = 128,
  parameter int NUM_IDS     = 64,
  parameter int META_W      = rw_pkg::TASK_W,
  parameter int ADDR_W      = 40,
  parameter int DATA_W      = 64
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // request proxy side
  input  logic                       in_valid,
  output logic                       in_ready,
  input  logic [META_W-1:0]          in_meta,
  input  logic [ADDR_W-1:0]          in_addr,
  input  logic                       in_nofetch,
  // memory bus
  output logic                       ar_valid,
  input  logic                       ar_ready,
  output logic [ADDR_W-1:0]          ar_addr,
  output logic [$clog2(NUM_IDS)-1:0] ar_id,
  input  logic                       r_valid,
  input  logic [$clog2(NUM_IDS)-1:0] r_id,
  input  logic [DATA_W-1:0]          r_data,
  // response proxy side
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic [META_W-1:0]          out_meta,
  output logic [DATA_W-1:0]          out_data
);
  localparam int SW  = $clog2(OUTSTANDING);
  localparam int IW  = $clog2(NUM_IDS);
  localparam int PW  = (SW > IW) ? SW - IW : 1;

  logic [META_W-1:0] meta_q [OUTSTANDING];   // metadata queue
  logic [DATA_W-1:0] data_q [OUTSTANDING];   // reorder buffer
  logic [OUTSTANDING-1:0] dvalid;
  logic [SW:0]       head, tail;
  logic [PW-1:0]     par [NUM_IDS];        // returns seen per ID
  logic [SW-1:0]     fseq;                 // reads issued (IDs count reads only)
  logic [SW-1:0]     slot_of [OUTSTANDING]; // queue slot of read {par, id}

  wire [SW-1:0] tslot = tail[SW-1:0];
  wire [SW-1:0] hslot = head[SW-1:0];
  wire slot_free = (tail - head) != (SW+1)'(OUTSTANDING);
  wire ar_free   = !ar_valid || ar_ready;

  assign in_ready = slot_free && (in_nofetch || ar_free);
  wire accept = in_valid && in_ready;
  wire issue  = accept && !in_nofetch;

  wire [SW-1:0] rkey  = (SW > IW) ? SW'({par[r_id], r_id}) : SW'(r_id);
  wire [SW-1:0] rslot = slot_of[rkey];

  wire out_free = !out_valid || out_ready;
  wire pop      = (head != tail) && dvalid[hslot] && out_free;

  // memory engine: AXI read address register
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ar_valid <= 1'b0;
      ar_addr  <= '0;
      ar_id    <= '0;
    end else if (issue) begin
      ar_valid <= 1'b1;
      ar_addr  <= in_addr;
      ar_id    <= fseq[IW-1:0];
    end else if (ar_ready) begin
      ar_valid <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (accept) meta_q[tslot] <= in_meta;
    if (issue)  slot_of[fseq] <= tslot;
    if (r_valid) data_q[rslot] <= r_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head   <= '0;
      tail   <= '0;
      fseq   <= '0;
      dvalid <= '0;
      for (int i = 0; i < NUM_IDS; i++) par[i] <= '0;
      out_valid <= 1'b0;
    end else begin
      if (issue) fseq <= fseq + 1'b1;
      if (accept) begin
        tail <= tail + 1'b1;
        dvalid[tslot] <= in_nofetch;
      end
      if (r_valid) begin
        dvalid[rslot] <= 1'b1;
        par[r_id]     <= par[r_id] + 1'b1;
      end
      if (pop) begin
        head <= head + 1'b1;
        dvalid[hslot] <= 1'b0;
        out_valid <= 1'b1;
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (pop) begin
      out_meta <= meta_q[hslot];
      out_data <= data_q[hslot];
    end
  end

  // A returning read must land in a slot that is still waiting for it.
  a_resp_slot: assert property (@(posedge clk) disable iff (!rst_n)
    r_valid |-> !dvalid[rslot]);
  a_ar_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (ar_valid && !ar_ready) |=> (ar_valid && $stable(ar_addr) && $stable(ar_id)));
endmodule
