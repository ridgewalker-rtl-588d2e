// rw_pkg: types and constants shared by the random-walk accelerator.
//
// A walk query is cut into stateless per-hop tasks. One task_t is the whole
// context a hop needs (current vertex, query id, hop count, and the row data
// filled in on the way), so any pipeline can execute any hop. It fits in one
// stream word, far below the 512-bit bound of a single-cycle transfer.
// Field widths are this design's choice: 32-bit vertex ids, 22-bit query ids
// and an 8-bit hop counter (walk length 80 by default).
//
// rp_entry_t is the 64-bit row-pointer word: the channel that holds the
// vertex's neighbour list, the degree and the word address of the list in
// that channel. rec_t is the 64-bit path record written back per hop.
package rw_pkg;

  localparam int VID_W  = 32;
  localparam int QID_W  = 22;
  localparam int STEP_W = 8;
  localparam int CHAN_W = 8;
  localparam int CLA_W  = 32;
  localparam int DEG_W  = 24;

  typedef struct packed {
    logic [VID_W-1:0]  v;        // current (last visited) vertex
    logic [QID_W-1:0]  qid;      // query index
    logic [STEP_W-1:0] step;     // hops done so far
    logic [CHAN_W-1:0] chan;     // column channel of the neighbour list
    logic [CLA_W-1:0]  cl_addr;  // list start, then sampled entry address
    logic [DEG_W-1:0]  deg;      // out-degree of v
    logic              stop;     // walk ends here (dead end or PPR stop)
    logic              hop;      // this task moved to a new vertex
    logic              done;     // walk finished
  } task_t;

  localparam int TASK_W = $bits(task_t);

  typedef struct packed {
    logic [CHAN_W-1:0] chan;
    logic [DEG_W-1:0]  deg;
    logic [CLA_W-1:0]  addr;
  } rp_entry_t;

  typedef struct packed {
    logic [VID_W-1:0]  vertex;
    logic [QID_W-1:0]  qid;
    logic [STEP_W-1:0] step;
    logic              hop;
    logic              done;
  } rec_t;

  localparam int REC_W = $bits(rec_t);

  // One step of a 64-bit xorshift generator (shifts 13, 7, 17).
  function automatic logic [63:0] xorshift64(input logic [63:0] s);
    logic [63:0] x;
    x = s;
    x = x ^ (x << 13);
    x = x ^ (x >> 7);
    x = x ^ (x << 17);
    return x;
  endfunction

endpackage
