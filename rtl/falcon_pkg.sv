// falcon_pkg: widths, types and memory-layout constants shared by the
// graph-vector-search accelerator.
//
// The memory data path is 64 bytes wide, as in the paper. Everything else in
// this package is a choice of this implementation:
//  * node IDs are 32 bits, vector elements are 16-bit signed integers and a
//    distance is a 48-bit unsigned number (smaller is closer);
//  * a node's adjacency record is one 32-bit degree word followed by up to
//    MAX_DEG 32-bit neighbour IDs, padded to whole 64-byte lines;
//  * nodes are spread over the channels round-robin by ID (paper): node n
//    lives in channel n % N_CH at local index n / N_CH.
// All modules use one clock and a synchronous, active-low reset rst_n.
package falcon_pkg;

  localparam int unsigned LINE_W   = 512;             // 64-byte memory word
  localparam int unsigned NODE_W   = 32;
  localparam int unsigned DIST_W   = 48;
  localparam int unsigned ELEM_W   = 16;
  localparam int unsigned ELEMS_PER_LINE = LINE_W / ELEM_W;   // 32
  localparam int unsigned WORDS_PER_LINE = LINE_W / NODE_W;   // 16
  localparam int unsigned ADDR_W   = 32;              // line address in a channel
  localparam int unsigned GID_W    = 4;               // candidate-group slot
  localparam int unsigned TAG_W    = 16;              // read tag on a channel
  localparam int unsigned CNT_W    = 16;              // per-group item counters

  typedef logic [NODE_W-1:0] node_t;
  typedef logic [DIST_W-1:0] dist_t;
  typedef logic [LINE_W-1:0] line_t;
  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [GID_W-1:0]  gid_t;

  // distance metric selected at run time
  typedef enum logic [0:0] {
    METRIC_L2 = 1'b0,   // squared Euclidean distance
    METRIC_IP = 1'b1    // inner product, reported as IP_BIAS - <q,x>
  } metric_e;

  localparam dist_t IP_BIAS = dist_t'(1) << (DIST_W - 1);

  // one entry of a priority queue; an invalid entry sorts after every valid one
  typedef struct packed {
    logic  valid;
    dist_t score;
    node_t id;
  } pq_entry_t;

  // a node to be checked, fetched and scored, tagged with its candidate group
  typedef struct packed {
    node_t id;
    gid_t  grp;
  } item_t;

  // a scored node on its way to the queues
  typedef struct packed {
    node_t id;
    dist_t score;
    gid_t  grp;
  } scored_t;

  // one beat of the result stream
  typedef struct packed {
    logic [15:0] qid;
    logic [7:0]  rank;
    node_t       id;
    dist_t       score;
  } result_t;

  // width of an index into n things, at least one bit
  function automatic int unsigned idx_w(int unsigned n);
    return (n > 1) ? $clog2(n) : 1;
  endfunction

  // number of 64-byte lines holding one adjacency record
  function automatic int unsigned adj_lines(int unsigned max_deg);
    return ((max_deg + 1) * NODE_W + LINE_W - 1) / LINE_W;
  endfunction

endpackage
