// bfc_unit: Bloom-fetch-compute unit, the replicated worker of a query
// processing pipeline.
//
// Node IDs enter the Bloom filter (S2). A node already visited is dropped and
// reported on drop_valid/drop_grp, so the controller can count it as done;
// a new node goes to the vector fetch unit (S3), whose lines stream into the
// compute PE (S4); the scored node leaves on out_* towards the queues (S5).
// The three PEs are chained by FIFOs, as the paper describes for all PEs
// (FIFO depths are this design's choice). In the intra-query variant each
// unit serves the nodes of one memory channel; in the across-query variant a
// pipeline's single unit reads from all channels through the interconnect.
module bfc_unit
  import falcon_pkg::*;
#(
  parameter int unsigned N_CH          = 4,
  parameter int unsigned MAX_OUT       = 64,
  parameter int unsigned MAX_VEC_LINES = 4,
  parameter int unsigned BLOOM_BITS    = 262144,
  parameter int unsigned N_HASH        = 3
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  addr_t                      vec_base,
  input  logic [$clog2(MAX_VEC_LINES+1)-1:0] vec_lines,
  input  metric_e                    metric,
  input  line_t                      query [MAX_VEC_LINES],
  input  logic                       bloom_clear,
  output logic                       bloom_busy,
  // nodes to evaluate
  input  logic                       in_valid,
  output logic                       in_ready,
  input  item_t                      in_item,
  // memory read port
  output logic                       req_valid,
  input  logic                       req_ready,
  output logic [idx_w(N_CH)-1:0]     req_chan,
  output addr_t                      req_addr,
  output logic [$clog2(MAX_OUT)-1:0] req_slot,
  input  logic                       rsp_valid,
  input  logic [$clog2(MAX_OUT)-1:0] rsp_slot,
  input  line_t                      rsp_data,
  // results
  output logic                       drop_valid,
  output gid_t                       drop_grp,
  output logic                       out_valid,
  input  logic                       out_ready,
  output scored_t                    out_res,
  output logic                       busy       // holds work
);
  // S2: Bloom filter
  logic  bf_valid, bf_ready, bf_visited;
  node_t bf_id;
  gid_t  bf_grp;
  bloom_filter #(.BITS(BLOOM_BITS), .N_HASH(N_HASH), .META_W(GID_W)) u_bloom (
    .clk, .rst_n, .clear(bloom_clear), .busy(bloom_busy),
    .in_valid, .in_ready, .in_id(in_item.id), .in_meta(in_item.grp),
    .out_valid(bf_valid), .out_ready(bf_ready), .out_id(bf_id), .out_meta(bf_grp),
    .out_visited(bf_visited)
  );

  // new nodes into a FIFO towards the fetch unit; visited ones are dropped
  logic  nf_in_ready, nf_valid, nf_ready;
  item_t nf_item;
  assign bf_ready   = bf_visited ? 1'b1 : nf_in_ready;
  assign drop_valid = bf_valid && bf_visited;
  assign drop_grp   = bf_grp;

  sync_fifo #(.WIDTH($bits(item_t)), .DEPTH(8)) u_nf (
    .clk, .rst_n,
    .in_valid(bf_valid && !bf_visited), .in_ready(nf_in_ready), .in_data({bf_id, bf_grp}),
    .out_valid(nf_valid), .out_ready(nf_ready), .out_data(nf_item)
  );

  // S3: vector fetch
  logic  vl_valid, vl_ready, vl_last;
  line_t vl_data;
  item_t vl_item;
  vector_fetch #(.N_CH(N_CH), .MAX_OUT(MAX_OUT), .MAX_VEC_LINES(MAX_VEC_LINES)) u_fetch (
    .clk, .rst_n, .vec_base, .vec_lines,
    .in_valid(nf_valid), .in_ready(nf_ready), .in_item(nf_item),
    .req_valid, .req_ready, .req_chan, .req_addr, .req_slot,
    .rsp_valid, .rsp_slot, .rsp_data,
    .out_valid(vl_valid), .out_ready(vl_ready), .out_data(vl_data), .out_item(vl_item),
    .out_last(vl_last)
  );

  // S4: compute PE
  logic    dc_valid, dc_ready;
  scored_t dc_res;
  dist_compute #(.MAX_VEC_LINES(MAX_VEC_LINES)) u_comp (
    .clk, .rst_n, .metric, .query,
    .in_valid(vl_valid), .in_ready(vl_ready), .in_data(vl_data), .in_item(vl_item),
    .in_last(vl_last),
    .out_valid(dc_valid), .out_ready(dc_ready), .out_res(dc_res)
  );

  sync_fifo #(.WIDTH($bits(scored_t)), .DEPTH(8)) u_out (
    .clk, .rst_n,
    .in_valid(dc_valid), .in_ready(dc_ready), .in_data(dc_res),
    .out_valid, .out_ready, .out_data(out_res)
  );

  assign busy = bf_valid || nf_valid || vl_valid || dc_valid || out_valid;
endmodule
