// falcon_top: graph-vector-search accelerator with N_QPP query processing
// pipelines of N_BFC Bloom-fetch-compute units each, sharing N_CH memory
// channels.
//
// Two variants of the paper are two parameter sets of this module:
//  * intra-query parallelism (default): N_QPP = 1, N_BFC = N_CH = 4. One
//    query at a time uses every BFC unit and every channel;
//  * across-query parallelism: N_QPP = 4, N_BFC = 1. Four queries run at
//    once, each pipeline reading all channels.
// Queries enter on q_* (the lines of a query vector; in the paper they come
// from a TCP/IP stack, which is outside this module) and are routed to a free
// pipeline; results (k beats per query) leave on res_*. The search settings
// (entry node, mg, mc, k, metric, vector length and the base addresses of the
// adjacency and vector regions in every channel) are static inputs.
// Each channel port ch_* is a tagged line-read port to a DDR controller
// (outside); responses may be delayed by any amount and carry the tag back.
// Only the low {requester, slot} bits of ch_req_tag are used; the bits above
// them stay zero (tags are TAG_W wide so that any controller tag fits).
module falcon_top
  import falcon_pkg::*;
#(
  parameter int unsigned N_QPP         = 1,
  parameter int unsigned N_BFC         = 4,
  parameter int unsigned N_CH          = 4,
  parameter int unsigned MAX_DEG       = 64,
  parameter int unsigned MAX_VEC_LINES = 4,
  parameter int unsigned CQ_SIZE       = 64,
  parameter int unsigned RQ_SIZE       = 64,
  parameter int unsigned MG_MAX        = 10,
  parameter int unsigned MC_MAX        = 10,
  parameter int unsigned MAX_OUT       = 64,
  parameter int unsigned BLOOM_BITS    = 262144,
  parameter int unsigned N_HASH        = 3,
  localparam int unsigned VLW          = $clog2(MAX_VEC_LINES + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration
  input  node_t             entry,
  input  logic [3:0]        mg,
  input  logic [3:0]        mc,
  input  logic [7:0]        k,
  input  metric_e           metric,
  input  logic [VLW-1:0]    vec_lines,
  input  addr_t             adj_base,
  input  addr_t             vec_base,
  // queries
  input  logic              q_valid,
  output logic              q_ready,
  input  logic [15:0]       q_qid,
  input  line_t             q_data,
  input  logic              q_last,
  // results
  output logic              res_valid,
  input  logic              res_ready,
  output result_t           res,
  output logic              res_last,
  // DDR channels
  output logic [N_CH-1:0]   ch_req_valid,
  input  logic [N_CH-1:0]   ch_req_ready,
  output addr_t             ch_req_addr [N_CH],
  output logic [TAG_W-1:0]  ch_req_tag  [N_CH],
  input  logic [N_CH-1:0]   ch_rsp_valid,
  output logic [N_CH-1:0]   ch_rsp_ready,
  input  logic [TAG_W-1:0]  ch_rsp_tag  [N_CH],
  input  line_t             ch_rsp_data [N_CH],
  // status
  output logic [N_QPP-1:0]  qpp_idle,
  output logic [31:0]       st_groups  [N_QPP],
  output logic [31:0]       st_syncs   [N_QPP],
  output logic [31:0]       st_inserts [N_QPP],
  output logic [31:0]       st_drops   [N_QPP],
  output logic [31:0]       st_hold    [N_QPP],
  output logic [31:0]       st_overlap [N_QPP]
);
  localparam int unsigned RPQ  = N_BFC + 1;            // requesters per pipeline
  localparam int unsigned NREQ = N_QPP * RPQ;
  localparam int unsigned SW   = $clog2(MAX_OUT);
  localparam int unsigned CHW  = idx_w(N_CH);

  // ---------------- query routing
  logic [N_QPP-1:0] qp_ready, qp_valid;
  logic [15:0]      qr_qid;
  line_t            qr_data;
  logic             qr_last;
  query_router #(.N_QPP(N_QPP)) u_router (
    .clk, .rst_n, .in_valid(q_valid), .in_ready(q_ready), .in_qid(q_qid),
    .in_data(q_data), .in_last(q_last), .qpp_ready(qp_ready),
    .out_valid(qp_valid), .out_qid(qr_qid), .out_data(qr_data), .out_last(qr_last)
  );

  // ---------------- pipelines
  logic [NREQ-1:0] req_valid, req_ready, rsp_valid;
  logic [CHW-1:0]  req_chan [NREQ];
  addr_t           req_addr [NREQ];
  logic [SW-1:0]   req_slot [NREQ];
  logic [SW-1:0]   rsp_slot [NREQ];
  line_t           rsp_data [NREQ];

  logic [N_QPP-1:0] pr_valid, pr_ready, pr_last;
  result_t          pr_res [N_QPP];

  for (genvar p = 0; p < N_QPP; p++) begin : g_qpp
    logic [RPQ-1:0] rv, rr, sv;
    logic [CHW-1:0] rc [RPQ];
    addr_t          ra [RPQ];
    logic [SW-1:0]  rs [RPQ];
    logic [SW-1:0]  ss [RPQ];
    line_t          sd [RPQ];
    for (genvar i = 0; i < RPQ; i++) begin : g_map
      assign req_valid[p*RPQ+i] = rv[i];
      assign req_chan[p*RPQ+i]  = rc[i];
      assign req_addr[p*RPQ+i]  = ra[i];
      assign req_slot[p*RPQ+i]  = rs[i];
      assign rr[i] = req_ready[p*RPQ+i];
      assign sv[i] = rsp_valid[p*RPQ+i];
      assign ss[i] = rsp_slot[p*RPQ+i];
      assign sd[i] = rsp_data[p*RPQ+i];
    end
    qpp #(.N_BFC(N_BFC), .N_CH(N_CH), .MAX_DEG(MAX_DEG), .MAX_VEC_LINES(MAX_VEC_LINES),
          .CQ_SIZE(CQ_SIZE), .RQ_SIZE(RQ_SIZE), .MG_MAX(MG_MAX), .MC_MAX(MC_MAX),
          .MAX_OUT(MAX_OUT), .BLOOM_BITS(BLOOM_BITS), .N_HASH(N_HASH)) u_qpp (
      .clk, .rst_n, .entry, .mg, .mc, .k, .metric, .vec_lines, .adj_base, .vec_base,
      .q_valid(qp_valid[p]), .q_ready(qp_ready[p]), .q_qid(qr_qid), .q_data(qr_data),
      .q_last(qr_last),
      .res_valid(pr_valid[p]), .res_ready(pr_ready[p]), .res(pr_res[p]), .res_last(pr_last[p]),
      .req_valid(rv), .req_ready(rr), .req_chan(rc), .req_addr(ra), .req_slot(rs),
      .rsp_valid(sv), .rsp_slot(ss), .rsp_data(sd),
      .idle(qpp_idle[p]),
      .st_groups(st_groups[p]), .st_syncs(st_syncs[p]), .st_inserts(st_inserts[p]),
      .st_drops(st_drops[p]), .st_hold(st_hold[p]), .st_overlap(st_overlap[p])
    );
  end

  // ---------------- result merging
  result_merger #(.N_QPP(N_QPP)) u_merge (
    .clk, .rst_n, .in_valid(pr_valid), .in_ready(pr_ready), .in_res(pr_res), .in_last(pr_last),
    .out_valid(res_valid), .out_ready(res_ready), .out_res(res), .out_last(res_last)
  );

  // ---------------- memory interconnect
  mem_xbar #(.NREQ(NREQ), .N_CH(N_CH), .MAX_OUT(MAX_OUT)) u_xbar (
    .clk, .rst_n,
    .req_valid, .req_ready, .req_chan, .req_addr, .req_slot,
    .rsp_valid, .rsp_slot, .rsp_data,
    .ch_req_valid, .ch_req_ready, .ch_req_addr, .ch_req_tag,
    .ch_rsp_valid, .ch_rsp_ready, .ch_rsp_tag, .ch_rsp_data
  );
endmodule
