// qpp: query processing pipeline. It handles one query at a time.
//
// Contents, as in the paper's overview figure: the control logic (dst_ctrl,
// with the candidate and result queues), the neighbour-ID fetch unit and
// N_BFC Bloom-fetch-compute units. A query arrives as vec_lines lines of its
// vector (16-bit elements) on q_*; the last line starts the search once the
// Bloom filters are clear. Popped candidates go through a FIFO to the
// neighbour fetch unit; its neighbour IDs and the seed are dispatched to BFC
// unit id % N_BFC. With N_BFC = N_CH (intra-query variant) unit b thus sees
// exactly the nodes stored in channel b; with N_BFC = 1 (across-query
// variant) the single unit reads all channels through the interconnect.
// The results of the query leave on res_* (k beats, nearest first).
//
// Memory ports: requester 0 is the neighbour fetch unit, requester 1 + b is
// BFC unit b; each has up to MAX_OUT reads in flight.
module qpp
  import falcon_pkg::*;
#(
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
  localparam int unsigned NREQ         = N_BFC + 1,
  localparam int unsigned SW           = $clog2(MAX_OUT),
  localparam int unsigned CHW          = idx_w(N_CH),
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
  // query vector
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
  // memory requesters
  output logic [NREQ-1:0]   req_valid,
  input  logic [NREQ-1:0]   req_ready,
  output logic [CHW-1:0]    req_chan [NREQ],
  output addr_t             req_addr [NREQ],
  output logic [SW-1:0]     req_slot [NREQ],
  input  logic [NREQ-1:0]   rsp_valid,
  input  logic [SW-1:0]     rsp_slot [NREQ],
  input  line_t             rsp_data [NREQ],
  // status and statistics
  output logic              idle,
  output logic [31:0]       st_groups,
  output logic [31:0]       st_syncs,
  output logic [31:0]       st_inserts,
  output logic [31:0]       st_drops,
  output logic [31:0]       st_hold,
  output logic [31:0]       st_overlap
);
  localparam int unsigned BW  = idx_w(N_BFC);
  localparam int unsigned QIW = idx_w(MAX_VEC_LINES);

  // ---------------- query buffer
  line_t           query [MAX_VEC_LINES];
  logic [VLW-1:0]  q_li;
  logic            loaded;
  logic [15:0]     qid_r;
  logic            ctrl_idle, bloom_clear, start;
  logic [N_BFC-1:0] bloom_busy, bfc_busy;

  assign q_ready = ctrl_idle && !loaded;
  assign start   = loaded && ctrl_idle && (bloom_busy == '0);
  assign idle    = ctrl_idle && !loaded && (bloom_busy == '0) && (bfc_busy == '0);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      q_li <= '0; loaded <= 1'b0; qid_r <= '0;
      for (int i = 0; i < MAX_VEC_LINES; i++) query[i] <= '0;
    end else begin
      if (q_valid && q_ready) begin
        if (q_li < VLW'(MAX_VEC_LINES)) query[QIW'(q_li)] <= q_data;
        q_li  <= q_last ? '0 : q_li + 1'b1;
        qid_r <= q_qid;
        if (q_last) loaded <= 1'b1;
      end else if (start) begin
        loaded <= 1'b0;
      end
    end
  end

  // ---------------- control logic
  logic  seed_valid, seed_ready, cand_valid, cand_ready;
  item_t seed_item, cand_item;
  logic  deg_valid;
  gid_t  deg_grp;
  logic [CNT_W-1:0] deg;
  logic [N_BFC-1:0] drop_valid, sc_valid, sc_ready;
  gid_t             drop_grp [N_BFC];
  scored_t          sc_res [N_BFC];

  dst_ctrl #(.N_BFC(N_BFC), .CQ_SIZE(CQ_SIZE), .RQ_SIZE(RQ_SIZE),
             .MG_MAX(MG_MAX), .MC_MAX(MC_MAX)) u_ctrl (
    .clk, .rst_n, .entry, .mg, .mc, .k, .start, .qid(qid_r), .idle(ctrl_idle),
    .bloom_clear,
    .seed_valid, .seed_ready, .seed_item,
    .cand_valid, .cand_ready, .cand_item,
    .deg_valid, .deg_grp, .deg,
    .drop_valid, .drop_grp, .sc_valid, .sc_ready, .sc_res,
    .res_valid, .res_ready, .res, .res_last,
    .st_groups, .st_syncs, .st_inserts, .st_drops, .st_hold, .st_overlap
  );

  // candidates: deep enough for every candidate that can be in flight, so
  // that popping never waits on a full FIFO
  logic  cf_valid, cf_ready;
  item_t cf_item;
  sync_fifo #(.WIDTH($bits(item_t)), .DEPTH(MG_MAX * MC_MAX)) u_cf (
    .clk, .rst_n, .in_valid(cand_valid), .in_ready(cand_ready), .in_data(cand_item),
    .out_valid(cf_valid), .out_ready(cf_ready), .out_data(cf_item)
  );

  // ---------------- S1: neighbour IDs
  logic  nb_valid, nb_ready;
  node_t nb_id;
  gid_t  nb_grp;
  neighbor_fetch #(.N_CH(N_CH), .MAX_DEG(MAX_DEG), .MAX_OUT(MAX_OUT)) u_nf (
    .clk, .rst_n, .adj_base,
    .cand_valid(cf_valid), .cand_ready(cf_ready), .cand_id(cf_item.id), .cand_grp(cf_item.grp),
    .req_valid(req_valid[0]), .req_ready(req_ready[0]), .req_chan(req_chan[0]),
    .req_addr(req_addr[0]), .req_slot(req_slot[0]),
    .rsp_valid(rsp_valid[0]), .rsp_slot(rsp_slot[0]), .rsp_data(rsp_data[0]),
    .deg_valid, .deg_grp, .deg,
    .nb_valid, .nb_ready, .nb_id, .nb_grp
  );

  // ---------------- dispatch to the BFC units (seed first)
  logic  d_valid;
  item_t d_item;
  logic [BW-1:0] d_sel;
  logic [N_BFC-1:0] bi_ready;
  assign d_valid = seed_valid || nb_valid;
  assign d_item  = seed_valid ? seed_item : '{id: nb_id, grp: nb_grp};
  if (N_BFC > 1) begin : g_sel
    assign d_sel = BW'(d_item.id % N_BFC);
  end else begin : g_nosel
    assign d_sel = '0;
  end
  assign seed_ready = bi_ready[d_sel];
  assign nb_ready   = !seed_valid && bi_ready[d_sel];

  for (genvar b = 0; b < N_BFC; b++) begin : g_bfc
    logic  bi_valid, bq_valid, bq_ready;
    item_t bq_item;
    assign bi_valid = d_valid && (d_sel == BW'(b));
    sync_fifo #(.WIDTH($bits(item_t)), .DEPTH(8)) u_in (
      .clk, .rst_n, .in_valid(bi_valid), .in_ready(bi_ready[b]), .in_data(d_item),
      .out_valid(bq_valid), .out_ready(bq_ready), .out_data(bq_item)
    );
    bfc_unit #(.N_CH(N_CH), .MAX_OUT(MAX_OUT), .MAX_VEC_LINES(MAX_VEC_LINES),
               .BLOOM_BITS(BLOOM_BITS), .N_HASH(N_HASH)) u_bfc (
      .clk, .rst_n, .vec_base, .vec_lines, .metric, .query,
      .bloom_clear, .bloom_busy(bloom_busy[b]),
      .in_valid(bq_valid), .in_ready(bq_ready), .in_item(bq_item),
      .req_valid(req_valid[1+b]), .req_ready(req_ready[1+b]), .req_chan(req_chan[1+b]),
      .req_addr(req_addr[1+b]), .req_slot(req_slot[1+b]),
      .rsp_valid(rsp_valid[1+b]), .rsp_slot(rsp_slot[1+b]), .rsp_data(rsp_data[1+b]),
      .drop_valid(drop_valid[b]), .drop_grp(drop_grp[b]),
      .out_valid(sc_valid[b]), .out_ready(sc_ready[b]), .out_res(sc_res[b]),
      .busy(bfc_busy[b])
    );
  end
endmodule
