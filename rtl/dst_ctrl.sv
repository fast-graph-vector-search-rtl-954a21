// dst_ctrl: control logic of a query processing pipeline, running the
// delayed-synchronization traversal (DST) of the paper (Algorithm 2).
//
// It owns the candidate queue C and the result queue R (systolic_pq) and
// tracks up to MG_MAX candidate groups in flight, each of up to MC_MAX
// candidates; mg and mc are run-time settings (mg = mc = 1 is best-first
// search, mg = 1 with mc > 1 is multi-candidate search).
//
// Sequence of one query:
//  SEED   the entry node is sent, as group 0, into the Bloom-fetch-compute
//         path, so it is marked visited, scored and inserted into C and R.
//         (Algorithm 2 starts with p already in C and R; scoring it this way
//         has the same effect.)
//  RUN    scored nodes are inserted into C and R, one per two cycles, from
//         the BFC units in round-robin order. When the earliest launched
//         group is complete (every candidate's degree known and every item
//         either dropped by a Bloom filter or inserted), the group is retired.
//  SYNC   insertion is held back (scored nodes wait in the BFC FIFOs) until
//         both queues are sorted, at most SIZE-1 cycles: this is the delayed
//         synchronisation; the other groups keep fetching and computing.
//  FILL   while fewer than mg groups are in flight, up to mc candidates whose
//         distance is at most max(R) are popped, one per cycle, and sent to
//         the neighbour fetch unit as a new group. A failed attempt (no
//         qualifying candidate) ends the loop; Algorithm 2 leaves this case
//         implicit.
//  OUTPUT with no group in flight and no qualifying candidate, the first k
//         entries of R leave on the result stream, nearest first.
//  FLUSH  queues are emptied and the Bloom filters cleared (bloom_clear).
// Group completion is counted per slot: +deg when a candidate's degree
// arrives, -1 for each Bloom drop or insertion tagged with the slot.
// Statistics outputs count the mechanisms for monitoring.
// Lint reports the candidate queue's tail and the id field of the result
// queue's tail as unused: only the result queue's largest distance is needed
// (for the max(R) threshold), so those outputs are left open on purpose.
// seed_item's node is the entry input as given and its group is always 0:
// the seed is an ordinary item, not a computed one.
module dst_ctrl
  import falcon_pkg::*;
#(
  parameter int unsigned N_BFC  = 4,
  parameter int unsigned CQ_SIZE = 64,
  parameter int unsigned RQ_SIZE = 64,
  parameter int unsigned MG_MAX = 10,
  parameter int unsigned MC_MAX = 10
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration
  input  node_t             entry,
  input  logic [3:0]        mg,          // 1..MG_MAX
  input  logic [3:0]        mc,          // 1..MC_MAX
  input  logic [7:0]        k,           // 1..RQ_SIZE
  // query
  input  logic              start,
  input  logic [15:0]       qid,
  output logic              idle,
  output logic              bloom_clear,
  // seed (entry node) towards the BFC units
  output logic              seed_valid,
  input  logic              seed_ready,
  output item_t             seed_item,
  // candidates towards the neighbour fetch unit
  output logic              cand_valid,
  input  logic              cand_ready,
  output item_t             cand_item,
  // degree reports from the neighbour fetch unit
  input  logic              deg_valid,
  input  gid_t              deg_grp,
  input  logic [CNT_W-1:0]  deg,
  // Bloom-filter drops from the BFC units
  input  logic [N_BFC-1:0]  drop_valid,
  input  gid_t              drop_grp [N_BFC],
  // scored nodes from the BFC units
  input  logic [N_BFC-1:0]  sc_valid,
  output logic [N_BFC-1:0]  sc_ready,
  input  scored_t           sc_res [N_BFC],
  // results
  output logic              res_valid,
  input  logic              res_ready,
  output result_t           res,
  output logic              res_last,
  // statistics
  output logic [31:0]       st_groups,     // groups launched
  output logic [31:0]       st_syncs,      // synchronisations
  output logic [31:0]       st_inserts,    // scored nodes inserted
  output logic [31:0]       st_drops,      // nodes dropped as visited
  output logic [31:0]       st_hold,       // cycles a scored node waited for a sync
  output logic [31:0]       st_overlap     // cycles with more than one group in flight
);
  localparam int unsigned NS  = MG_MAX + 1;           // slots incl. the seed group
  localparam int unsigned GW  = $clog2(NS);
  localparam int unsigned BW  = idx_w(N_BFC);

  typedef enum logic [2:0] {S_IDLE, S_SEED, S_RUN, S_SYNC, S_FILL, S_OUTPUT, S_FLUSH} state_e;
  state_e state;

  // ---------------- queues
  logic      c_ins_ready, r_ins_ready, c_sorted, r_sorted, c_pop, r_pop, q_flush;
  pq_entry_t c_head, c_tail, r_head, r_tail;
  logic      ins_valid;
  scored_t   ins_res;

  systolic_pq #(.SIZE(CQ_SIZE)) u_cq (
    .clk, .rst_n, .flush(q_flush), .ins_valid, .ins_ready(c_ins_ready),
    .ins_dist(ins_res.score), .ins_id(ins_res.id), .pop(c_pop),
    .head(c_head), .tail(c_tail), .sorted(c_sorted)
  );
  systolic_pq #(.SIZE(RQ_SIZE)) u_rq (
    .clk, .rst_n, .flush(q_flush), .ins_valid, .ins_ready(r_ins_ready),
    .ins_dist(ins_res.score), .ins_id(ins_res.id), .pop(r_pop),
    .head(r_head), .tail(r_tail), .sorted(r_sorted)
  );

  // ---------------- insertion arbiter (round robin over BFC units)
  logic [BW-1:0] rr;
  logic          hold;          // insertion held for a synchronisation
  logic          any_sc;
  logic [BW-1:0] pick;
  assign hold = (state == S_SYNC) || (state == S_FILL) || (state == S_OUTPUT);
  always_comb begin
    any_sc = 1'b0; pick = rr;
    for (int i = N_BFC-1; i >= 0; i--) begin
      logic [BW-1:0] j;
      j = BW'((int'(rr) + i) % N_BFC);
      if (sc_valid[j]) begin any_sc = 1'b1; pick = j; end
    end
  end
  wire can_ins = !hold && c_ins_ready && r_ins_ready;
  assign ins_valid = any_sc && can_ins;
  assign ins_res   = sc_res[pick];
  always_comb begin
    sc_ready = '0;
    if (ins_valid) sc_ready[pick] = 1'b1;
  end
  always_ff @(posedge clk) begin
    if (!rst_n) rr <= '0;
    else if (ins_valid) rr <= (int'(pick) == N_BFC-1) ? '0 : pick + 1'b1;
  end

  // ---------------- group slots
  logic                    active [NS];
  logic                    open_  [NS];
  logic signed [CNT_W:0]   pcand  [NS];
  logic signed [CNT_W:0]   pitem  [NS];
  logic [GW-1:0]           g_head, g_tail;     // oldest slot, next free slot
  logic [GW:0]             g_cnt;              // groups in flight
  logic [3:0]              popped;

  function automatic logic [GW-1:0] nxt(logic [GW-1:0] g);
    return (g == GW'(NS-1)) ? '0 : g + 1'b1;
  endfunction

  wire head_done = active[g_head] && !open_[g_head] &&
                   pcand[g_head] == '0 && pitem[g_head] == '0;

  // a candidate qualifies when C is not empty and it is no farther than max(R)
  wire cand_ok = c_head.valid && (!r_tail.valid || c_head.score <= r_tail.score);
  // run-time settings clamped to 1..MG_MAX and 1..MC_MAX
  logic [3:0] mg_e, mc_e;
  assign mg_e = (mg == '0) ? 4'd1 : ((32'(mg) > MG_MAX) ? 4'(MG_MAX) : mg);
  assign mc_e = (mc == '0) ? 4'd1 : ((32'(mc) > MC_MAX) ? 4'(MC_MAX) : mc);
  wire fill_room = (g_cnt < (GW+1)'(mg_e));

  assign cand_valid = (state == S_FILL) && fill_room && cand_ok && (popped < mc_e);
  assign cand_item  = '{id: c_head.id, grp: gid_t'(g_tail)};
  assign c_pop      = cand_valid && cand_ready;

  assign seed_valid = (state == S_SEED);
  assign seed_item  = '{id: entry, grp: '0};

  // ---------------- result output
  logic [7:0] rank;
  logic [15:0] cur_qid;
  assign res_valid = (state == S_OUTPUT);
  assign res.qid   = cur_qid;
  assign res.rank  = rank;
  assign res.id    = r_head.valid ? r_head.id : '1;
  assign res.score  = r_head.valid ? r_head.score : '1;
  assign res_last  = (rank == k - 8'd1);
  assign r_pop     = res_valid && res_ready;
  assign q_flush   = (state == S_FLUSH);
  assign bloom_clear = (state == S_FLUSH);
  assign idle      = (state == S_IDLE);

  // per-slot counter updates
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int g = 0; g < NS; g++) begin
        active[g] <= 1'b0; open_[g] <= 1'b0; pcand[g] <= '0; pitem[g] <= '0;
      end
    end else begin
      for (int g = 0; g < NS; g++) begin
        logic signed [CNT_W:0] dc, di;
        dc = '0; di = '0;
        if (deg_valid && deg_grp == gid_t'(g)) begin
          dc = dc - 1; di = di + (CNT_W+1)'(deg);
        end
        for (int b = 0; b < N_BFC; b++)
          if (drop_valid[b] && drop_grp[b] == gid_t'(g)) di = di - 1;
        if (ins_valid && ins_res.grp == gid_t'(g)) di = di - 1;
        if (c_pop && g_tail == GW'(g)) dc = dc + 1;
        pcand[g] <= pcand[g] + dc;
        pitem[g] <= pitem[g] + di;
      end
      // seed group
      if (state == S_SEED && seed_ready) begin
        active[0] <= 1'b1; open_[0] <= 1'b0; pitem[0] <= 1; pcand[0] <= '0;
      end
      // open a group at the first pop
      if (c_pop && popped == '0) begin
        active[g_tail] <= 1'b1; open_[g_tail] <= 1'b1;
      end
      // close the group being filled
      if (state == S_FILL && popped != '0 && (popped == mc_e || !cand_ok || !fill_room))
        open_[g_tail] <= 1'b0;
      // retire the oldest group
      if (state == S_RUN && head_done) active[g_head] <= 1'b0;
    end
  end

  // ---------------- main FSM
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE; g_head <= '0; g_tail <= '0; g_cnt <= '0; popped <= '0;
      rank <= '0; cur_qid <= '0;
      st_groups <= '0; st_syncs <= '0; st_inserts <= '0; st_drops <= '0;
      st_hold <= '0; st_overlap <= '0;
    end else begin
      if (ins_valid) st_inserts <= st_inserts + 1;
      st_drops <= st_drops + 32'($countones(drop_valid));
      if (hold && any_sc) st_hold <= st_hold + 1;
      if (g_cnt > 1) st_overlap <= st_overlap + 1;
      unique case (state)
        S_IDLE: if (start) begin
          cur_qid <= qid; state <= S_SEED;
          g_head <= '0; g_tail <= GW'(1); g_cnt <= 1; popped <= '0;
        end
        S_SEED: if (seed_ready) state <= S_RUN;
        S_RUN: if (head_done) begin
          g_head <= nxt(g_head); g_cnt <= g_cnt - 1'b1;
          st_syncs <= st_syncs + 1;
          state <= S_SYNC;
        end
        S_SYNC: if (c_sorted && r_sorted) begin
          popped <= '0; state <= S_FILL;
        end
        S_FILL: begin
          if (c_pop) popped <= popped + 1'b1;
          else if (popped != '0 && (popped == mc_e || !cand_ok || !fill_room)) begin
            // launch the filled group
            g_tail <= nxt(g_tail); g_cnt <= g_cnt + 1'b1; popped <= '0;
            st_groups <= st_groups + 1;
          end else if (popped == '0 && (!cand_ok || !fill_room)) begin
            state <= (g_cnt == '0) ? S_OUTPUT : S_RUN;
            rank  <= '0;
          end
        end
        S_OUTPUT: if (res_ready) begin
          rank <= rank + 1'b1;
          if (res_last) state <= S_FLUSH;
        end
        S_FLUSH: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  a_mg: assert property (@(posedge clk) disable iff (!rst_n) g_cnt <= (GW+1)'(MG_MAX));
endmodule
