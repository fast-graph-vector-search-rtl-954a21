// tb_dst_ctrl: checks the traversal controller against a software model of
// the search. The testbench plays the rest of the pipeline: it answers every
// candidate with its degree and neighbours after a random delay, filters
// visited nodes exactly (reporting drops) and returns scored nodes after a
// random delay, from N_BFC ports. Distances are distinct by construction
// (score(n) = (n * 7919 + 13) mod 65521).
//  * mg = mc = 1 is best-first search: the k results must equal those of a
//    software best-first search with the same bounded queues;
//  * for multi-candidate and delayed-synchronization settings the results
//    must be the k nearest of all nodes the controller had scored, and the
//    number of groups in flight must never exceed mg (and exceed 1 for mg>1).
// It also checks that synchronisations happened and, for DST, that scored
// nodes were held back during a synchronisation at least once.
module tb_dst_ctrl;
  import falcon_pkg::*;
  import falcon_tb_pkg::*;

  localparam int unsigned N_BFC = 4, NN = 800, QS = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  node_t entry = 5;
  logic [3:0] mg = 1, mc = 1;
  logic [7:0] k = 10;
  logic start = 0, idle, bloom_clear;
  logic [15:0] qid = 0;
  logic seed_valid, seed_ready = 1, cand_valid, cand_ready = 1;
  item_t seed_item, cand_item;
  logic deg_valid = 0;
  gid_t deg_grp;
  logic [CNT_W-1:0] deg;
  logic [N_BFC-1:0] drop_valid = '0, sc_valid, sc_ready;
  gid_t drop_grp [N_BFC];
  scored_t sc_res [N_BFC];
  logic res_valid, res_ready = 1, res_last;
  result_t res;
  logic [31:0] st_groups, st_syncs, st_inserts, st_drops, st_hold, st_overlap;

  dst_ctrl #(.N_BFC(N_BFC), .CQ_SIZE(QS), .RQ_SIZE(QS)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- graph
  int adj [NN][$];
  function automatic longint score_of(int n); return longint'((n * 7919 + 13) % 65521); endfunction

  // ---------------- environment
  typedef struct { longint t; item_t it; } ev_t;
  ev_t cand_q [$];
  ev_t item_q [N_BFC][$];
  scored_t sc_q [N_BFC][$];
  bit visited [int];
  longint scored_list [$];
  longint now = 0;
  int max_groups = 0;

  always_comb for (int b = 0; b < N_BFC; b++) begin
    sc_valid[b] = sc_q[b].size() > 0;
    sc_res[b]   = sc_valid[b] ? sc_q[b][0] : '0;
  end

  always @(posedge clk) begin
    now++;
    if (dut.g_cnt > max_groups) max_groups = dut.g_cnt;
    // handshakes of this edge
    for (int b = 0; b < N_BFC; b++) if (sc_valid[b] && sc_ready[b]) void'(sc_q[b].pop_front());
    if (seed_valid && seed_ready)
      item_q[seed_item.id % N_BFC].push_back('{t: now + 3, it: seed_item});
    if (cand_valid && cand_ready)
      cand_q.push_back('{t: now + 5 + $urandom_range(20), it: cand_item});
    // degree report and neighbours of the oldest candidate
    deg_valid <= 1'b0;
    if (cand_q.size() > 0 && cand_q[0].t <= now) begin
      ev_t e;
      e = cand_q.pop_front();
      deg_valid <= 1'b1; deg_grp <= e.it.grp; deg <= CNT_W'(adj[e.it.id].size());
      foreach (adj[e.it.id][i]) begin
        int n;
        n = adj[e.it.id][i];
        item_q[n % N_BFC].push_back('{t: now + 2 + i + $urandom_range(6), it: '{id: node_t'(n), grp: e.it.grp}});
      end
    end
    // filter: one item per port per cycle
    for (int b = 0; b < N_BFC; b++) begin
      drop_valid[b] <= 1'b0;
      if (item_q[b].size() > 0 && item_q[b][0].t <= now && sc_q[b].size() < 8) begin
        ev_t e;
        e = item_q[b].pop_front();
        if (visited.exists(int'(e.it.id))) begin
          drop_valid[b] <= 1'b1; drop_grp[b] <= e.it.grp;
        end else begin
          visited[int'(e.it.id)] = 1;
          scored_list.push_back(score_of(int'(e.it.id)));
          sc_q[b].push_back('{id: e.it.id, score: dist_t'(score_of(int'(e.it.id))), grp: e.it.grp});
        end
      end
    end
  end

  // ---------------- software best-first search with bounded queues
  task automatic ref_bfs(output int r_ids[$], output longint r_ds[$]);
    longint cd[$], rd[$]; int ci[$], ri[$];
    bit vis [int];
    vis[int'(entry)] = 1;
    bounded_insert(cd, ci, score_of(int'(entry)), int'(entry), QS);
    bounded_insert(rd, ri, score_of(int'(entry)), int'(entry), QS);
    while (cd.size() > 0 && (rd.size() < QS || cd[0] <= rd[QS-1])) begin
      int c;
      void'(cd.pop_front()); c = ci.pop_front();
      foreach (adj[c][i]) begin
        int n;
        n = adj[c][i];
        if (!vis.exists(n)) begin
          vis[n] = 1;
          bounded_insert(cd, ci, score_of(n), n, QS);
          bounded_insert(rd, ri, score_of(n), n, QS);
        end
      end
    end
    r_ids = ri; r_ds = rd;
  endtask

  task automatic run_query(int m_g, int m_c, int q);
    int got_ids[$]; longint got_ds[$];
    int want_ids[$]; longint want_ds[$];
    int syncs0, hold0;
    mg = 4'(m_g); mc = 4'(m_c); qid = 16'(q);
    visited.delete(); scored_list.delete(); max_groups = 0;
    syncs0 = st_syncs; hold0 = st_hold;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    forever begin
      @(posedge clk);
      if (res_valid && res_ready) begin
        got_ids.push_back(int'(res.id)); got_ds.push_back(longint'(res.score));
        check(res.qid == 16'(q) && res.rank == 8'(got_ids.size() - 1), "qid and rank");
        if (res_last) break;
      end
    end
    check(got_ids.size() == k, $sformatf("mg=%0d mc=%0d: %0d results", m_g, m_c, got_ids.size()));
    if (m_g == 1 && m_c == 1) begin
      ref_bfs(want_ids, want_ds);
      for (int i = 0; i < k; i++)
        check(got_ids[i] == want_ids[i], $sformatf("BFS result %0d: %0d want %0d", i, got_ids[i], want_ids[i]));
    end else begin
      scored_list.sort();
      for (int i = 0; i < k; i++)
        check(got_ds[i] == scored_list[i], $sformatf("mg=%0d mc=%0d result %0d: %0d want %0d", m_g, m_c, i, got_ds[i], scored_list[i]));
    end
    check(max_groups <= m_g, $sformatf("groups in flight %0d > mg %0d", max_groups, m_g));
    if (m_g > 1) check(max_groups > 1, "several groups in flight");
    check(st_syncs > syncs0, "synchronisations happened");
    $display("mg=%0d mc=%0d: visited %0d nodes, groups in flight max %0d, syncs %0d, held %0d",
             m_g, m_c, visited.size(), max_groups, st_syncs - syncs0, st_hold - hold0);
    repeat (5) @(posedge clk);
    check(idle, "idle after the query");
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int h0;
    for (int n = 0; n < NN; n++) begin
      int d;
      d = 4 + $urandom_range(20);
      for (int i = 0; i < d; i++) adj[n].push_back($urandom_range(NN - 1));
    end
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (3) @(posedge clk);
    run_query(1, 1, 1);
    h0 = st_hold;
    run_query(1, 4, 2);
    run_query(4, 1, 3);
    run_query(6, 2, 4);
    run_query(10, 10, 5);
    check(st_hold > h0, "scored nodes waited for a synchronisation");
    entry = 77;
    run_query(1, 1, 6);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
