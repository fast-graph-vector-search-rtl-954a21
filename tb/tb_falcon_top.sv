// tb_falcon_top: end-to-end test of the accelerator at its default (paper)
// size: one query pipeline with four Bloom-fetch-compute units, four memory
// channels, 64-entry queues, degree 64, 256-Kbit Bloom filters and 64 reads
// in flight per fetch unit. No parameter of the top is overridden.
//
// The graph is a jittered 32 x 64 grid of 2048 nodes with 128-dimensional
// 16-bit vectors (two coordinate dimensions, 126 small noise dimensions).
// Node ids are a random permutation of the grid positions, so neighbours
// spread over all channels. Each node links to a random subset of its grid
// neighbourhood; every 97th node has the full degree of 64. The adjacency
// records and vectors are stored in four behavioural DDR channel models with
// 40-cycle latency that refuse requests on random cycles.
//
// Checks per query: k results, ascending, each score equal to the reference
// distance of its id, no id twice; best-first settings (mg = mc = 1) must
// equal a software best-first search with the same queue bounds exactly;
// other settings must reach a recall@10 of at least 0.8 against brute force.
// Runs L2 and inner-product queries and several (mg, mc) settings, one after
// another, so every query after the first relies on the Bloom filters having
// been cleared. At the end it fails if any mechanism never happened: Bloom
// filter drops, synchronisations, scored nodes held during a
// synchronisation, groups overlapping, queue overflow (more insertions than
// queue entries), channel back-pressure and many reads in flight.
module tb_falcon_top;
  import falcon_pkg::*;
  import falcon_tb_pkg::*;

  localparam int unsigned N_CH = 4, GX = 32, GY = 64, NN = GX * GY, D = 128, VL = 4;
  localparam int unsigned QS = 64, ADJ_L = adj_lines(64);
  localparam addr_t ADJ_BASE = 32'h0000_0000, VEC_BASE = 32'h0010_0000;

  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;  // 200 MHz

  node_t entry;
  addr_t adj_base = ADJ_BASE, vec_base = VEC_BASE;
  logic [3:0] mg = 1, mc = 1;
  logic [7:0] k = 10;
  metric_e metric = METRIC_L2;
  logic [2:0] vec_lines = 3'(VL);
  logic q_valid = 0, q_ready, q_last = 0;
  logic [15:0] q_qid = 0;
  line_t q_data = '0;
  logic res_valid, res_ready = 1, res_last;
  result_t res;
  logic [N_CH-1:0] ch_req_valid, ch_req_ready, ch_rsp_valid, ch_rsp_ready;
  addr_t ch_req_addr [N_CH];
  logic [TAG_W-1:0] ch_req_tag [N_CH], ch_rsp_tag [N_CH];
  line_t ch_rsp_data [N_CH];
  logic [0:0] qpp_idle;
  logic [31:0] st_groups [1], st_syncs [1], st_inserts [1], st_drops [1], st_hold [1], st_overlap [1];

  falcon_top dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- data set
  line_t vec [NN][VL];
  int adj [NN][$];
  line_t adj_mem [N_CH][addr_t];
  line_t vec_mem [N_CH][addr_t];
  bit built = 0;

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    ddr_channel_model #(.LAT(40), .DEPTH(128), .STALL_PCT(10)) u_ch (
      .clk, .rst_n, .req_valid(ch_req_valid[c]), .req_ready(ch_req_ready[c]),
      .req_addr(ch_req_addr[c]), .req_tag(ch_req_tag[c]), .rsp_valid(ch_rsp_valid[c]),
      .rsp_ready(ch_rsp_ready[c]), .rsp_tag(ch_rsp_tag[c]), .rsp_data(ch_rsp_data[c])
    );
    initial begin
      wait (built);
      foreach (adj_mem[c][a]) u_ch.mem[a] = adj_mem[c][a];
      foreach (vec_mem[c][a]) u_ch.mem[a] = vec_mem[c][a];
    end
    // reads in flight per channel
    int inflight = 0, max_inflight = 0;
    always @(posedge clk) begin
      inflight <= inflight + int'(ch_req_valid[c] && ch_req_ready[c]) - int'(ch_rsp_valid[c] && ch_rsp_ready[c]);
      if (inflight > max_inflight) max_inflight <= inflight;
    end
  end

  function automatic void set_elem(ref line_t v [NN][VL], input int n, input int e, input int x);
    v[n][e / 32][(e % 32) * ELEM_W +: ELEM_W] = ELEM_W'(x);
  endfunction

  task automatic build();
    int perm [NN], pos_of [NN];
    for (int i = 0; i < NN; i++) perm[i] = i;
    perm.shuffle();                       // grid position -> node id
    for (int p = 0; p < NN; p++) pos_of[perm[p]] = p;
    for (int n = 0; n < NN; n++) begin
      int p, gx, gy;
      p = pos_of[n]; gx = p % GX; gy = p / GX;
      vec[n][0] = '0; vec[n][1] = '0; vec[n][2] = '0; vec[n][3] = '0;
      set_elem(vec, n, 0, gx * 500 + $urandom_range(200) - 100);
      set_elem(vec, n, 1, gy * 500 + $urandom_range(200) - 100 - 16000);
      for (int e = 2; e < D; e++) set_elem(vec, n, e, $urandom_range(16) - 8);
      // links
      begin
        int r;
        r = (n % 97 == 0) ? 4 : 2;
        for (int dy = -r; dy <= r; dy++)
          for (int dx = -r; dx <= r; dx++) begin
            int x, y;
            x = gx + dx; y = gy + dy;
            if ((dx != 0 || dy != 0) && x >= 0 && x < GX && y >= 0 && y < GY)
              if (r == 4 || $urandom_range(99) < 70) adj[n].push_back(perm[y * GX + x]);
          end
        adj[n].shuffle();
        while (adj[n].size() > 64) void'(adj[n].pop_back());
        if (n % 97 == 0) while (adj[n].size() < 64) adj[n].push_back($urandom_range(NN - 1));
        adj[n].push_back($urandom_range(NN - 1));           // one long link
        while (adj[n].size() > 64) void'(adj[n].pop_front());
      end
    end
    // memory images: node n in channel n % 4 at local index n / 4
    for (int n = 0; n < NN; n++) begin
      int c, li;
      line_t l [ADJ_L];
      c = n % N_CH; li = n / N_CH;
      for (int i = 0; i < ADJ_L; i++) l[i] = '0;
      l[0][0 +: NODE_W] = NODE_W'(adj[n].size());
      foreach (adj[n][j]) l[(j + 1) / 16][((j + 1) % 16) * NODE_W +: NODE_W] = NODE_W'(adj[n][j]);
      for (int i = 0; i < ADJ_L; i++) adj_mem[c][ADJ_BASE + addr_t'(li * ADJ_L + i)] = l[i];
      for (int i = 0; i < VL; i++) vec_mem[c][VEC_BASE + addr_t'(li * VL + i)] = vec[n][i];
    end
    entry = node_t'(perm[(GY / 2) * GX + GX / 2]);
    built = 1;
  endtask

  // ---------------- references
  longint sc [NN];
  task automatic score_all(line_t q [VL], metric_e m);
    line_t a [], b [];
    a = new[VL]; b = new[VL];
    for (int i = 0; i < VL; i++) b[i] = q[i];
    for (int n = 0; n < NN; n++) begin
      for (int i = 0; i < VL; i++) a[i] = vec[n][i];
      sc[n] = (m == METRIC_L2) ? ref_l2(a, b) : ref_ip(a, b);
    end
  endtask

  task automatic ref_bfs(output int r_ids[$]);
    longint cd[$], rd[$]; int ci[$], ri[$];
    bit vis [int];
    int e;
    e = int'(entry);
    vis[e] = 1;
    bounded_insert(cd, ci, sc[e], e, QS);
    bounded_insert(rd, ri, sc[e], e, QS);
    while (cd.size() > 0 && (rd.size() < QS || cd[0] <= rd[QS-1])) begin
      int c;
      void'(cd.pop_front()); c = ci.pop_front();
      foreach (adj[c][i]) begin
        int n;
        n = adj[c][i];
        if (!vis.exists(n)) begin
          vis[n] = 1;
          bounded_insert(cd, ci, sc[n], n, QS);
          bounded_insert(rd, ri, sc[n], n, QS);
        end
      end
    end
    r_ids = ri;
  endtask

  // ---------------- one query
  int total_hits = 0, total_want = 0;
  task automatic run_query(int q, metric_e m, int m_g, int m_c, int kk);
    line_t qv [VL];
    int got[$], want[$], gx, gy;
    longint got_s[$], bf[$];
    bit seen [int];
    longint t0;
    mg = 4'(m_g); mc = 4'(m_c); k = 8'(kk); metric = m;
    gx = $urandom_range(GX - 1); gy = $urandom_range(GY - 1);
    for (int i = 0; i < VL; i++) qv[i] = '0;
    begin
      line_t tmp [NN][VL];
      tmp[0] = qv;
      set_elem(tmp, 0, 0, gx * 500 + $urandom_range(400) - 200);
      set_elem(tmp, 0, 1, gy * 500 + $urandom_range(400) - 200 - 16000);
      for (int e = 2; e < D; e++) set_elem(tmp, 0, e, $urandom_range(16) - 8);
      qv = tmp[0];
    end
    score_all(qv, m);
    // send the query vector
    for (int i = 0; i < VL; i++) begin
      @(negedge clk);
      q_valid = 1; q_qid = 16'(q); q_data = qv[i]; q_last = (i == VL - 1);
      do @(posedge clk); while (!q_ready);
    end
    t0 = $time;
    @(negedge clk); q_valid = 0; q_last = 0;
    // collect the results
    forever begin
      @(posedge clk);
      if (res_valid && res_ready) begin
        check(res.qid == 16'(q) && res.rank == 8'(got.size()), "qid and rank");
        got.push_back(int'(res.id)); got_s.push_back(longint'(res.score));
        if (res_last) break;
      end
    end
    check(got.size() == kk, $sformatf("query %0d: %0d results", q, got.size()));
    foreach (got[i]) begin
      check(got[i] < NN && got_s[i] == sc[got[i]], $sformatf("query %0d result %0d score", q, i));
      check(!seen.exists(got[i]), $sformatf("query %0d: id %0d twice", q, got[i]));
      seen[got[i]] = 1;
      if (i > 0) check(got_s[i] >= got_s[i-1], $sformatf("query %0d: results not sorted", q));
    end
    if (m_g == 1 && m_c == 1) begin
      ref_bfs(want);
      for (int i = 0; i < kk; i++)
        check(got[i] == want[i], $sformatf("query %0d best-first result %0d: %0d want %0d", q, i, got[i], want[i]));
    end else begin
      int hits;
      bf.delete(); foreach (sc[n]) bf.push_back(sc[n]);  // brute-force top 10
      bf.sort();
      hits = 0;
      for (int i = 0; i < 10; i++) if (got_s[i] <= bf[9]) hits++;
      total_hits += hits; total_want += 10;
    end
    $display("query %0d metric %s mg=%0d mc=%0d k=%0d: %0d cycles, groups %0d syncs %0d inserts %0d drops %0d",
             q, m.name(), m_g, m_c, kk, ($time - t0) / 5, st_groups[0], st_syncs[0], st_inserts[0], st_drops[0]);
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int q;
    build();
    repeat (5) @(posedge clk); rst_n = 1;
    q = 0;
    run_query(q++, METRIC_L2, 1, 1, 10);
    run_query(q++, METRIC_L2, 6, 2, 10);
    run_query(q++, METRIC_L2, 1, 4, 10);
    run_query(q++, METRIC_IP, 1, 1, 10);
    run_query(q++, METRIC_L2, 4, 1, 64);
    run_query(q++, METRIC_L2, 6, 2, 10);
    run_query(q++, METRIC_L2, 10, 10, 10);
    run_query(q++, METRIC_L2, 1, 1, 16);
    run_query(q++, METRIC_IP, 6, 2, 10);
    $display("recall@10 of the non-best-first queries: %0d / %0d", total_hits, total_want);
    check(total_hits * 10 >= total_want * 8, "recall@10 at least 0.8");
    // mechanisms
    check(st_drops[0] > 0, "Bloom filter dropped visited nodes");
    check(st_syncs[0] > 0, "synchronisations");
    check(st_hold[0] > 0, "scored nodes held during a synchronisation");
    check(st_overlap[0] > 0, "groups overlapped");
    check(st_inserts[0] > 9 * QS, "queue overflow");
    check(g_ch[0].u_ch.n_refused + g_ch[1].u_ch.n_refused + g_ch[2].u_ch.n_refused + g_ch[3].u_ch.n_refused > 0,
          "channel back-pressure");
    check(g_ch[0].max_inflight >= 16 && g_ch[1].max_inflight >= 16, "many reads in flight per channel");
    $display("max reads in flight per channel: %0d %0d %0d %0d; refused %0d; holds %0d overlap %0d",
             g_ch[0].max_inflight, g_ch[1].max_inflight, g_ch[2].max_inflight, g_ch[3].max_inflight,
             g_ch[0].u_ch.n_refused, st_hold[0], st_overlap[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
