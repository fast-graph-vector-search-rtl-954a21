// tb_falcon_across: the across-query variant, four query pipelines with one
// Bloom-fetch-compute unit each, sharing the four memory channels. Same
// graph and channel models as the end-to-end test of the default variant
// (tb_falcon_top). Sixteen queries are streamed in back to back; the query
// router hands each to a free pipeline and the result merger returns whole
// result packets. Checks: every query answered once with k results in one
// contiguous packet; results ascending, scores equal to the reference
// distance of the id; best-first queries (mg = mc = 1) equal a software
// best-first search exactly; delayed-synchronization queries (mg = 4,
// mc = 1, the paper's best across-query setting) reach recall@10 >= 0.8.
// It also requires that all four pipelines worked at the same time, that
// each pipeline served queries, and that packets left out of arrival order.
module tb_falcon_across;
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
  logic [3:0] qpp_idle;
  logic [31:0] st_groups [4], st_syncs [4], st_inserts [4], st_drops [4], st_hold [4], st_overlap [4];

  falcon_top #(.N_QPP(4), .N_BFC(1)) dut (.*);

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

  // ---------------- queries
  localparam int NQ = 16;
  line_t qvs [NQ][VL];
  longint qsc [NQ][NN];
  int got [NQ][$];
  longint got_s [NQ][$];
  int order [$];
  int total_hits = 0, total_want = 0, max_busy = 0;
  bit served [4];

  always @(posedge clk) begin
    if ($countones(~qpp_idle) > max_busy) max_busy = $countones(~qpp_idle);
    for (int p = 0; p < 4; p++) if (!qpp_idle[p]) served[p] = 1;
  end

  task automatic make_query(int q, metric_e m);
    line_t tmp [NN][VL];
    int gx, gy;
    gx = $urandom_range(GX - 1); gy = $urandom_range(GY - 1);
    for (int i = 0; i < VL; i++) tmp[0][i] = '0;
    set_elem(tmp, 0, 0, gx * 500 + $urandom_range(400) - 200);
    set_elem(tmp, 0, 1, gy * 500 + $urandom_range(400) - 200 - 16000);
    for (int e = 2; e < D; e++) set_elem(tmp, 0, e, $urandom_range(16) - 8);
    qvs[q] = tmp[0];
    score_all(qvs[q], m);
    for (int n = 0; n < NN; n++) qsc[q][n] = sc[n];
  endtask

  task automatic run_batch(int q0, int nq, int m_g, int m_c, int kk);
    mg = 4'(m_g); mc = 4'(m_c); k = 8'(kk);
    fork
      begin : sender
        for (int q = q0; q < q0 + nq; q++)
          for (int i = 0; i < VL; i++) begin
            @(negedge clk);
            q_valid = 1; q_qid = 16'(q); q_data = qvs[q][i]; q_last = (i == VL - 1);
            do @(posedge clk); while (!q_ready);
            @(negedge clk); q_valid = 0;
            repeat ($urandom_range(2)) @(negedge clk);
          end
      end
      begin : collector
        int done, cur;
        done = 0; cur = -1;
        while (done < nq) begin
          @(posedge clk);
          res_ready <= ($urandom_range(99) < 80);
          if (res_valid && res_ready) begin
            if (cur < 0) begin
              cur = int'(res.qid);
              check(cur >= q0 && cur < q0 + nq && got[cur].size() == 0, $sformatf("unexpected packet %0d", cur));
              order.push_back(cur);
            end
            check(int'(res.qid) == cur, "packet interleaved with another");
            check(res.rank == 8'(got[cur].size()), "rank");
            got[cur].push_back(int'(res.id)); got_s[cur].push_back(longint'(res.score));
            if (res_last) begin cur = -1; done++; end
          end
        end
        res_ready <= 1'b1;
      end
    join
    for (int q = q0; q < q0 + nq; q++) begin
      int want[$];
      bit seen [int];
      check(got[q].size() == kk, $sformatf("query %0d: %0d results", q, got[q].size()));
      for (int n = 0; n < NN; n++) sc[n] = qsc[q][n];
      foreach (got[q][i]) begin
        check(got[q][i] < NN && got_s[q][i] == sc[got[q][i]], $sformatf("query %0d result %0d score", q, i));
        check(!seen.exists(got[q][i]), $sformatf("query %0d: id twice", q));
        seen[got[q][i]] = 1;
        if (i > 0) check(got_s[q][i] >= got_s[q][i-1], "results not sorted");
      end
      if (m_g == 1 && m_c == 1) begin
        ref_bfs(want);
        for (int i = 0; i < kk; i++)
          check(got[q][i] == want[i], $sformatf("query %0d best-first result %0d: %0d want %0d", q, i, got[q][i], want[i]));
      end else begin
        longint bf[$];
        foreach (sc[n]) bf.push_back(sc[n]);
        bf.sort();
        for (int i = 0; i < 10; i++) if (got_s[q][i] <= bf[9]) total_hits++;
        total_want += 10;
      end
    end
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit ooo;
    build();
    for (int q = 0; q < NQ; q++) make_query(q, METRIC_L2);
    repeat (5) @(posedge clk); rst_n = 1;
    run_batch(0, 8, 1, 1, 10);
    run_batch(8, 8, 4, 1, 10);
    ooo = 0;
    foreach (order[i]) if (order[i] != i) ooo = 1;
    $display("packet order: %p", order);
    $display("recall@10 (mg=4, mc=1): %0d / %0d; max pipelines busy %0d", total_hits, total_want, max_busy);
    check(total_hits * 10 >= total_want * 8, "recall@10 at least 0.8");
    check(max_busy == 4, "all four pipelines busy at once");
    check(served[0] && served[1] && served[2] && served[3], "every pipeline served queries");
    check(ooo, "packets left out of arrival order");
    for (int p = 0; p < 4; p++) check(st_drops[p] > 0 && st_syncs[p] > 0, "drops and synchronisations in every pipeline");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
