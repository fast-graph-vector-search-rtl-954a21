// tb_neighbor_fetch: the neighbour-ID fetch unit behind a behavioural memory
// port that answers out of order (20..35 cycles). Adjacency records of 300
// nodes have random degrees 0..64, plus some stored degrees above 64 that
// must be clamped to 64. Checks: one degree report per candidate, in order,
// with the right group and clamped degree; exactly that many neighbour IDs,
// in order and with the group; no other output. Rate: with degree-64
// candidates back to back, IDs must leave at one per cycle (within 10%).
// A second phase adds random back-pressure on the ID output.
module tb_neighbor_fetch;
  import falcon_pkg::*;

  localparam int unsigned N_CH = 4, NN = 300, MAX_DEG = 64, SW = 6;
  localparam int unsigned AL = adj_lines(MAX_DEG);
  localparam addr_t ADJ_BASE = 32'h0000_1000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic cand_valid = 0, cand_ready, req_valid, req_ready, rsp_valid, deg_valid, nb_valid, nb_ready = 1;
  node_t cand_id, nb_id;
  gid_t cand_grp, deg_grp, nb_grp;
  logic [1:0] req_chan;
  addr_t req_addr;
  logic [SW-1:0] req_slot, rsp_slot;
  line_t rsp_data;
  logic [CNT_W-1:0] deg;

  neighbor_fetch #(.N_CH(N_CH), .MAX_DEG(MAX_DEG), .MAX_OUT(64)) dut (
    .clk, .rst_n, .adj_base(ADJ_BASE), .cand_valid, .cand_ready, .cand_id, .cand_grp,
    .req_valid, .req_ready, .req_chan, .req_addr, .req_slot, .rsp_valid, .rsp_slot, .rsp_data,
    .deg_valid, .deg_grp, .deg, .nb_valid, .nb_ready, .nb_id, .nb_grp);
  read_port_model #(.CHW(2), .SW(SW), .MIN_LAT(20)) mem (
    .clk, .rst_n, .req_valid, .req_ready, .req_chan, .req_addr, .req_slot,
    .rsp_valid, .rsp_slot, .rsp_data);

  int stored_deg [NN];
  int adj [NN][$];
  typedef struct { int n; int g; } c_t;
  c_t sent [$];
  int deg_seen = 0;

  // degree reports
  always @(posedge clk) if (rst_n && deg_valid) begin
    int want;
    check(deg_seen < sent.size(), "degree report without candidate");
    if (deg_seen < sent.size()) begin
      want = stored_deg[sent[deg_seen].n] > 64 ? 64 : stored_deg[sent[deg_seen].n];
      check(deg == CNT_W'(want) && deg_grp == gid_t'(sent[deg_seen].g),
            $sformatf("degree report %0d: %0d want %0d", deg_seen, deg, want));
    end
    deg_seen++;
  end

  task automatic send(int n, int g);
    @(negedge clk);
    cand_valid = 1; cand_id = node_t'(n); cand_grp = gid_t'(g);
    sent.push_back('{n: n, g: g});
    do @(posedge clk); while (!cand_ready);
    @(negedge clk); cand_valid = 0;
  endtask

  task automatic expect_ids(int from, int to, bit bp, output int t0, output int t1);
    t0 = -1; t1 = 0;
    for (int c = from; c < to; c++) begin
      int n, d;
      wait (sent.size() > c);
      n = sent[c].n; d = stored_deg[n] > 64 ? 64 : stored_deg[n];
      for (int j = 0; j < d; j++) begin
        do begin
          @(posedge clk);
          if (bp) nb_ready <= ($urandom_range(99) < 70);
        end while (!(nb_valid && nb_ready));
        if (t0 < 0) t0 = int'($time / 10);
        t1 = int'($time / 10);
        check(nb_id == node_t'(adj[n][j]) && nb_grp == gid_t'(sent[c].g),
              $sformatf("candidate %0d neighbour %0d: %0d want %0d", c, j, nb_id, adj[n][j]));
      end
    end
    nb_ready <= 1'b1;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, t1;
    for (int n = 0; n < NN; n++) begin
      line_t l [AL];
      int d;
      case (n % 10)
        0: d = 64; 1: d = 0; 2: d = 15; 3: d = 16; 4: d = 70; 5: d = 1000;
        default: d = $urandom_range(64);
      endcase
      stored_deg[n] = d;
      for (int i = 0; i < AL; i++) l[i] = '0;
      l[0][0 +: 32] = 32'(d);
      for (int j = 0; j < (d > 64 ? 64 : d); j++) begin
        adj[n].push_back($urandom());
        l[(j + 1) / 16][((j + 1) % 16) * 32 +: 32] = 32'(adj[n][j]);
      end
      for (int i = 0; i < AL; i++) mem.mem[{2'(n % N_CH), ADJ_BASE + addr_t'((n / N_CH) * AL + i)}] = l[i];
    end
    repeat (4) @(posedge clk); rst_n = 1;
    // phase 1: degree-64 candidates back to back, rate check
    fork
      for (int i = 0; i < 30; i++) send(10 * $urandom_range(NN / 10 - 1), i % 11);
      expect_ids(0, 30, 0, t0, t1);
    join
    check(t1 - t0 + 1 <= 30 * 64 * 11 / 10, $sformatf("1920 IDs took %0d cycles", t1 - t0 + 1));
    $display("1920 neighbour IDs in %0d cycles", t1 - t0 + 1);
    // phase 2: random nodes with back-pressure
    fork
      for (int i = 0; i < 200; i++) send($urandom_range(NN - 1), i % 11);
      expect_ids(30, 230, 1, t0, t1);
    join
    repeat (50) @(posedge clk);
    check(deg_seen == 230, $sformatf("%0d degree reports for 230 candidates", deg_seen));
    check(!nb_valid, "no extra IDs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
