// tb_bfc_unit: one Bloom-fetch-compute unit at the paper's sizes (256-Kbit
// filter, 3 hashes, 64 reads in flight) behind an out-of-order memory port.
// Random node IDs with many repeats go in; the first visit of a node must
// come out scored with the exact L2 (round 1) or inner-product (round 2)
// distance, in input order, and every repeat must be reported as a drop with
// its group. Between the rounds the filter is cleared, so round 2 scores the
// same nodes again. Rate: 400 distinct 4-line vectors must be scored at one
// vector line per cycle (within 10% plus the memory latency).
module tb_bfc_unit;
  import falcon_pkg::*;
  import falcon_tb_pkg::*;

  localparam int unsigned N_CH = 4, VL = 4, NN = 1000, SW = 6;
  localparam addr_t VEC_BASE = 32'h0002_0000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  metric_e metric = METRIC_L2;
  line_t query [VL];
  logic bloom_clear = 0, bloom_busy, in_valid = 0, in_ready, req_valid, req_ready, rsp_valid;
  logic drop_valid, out_valid, out_ready, busy;
  item_t in_item;
  logic [1:0] req_chan;
  addr_t req_addr;
  logic [SW-1:0] req_slot, rsp_slot;
  line_t rsp_data;
  gid_t drop_grp;
  scored_t out_res;

  bfc_unit dut (
    .clk, .rst_n, .vec_base(VEC_BASE), .vec_lines(3'(VL)), .metric, .query, .bloom_clear, .bloom_busy,
    .in_valid, .in_ready, .in_item, .req_valid, .req_ready, .req_chan, .req_addr, .req_slot,
    .rsp_valid, .rsp_slot, .rsp_data, .drop_valid, .drop_grp, .out_valid, .out_ready, .out_res, .busy);
  read_port_model #(.CHW(2), .SW(SW), .MIN_LAT(20)) mem (
    .clk, .rst_n, .req_valid, .req_ready, .req_chan, .req_addr, .req_slot,
    .rsp_valid, .rsp_slot, .rsp_data);

  line_t vec [NN][VL];
  item_t want_sc [$];
  gid_t  want_drop [$];
  int n_sc = 0, n_drop = 0;

  always @(posedge clk) if (rst_n) begin
    if (drop_valid) begin
      check(want_drop.size() > 0 && drop_grp == want_drop[0], "drop report");
      if (want_drop.size() > 0) void'(want_drop.pop_front());
      n_drop++;
    end
    if (out_valid && out_ready) begin
      line_t a [], b [];
      longint d;
      a = new[VL]; b = new[VL];
      check(want_sc.size() > 0, "unexpected scored node");
      if (want_sc.size() > 0) begin
        for (int i = 0; i < VL; i++) begin a[i] = vec[want_sc[0].id][i]; b[i] = query[i]; end
        d = (metric == METRIC_L2) ? ref_l2(a, b) : ref_ip(a, b);
        check(out_res.id == want_sc[0].id && out_res.grp == want_sc[0].grp && longint'(out_res.score) == d,
              $sformatf("scored node %0d: id %0d score %0d want %0d", n_sc, out_res.id, out_res.score, d));
        void'(want_sc.pop_front());
      end
      n_sc++;
    end
  end

  task automatic feed(int n, int g, bit seen);
    @(negedge clk);
    in_valid = 1; in_item = '{id: node_t'(n), grp: gid_t'(g)};
    do @(posedge clk); while (!in_ready);
    if (seen) want_drop.push_back(gid_t'(g)); else want_sc.push_back(in_item);
    @(negedge clk); in_valid = 0;
  endtask

  bit bp_on = 0;
  always @(negedge clk) out_ready <= bp_on ? ($urandom_range(99) < 50) : 1'b1;

  task automatic round(bit bp);
    bit seen [int];
    bp_on = bp;
    for (int i = 0; i < 1500; i++) begin
      int n;
      n = $urandom_range(NN / 2 - 1);
      feed(n, i % 11, seen.exists(n));
      seen[n] = 1;
    end
    bp_on = 0;
    wait (want_sc.size() == 0 && want_drop.size() == 0);
    repeat (10) @(posedge clk);
    check(!busy, "idle after the round");
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, t1;
    for (int n = 0; n < NN; n++)
      for (int l = 0; l < VL; l++) begin
        for (int e = 0; e < 32; e++) vec[n][l][e*16 +: 16] = 16'($urandom_range(4000) - 2000);
        mem.mem[{2'(n % N_CH), VEC_BASE + addr_t'((n / N_CH) * VL + l)}] = vec[n][l];
      end
    for (int l = 0; l < VL; l++) for (int e = 0; e < 32; e++) query[l][e*16 +: 16] = 16'($urandom_range(4000) - 2000);
    repeat (4) @(posedge clk); rst_n = 1;
    wait (!bloom_busy);
    round(0);
    check(n_drop > 0 && n_sc > 0, "both drops and scored nodes");
    // clear, then the same nodes again with inner product and back-pressure
    @(negedge clk); bloom_clear = 1; @(negedge clk); bloom_clear = 0;
    check(bloom_busy, "clearing");
    wait (!bloom_busy);
    metric = METRIC_IP;
    round(1);
    // rate: 400 distinct nodes, 1600 lines
    metric = METRIC_L2;
    @(negedge clk); bloom_clear = 1; @(negedge clk); bloom_clear = 0;
    wait (!bloom_busy);
    t0 = int'($time / 10);
    fork
      for (int i = 0; i < 400; i++) feed(NN / 2 + i, 0, 0);
    join_none
    wait (want_sc.size() > 0);
    wait (want_sc.size() == 0);
    t1 = int'($time / 10);
    check(t1 - t0 <= 1600 * 11 / 10 + 60, $sformatf("400 vectors took %0d cycles", t1 - t0));
    $display("400 distinct vectors scored in %0d cycles; drops %0d, scored %0d", t1 - t0, n_drop, n_sc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
