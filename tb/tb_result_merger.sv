// tb_result_merger: four sources offer result packets (1..64 beats, random
// valid gaps) to the merger; the output has random back-pressure. Checks:
// every beat delivered once, packets never interleaved, each source's
// packets in order, every source served, no beat lost while the output
// stalls. Rate: one beat per cycle when sources and output are always ready.
module tb_result_merger;
  import falcon_pkg::*;

  localparam int unsigned N_QPP = 4, NP = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [N_QPP-1:0] in_valid, in_ready, in_last;
  result_t in_res [N_QPP];
  logic out_valid, out_ready = 1, out_last;
  result_t out_res;

  result_merger #(.N_QPP(N_QPP)) dut (.*);

  int plen [N_QPP][NP];
  int pos [N_QPP], beat [N_QPP];     // source side: packet, beat
  bit gaps = 0, bp = 0;
  logic [N_QPP-1:0] offer;

  always_comb for (int s = 0; s < N_QPP; s++) begin
    in_valid[s] = rst_n && offer[s] && pos[s] < NP;
    in_res[s]   = '{qid: 16'(s * 256 + pos[s]), rank: 8'(beat[s]), id: node_t'(s), score: dist_t'(beat[s])};
    in_last[s]  = (pos[s] < NP) && beat[s] == plen[s][pos[s] < NP ? pos[s] : 0] - 1;
  end

  always @(posedge clk) begin
    for (int s = 0; s < N_QPP; s++) begin
      if (in_valid[s] && in_ready[s]) begin
        if (in_last[s]) begin pos[s] <= pos[s] + 1; beat[s] <= 0; end
        else beat[s] <= beat[s] + 1;
      end
      offer[s] <= !gaps || ($urandom_range(99) < 70);
    end
    out_ready <= !bp || ($urandom_range(99) < 60);
  end

  // output side
  int cur = -1, exp_beat = 0, next_pkt [N_QPP], n_beats = 0;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    int s, p;
    s = int'(out_res.qid) / 256; p = int'(out_res.qid) % 256;
    if (cur < 0) begin
      check(s < N_QPP && p == next_pkt[s], $sformatf("packet %0d of source %0d out of order", p, s));
      cur = int'(out_res.qid); exp_beat = 0;
    end
    check(int'(out_res.qid) == cur, "packets interleaved");
    check(out_res.rank == 8'(exp_beat) && out_res.id == node_t'(s) && out_res.score == dist_t'(exp_beat), "beat content");
    check(out_last == (exp_beat == plen[s][p] - 1), "last flag");
    exp_beat++; n_beats++;
    if (out_last) begin cur = -1; next_pkt[s]++; end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int total, t0, t1;
    total = 0;
    for (int s = 0; s < N_QPP; s++) begin
      pos[s] = 0; beat[s] = 0; next_pkt[s] = 0; offer[s] = 1;
      for (int p = 0; p < NP; p++) begin plen[s][p] = (p < 2) ? 10 : 1 + $urandom_range(63); total += plen[s][p]; end
    end
    repeat (3) @(posedge clk); rst_n = 1;
    // rate: first two packets of each source (80 beats) with no stalls
    t0 = int'($time / 10);
    wait (next_pkt[0] + next_pkt[1] + next_pkt[2] + next_pkt[3] == 8);
    t1 = int'($time / 10);
    check(t1 - t0 <= 80 + 2, $sformatf("80 beats took %0d cycles", t1 - t0));
    gaps = 1; bp = 1;
    wait (n_beats == total);
    repeat (50) @(posedge clk);
    check(n_beats == total, "all beats delivered");
    for (int s = 0; s < N_QPP; s++) check(next_pkt[s] == NP, $sformatf("source %0d: %0d packets", s, next_pkt[s]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
