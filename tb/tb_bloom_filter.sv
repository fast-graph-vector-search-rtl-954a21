// tb_bloom_filter: checks the visited-node filter against an exact model of
// the same bitmap (same Murmur2 seeds, same bit positions), so every verdict
// is predicted, false positives included. It waits for the clear after
// reset, streams 1500 IDs (with repeats) at one per cycle, checks the rate
// (5 register stages: the verdict is sampled 6 clock edges after the ID is
// taken, one result per cycle), checks that no repeated ID is ever
// reported new, then clears the filter and checks that it forgets.
module tb_bloom_filter;
  import falcon_pkg::*;
  import falcon_tb_pkg::*;

  localparam int unsigned BITS = 262144, N_HASH = 3, WORD_W = 256;
  localparam int unsigned BANK_BITS = (BITS / (N_HASH * WORD_W)) * WORD_W;
  localparam logic [31:0] SEEDS [3] = '{32'h9747b28c, 32'h1b873593, 32'hcc9e2d51};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, busy, in_valid = 0, in_ready, out_valid, out_ready = 1, out_visited;
  node_t in_id, out_id;
  gid_t in_meta, out_meta;

  bloom_filter #(.BITS(BITS), .N_HASH(N_HASH), .WORD_W(WORD_W)) dut (.*);

  int checks = 0, failures = 0;
  bit model [N_HASH][BANK_BITS];
  bit seen [int];
  node_t sent [$];
  gid_t  sent_m [$];
  int    n_out = 0, first_out_cyc = -1, last_out_cyc = 0, cyc = 0, in_start = -1;
  int    n_fp = 0;

  function automatic bit model_ts(node_t id);
    bit all;
    all = 1;
    for (int j = 0; j < N_HASH; j++) begin
      longint unsigned idx;
      idx = (longint'(ref_murmur2(id, SEEDS[j])) * BANK_BITS) >> 32;
      all &= model[j][idx];
      model[j][idx] = 1;
    end
    return all;
  endfunction

  always @(posedge clk) begin
    cyc++;
    if (rst_n && out_valid && out_ready) begin
      node_t id; gid_t m; bit want;
      id = sent.pop_front(); m = sent_m.pop_front();
      want = model_ts(id);
      checks++;
      if (out_id !== id || out_meta !== m || out_visited !== want) begin
        failures++;
        $display("FAIL: id %0d/%0d meta %0d visited %0d want %0d", out_id, id, out_meta, out_visited, want);
      end
      if (seen.exists(int'(id))) begin
        checks++;
        if (!out_visited) begin failures++; $display("FAIL: repeated id %0d reported new", id); end
      end else if (out_visited) n_fp++;
      seen[int'(id)] = 1;
      if (first_out_cyc < 0) first_out_cyc = cyc;
      last_out_cyc = cyc;
      n_out++;
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int clr_cycles;
    repeat (2) @(posedge clk);
    rst_n = 1;
    clr_cycles = 0;
    while (busy) begin @(posedge clk); clr_cycles++; end
    checks++;
    if (clr_cycles > BITS / (N_HASH * WORD_W) + 2) begin failures++; $display("FAIL: clear took %0d", clr_cycles); end
    // 1500 IDs, about a third repeats, one per cycle; a result is sampled
    // 6 edges after its ID (4 hash stages, test-and-set into the output register)
    for (int i = 0; i < 1500; i++) begin
      @(negedge clk);
      in_valid = 1;
      in_id = (i % 3 == 2) ? node_t'($urandom_range(i)) * 13 : node_t'(i * 13);
      in_meta = gid_t'(i);
      @(posedge clk);
      if (in_start < 0) in_start = cyc;
      checks++;
      if (!in_ready) begin failures++; $display("FAIL: not ready at %0d", i); end
      sent.push_back(in_id); sent_m.push_back(in_meta);
    end
    @(negedge clk); in_valid = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (n_out != 1500 || last_out_cyc - first_out_cyc != 1499 || first_out_cyc - in_start != 6) begin
      failures++;
      $display("FAIL: %0d outputs in %0d cycles, latency %0d", n_out, last_out_cyc - first_out_cyc, first_out_cyc - in_start);
    end
    // back-pressure: out_ready toggling must not lose or duplicate
    fork
      begin
        for (int i = 0; i < 200; i++) begin
          @(negedge clk); in_valid = 1; in_id = node_t'(100000 + i); in_meta = '0;
          @(posedge clk); while (!in_ready) @(posedge clk);
          sent.push_back(in_id); sent_m.push_back(in_meta);
        end
        @(negedge clk); in_valid = 0;
      end
      begin
        for (int i = 0; i < 600; i++) begin @(negedge clk); out_ready = $urandom_range(1); end
        out_ready = 1;
      end
    join
    repeat (10) @(posedge clk);
    checks++;
    if (sent.size() != 0) begin failures++; $display("FAIL: %0d results lost", sent.size()); end
    // clear and re-check: previously seen IDs are new again
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    while (busy) @(posedge clk);
    foreach (model[j, b]) model[j][b] = 0;
    seen.delete();
    for (int i = 0; i < 100; i++) begin
      @(negedge clk); in_valid = 1; in_id = node_t'(i * 13); in_meta = '0;
      @(posedge clk);
      sent.push_back(in_id); sent_m.push_back(in_meta);
    end
    @(negedge clk); in_valid = 0;
    repeat (10) @(posedge clk);
    $display("false positives seen: %0d", n_fp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
