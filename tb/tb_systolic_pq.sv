// tb_systolic_pq: checks the systolic priority queue against a sorted-list
// model. Each round inserts a burst of random (distance, id) pairs, more than
// the queue holds in some rounds so that the farthest ones are dropped, and
// checks that an insertion is taken every second cycle, that the queue
// reports sorted exactly SIZE-1 cycles after the last insertion, that the
// tail is the largest kept distance, and that popping returns the SIZE
// nearest elements in order.
module tb_systolic_pq;
  import falcon_pkg::*;
  import falcon_tb_pkg::*;

  localparam int unsigned SIZE = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic flush = 0, ins_valid = 0, ins_ready, pop = 0, sorted;
  dist_t ins_dist;
  node_t ins_id;
  pq_entry_t head, tail;

  systolic_pq #(.SIZE(SIZE)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint ds[$]; int ids[$];
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int round = 0; round < 6; round++) begin
      int n, acc, cyc, first_cyc, last_cyc, settle;
      ds.delete(); ids.delete();
      n = (round % 2 == 0) ? 40 : 150;
      acc = 0; cyc = 0; first_cyc = -1; last_cyc = 0;
      // insert n elements with distinct distances
      while (acc < n) begin
        @(negedge clk);
        ins_valid = 1;
        ins_dist  = dist_t'((acc * 7919 + round * 131) % 100003);
        ins_id    = node_t'(round * 1000 + acc);
        @(posedge clk);
        if (ins_ready) begin
          bounded_insert(ds, ids, longint'(ins_dist), int'(ins_id), SIZE);
          if (first_cyc < 0) first_cyc = cyc;
          last_cyc = cyc;
          acc++;
        end
        cyc++;
      end
      @(negedge clk); ins_valid = 0;
      // one insertion per two cycles
      check(last_cyc - first_cyc == 2 * (n - 1), $sformatf("round %0d insert rate: %0d cycles for %0d", round, last_cyc - first_cyc, n));
      // sorted after SIZE-1 cycles
      settle = 0;
      while (!sorted) begin @(posedge clk); #1; settle++; end
      check(settle == SIZE - 1, $sformatf("round %0d settled after %0d cycles", round, settle));
      // tail holds the largest kept element when full
      if (ds.size() == SIZE) check(tail.valid && longint'(tail.score) == ds[SIZE-1], "tail is max");
      else check(!tail.valid, "tail empty when not full");
      // pop everything
      for (int i = 0; i < SIZE; i++) begin
        @(negedge clk);
        if (i < ds.size()) begin
          check(head.valid && longint'(head.score) == ds[i] && int'(head.id) == ids[i],
                $sformatf("round %0d pop %0d: got %0d/%0d want %0d/%0d", round, i, head.score, head.id, ds[i], ids[i]));
        end else check(!head.valid, "empty entry after kept ones");
        pop = 1;
        @(posedge clk); #1;
        pop = 0;
      end
      check(!head.valid, "queue empty after pops");
      // flush test on odd rounds: insert a few then flush
      if (round % 2 == 1) begin
        @(negedge clk); ins_valid = 1; ins_dist = 5; ins_id = 7;
        @(posedge clk); @(posedge clk); @(negedge clk); ins_valid = 0;
        flush = 1; @(posedge clk); #1; flush = 0;
        check(!head.valid && sorted, "flush empties the queue");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
