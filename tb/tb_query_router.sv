// tb_query_router: four pipeline models in front of the router. A model
// takes lines while it is free; after a query's last line it is busy for a
// random time. 200 queries of 1..4 lines are streamed in with random gaps.
// Checks: every line reaches exactly one pipeline, in order, with its data;
// all lines of a query go to the same pipeline; a pipeline only receives
// while it is free; at most one pipeline is addressed per cycle; every
// pipeline gets work. Rate: with all pipelines free, 4 queries of 4 lines
// pass in 16 cycles plus one of latency.
module tb_query_router;
  import falcon_pkg::*;

  localparam int unsigned N_QPP = 4, NQ = 200;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic in_valid = 0, in_ready, in_last = 0, out_last;
  logic [15:0] in_qid = 0, out_qid;
  line_t in_data = '0, out_data;
  logic [N_QPP-1:0] qpp_ready, out_valid;

  query_router #(.N_QPP(N_QPP)) dut (.*);

  int busy_left [N_QPP];
  int cur_q [N_QPP];
  int served [N_QPP];
  int nlines [NQ];
  int got_lines [NQ];
  int owner [NQ];
  bit hold_busy = 0;   // keep the models free (rate test)

  always_comb for (int p = 0; p < N_QPP; p++) qpp_ready[p] = rst_n && busy_left[p] == 0;

  always @(posedge clk) if (rst_n) begin
    check($onehot0(out_valid), "one pipeline at a time");
    for (int p = 0; p < N_QPP; p++) begin
      if (busy_left[p] > 0) busy_left[p] <= busy_left[p] - 1;
      if (out_valid[p] && qpp_ready[p]) begin
        int q;
        q = int'(out_qid);
        check(q < NQ, "qid");
        if (got_lines[q] == 0) begin
          owner[q] = p; served[p]++;
          check(cur_q[p] < 0, $sformatf("pipeline %0d got query %0d inside another", p, q));
          cur_q[p] = q;
        end
        check(owner[q] == p && cur_q[p] == q, $sformatf("query %0d split over pipelines", q));
        check(out_data == line_t'({16{16'(q), 16'(got_lines[q])}}), $sformatf("query %0d line %0d data", q, got_lines[q]));
        check(out_last == (got_lines[q] == nlines[q] - 1), "last flag");
        got_lines[q]++;
        if (out_last) begin
          cur_q[p] = -1;
          busy_left[p] <= hold_busy ? 0 : 5 + $urandom_range(60);
        end
      end
    end
  end

  task automatic send(int q, bit gaps);
    for (int i = 0; i < nlines[q]; i++) begin
      @(negedge clk);
      in_valid = 1; in_qid = 16'(q); in_data = {16{16'(q), 16'(i)}}; in_last = (i == nlines[q] - 1);
      do @(posedge clk); while (!in_ready);
      if (gaps && $urandom_range(3) == 0) begin @(negedge clk); in_valid = 0; end
    end
    @(negedge clk); in_valid = 0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, t1;
    for (int p = 0; p < N_QPP; p++) begin busy_left[p] = 0; cur_q[p] = -1; served[p] = 0; end
    for (int q = 0; q < NQ; q++) begin nlines[q] = (q < 4) ? 4 : 1 + $urandom_range(3); got_lines[q] = 0; end
    repeat (3) @(posedge clk); rst_n = 1;
    // rate: four 4-line queries, all pipelines free and staying free
    hold_busy = 1;
    @(negedge clk);
    t0 = int'($time / 10);
    fork
      begin
        for (int q = 0; q < 4; q++)
          for (int i = 0; i < 4; i++) begin
            in_valid = 1; in_qid = 16'(q); in_data = {16{16'(q), 16'(i)}}; in_last = (i == 3);
            do @(posedge clk); while (!in_ready);
            @(negedge clk);
          end
        in_valid = 0;
      end
    join
    wait (got_lines[3] == 4);
    t1 = int'($time / 10);
    check(t1 - t0 <= 18, $sformatf("16 lines took %0d cycles", t1 - t0));
    $display("16 query lines through the router in %0d cycles", t1 - t0);
    hold_busy = 0;
    for (int q = 4; q < NQ; q++) send(q, 1);
    repeat (200) @(posedge clk);
    for (int q = 0; q < NQ; q++) check(got_lines[q] == nlines[q], $sformatf("query %0d: %0d of %0d lines", q, got_lines[q], nlines[q]));
    for (int p = 0; p < N_QPP; p++) check(served[p] > 0, $sformatf("pipeline %0d served", p));
    $display("queries per pipeline: %0d %0d %0d %0d", served[0], served[1], served[2], served[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
