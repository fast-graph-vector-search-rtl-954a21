// tb_dist_compute: streams random vectors (4 lines of 32 signed 16-bit
// elements) back to back into the compute PE and compares every distance
// with a reference computed in 64-bit integers, for L2 and for the inner
// product. With no back-pressure it checks one line per cycle (a result every
// 4 cycles) and the 3-cycle latency; then it repeats with random out_ready.
module tb_dist_compute;
  import falcon_pkg::*;
  import falcon_tb_pkg::*;
  localparam int unsigned VL = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  metric_e metric = METRIC_L2;
  line_t query [VL];
  logic in_valid = 0, in_ready, in_last = 0, out_valid, out_ready = 1;
  line_t in_data;
  item_t in_item;
  scored_t out_res;
  dist_compute #(.MAX_VEC_LINES(VL)) dut (.*);

  int checks = 0, failures = 0;
  longint exp_d [$]; int exp_id [$];
  int cyc = 0, n_out = 0, out_cycles [$];
  int last_in [$];          // cycle of each vector's last line
  bit lat_check = 0;
  localparam int LAT = 3;   // cycles from the last line to the result

  always @(posedge clk) begin
    cyc++;
    if (rst_n && in_valid && in_ready && in_last) last_in.push_back(cyc);
    if (rst_n && out_valid && out_ready) begin
      longint d; int id;
      d = exp_d.pop_front(); id = exp_id.pop_front();
      checks++;
      if (longint'(out_res.score) != d || int'(out_res.id) != id || out_res.grp != gid_t'(id)) begin
        failures++; $display("FAIL: id %0d score %0d want %0d/%0d", out_res.id, out_res.score, id, d);
      end
      out_cycles.push_back(cyc);
      if (lat_check) begin
        checks++;
        if (cyc - last_in[0] != LAT) begin failures++; $display("FAIL: latency %0d", cyc - last_in[0]); end
      end
      void'(last_in.pop_front());
      n_out++;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int n, bit random_ready);
    line_t q [] = new[VL];
    lat_check = !random_ready;
    for (int i = 0; i < VL; i++) q[i] = query[i];
    for (int v = 0; v < n; v++) begin
      line_t x [] = new[VL];
      for (int l = 0; l < VL; l++) begin
        for (int w = 0; w < 16; w++) x[l][w*32 +: 32] = $urandom;
        if (v == 0) x[l] = {32{16'h8000}};       // extreme values
      end
      exp_d.push_back(metric == METRIC_L2 ? ref_l2(x, q) : ref_ip(x, q));
      exp_id.push_back(v);
      for (int l = 0; l < VL; l++) begin
        @(negedge clk);
        if (random_ready) out_ready = $urandom_range(1);
        in_valid = 1; in_data = x[l]; in_last = (l == VL-1);
        in_item = '{id: node_t'(v), grp: gid_t'(v)};
        @(posedge clk);
        while (!in_ready) begin
          @(negedge clk); if (random_ready) out_ready = $urandom_range(1); @(posedge clk);
        end
      end
    end
    @(negedge clk); in_valid = 0; out_ready = 1;
    repeat (10) @(posedge clk);
  endtask

  initial begin
    for (int l = 0; l < VL; l++) for (int w = 0; w < 16; w++) query[l][w*32 +: 32] = $urandom;
    query[0][15:0] = 16'h7fff;
    repeat (2) @(posedge clk); rst_n = 1;
    run(40, 0);
    checks++;
    if (out_cycles.size() != 40) failures++;
    else begin
      for (int i = 1; i < 40; i++) if (out_cycles[i] - out_cycles[i-1] != VL) begin
        failures++; $display("FAIL: result spacing %0d", out_cycles[i] - out_cycles[i-1]); break;
      end
    end
    out_cycles.delete();
    metric = METRIC_IP;
    run(40, 0);
    run(40, 1);
    metric = METRIC_L2;
    run(40, 1);
    checks++;
    if (exp_d.size() != 0 || n_out != 160) begin failures++; $display("FAIL: %0d results", n_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
