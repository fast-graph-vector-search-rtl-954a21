// tb_vector_fetch: two vector fetch units, each behind a behavioural memory
// port that answers out of order. Unit 0 sees a latency of 20..35 cycles and
// must deliver one 64-byte line per cycle once its pipeline is full; unit 1
// sees 150..165 cycles and must keep exactly MAX_OUT (64) reads in flight,
// never more. Both check every line's data, node tag and last flag, in
// request order, with random output back-pressure in a second phase.
module tb_vector_fetch;
  import falcon_pkg::*;

  localparam int unsigned N_CH = 4, VL = 4, NN = 256, MAX_OUT = 64, SW = 6, NI = 300;
  localparam addr_t VEC_BASE = 32'h0000_4000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int done = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  line_t vec [NN][VL];
  bit built = 0;

  for (genvar u = 0; u < 2; u++) begin : g_u
    logic in_valid = 0, in_ready, req_valid, req_ready, rsp_valid, out_valid, out_ready = 1, out_last;
    item_t in_item, out_item;
    logic [1:0] req_chan;
    addr_t req_addr;
    logic [SW-1:0] req_slot, rsp_slot;
    line_t rsp_data, out_data;
    vector_fetch #(.N_CH(N_CH), .MAX_OUT(MAX_OUT), .MAX_VEC_LINES(VL)) dut (
      .clk, .rst_n, .vec_base(VEC_BASE), .vec_lines(3'(VL)), .in_valid, .in_ready, .in_item,
      .req_valid, .req_ready, .req_chan, .req_addr, .req_slot, .rsp_valid, .rsp_slot, .rsp_data,
      .out_valid, .out_ready, .out_data, .out_item, .out_last);
    read_port_model #(.CHW(2), .SW(SW), .MIN_LAT(u == 0 ? 20 : 150)) mem (
      .clk, .rst_n, .req_valid, .req_ready, .req_chan, .req_addr, .req_slot,
      .rsp_valid, .rsp_slot, .rsp_data);

    int sent [$];
    initial begin
      wait (built);
      for (int n = 0; n < NN; n++)
        for (int l = 0; l < VL; l++) mem.mem[{2'(n % N_CH), VEC_BASE + addr_t'((n / N_CH) * VL + l)}] = vec[n][l];
      wait (rst_n);
      for (int ph = 0; ph < 2; ph++)
        for (int i = 0; i < NI; i++) begin
          int n;
          n = $urandom_range(NN - 1);
          @(negedge clk);
          in_valid = 1; in_item = '{id: node_t'(n), grp: gid_t'(i % 11)};
          sent.push_back(n);
          do @(posedge clk); while (!in_ready);
          @(negedge clk); in_valid = 0;
        end
    end
    initial begin
      int t_first, t_last, got;
      got = 0; t_first = 0; t_last = 0;
      wait (rst_n);
      for (int ph = 0; ph < 2; ph++) begin
        for (int i = 0; i < NI; i++)
          for (int l = 0; l < VL; l++) begin
            do begin
              @(posedge clk);
              if (ph == 1) out_ready <= ($urandom_range(99) < 60);
            end while (!(out_valid && out_ready));
            if (got == 0) t_first = int'($time / 10);
            got++;
            if (ph == 0) t_last = int'($time / 10);
            check(out_data == vec[sent[i + ph * NI]][l] && out_item.id == node_t'(sent[i + ph * NI]) &&
                  out_item.grp == gid_t'(i % 11) && out_last == (l == VL - 1),
                  $sformatf("unit %0d item %0d line %0d", u, i, l));
          end
        if (ph == 0) begin
          if (u == 0)
            check(t_last - t_first <= NI * VL * 11 / 10,
                  $sformatf("unit 0: %0d lines took %0d cycles", NI * VL, t_last - t_first + 1));
          else
            check(mem.max_inflight == MAX_OUT, $sformatf("unit 1: at most %0d reads in flight", mem.max_inflight));
          $display("unit %0d: %0d lines in %0d cycles, max %0d reads in flight, %0d out of order",
                   u, NI * VL, t_last - t_first + 1, mem.max_inflight, mem.n_ooo);
        end
        out_ready <= 1'b1;
      end
      check(mem.n_reads == 2 * NI * VL && mem.max_inflight <= MAX_OUT, "read count and in-flight bound");
      repeat (20) @(posedge clk);
      check(!out_valid, "no extra output");
      done++;
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int n = 0; n < NN; n++)
      for (int l = 0; l < VL; l++)
        for (int w = 0; w < 16; w++) vec[n][l][w*32 +: 32] = $urandom();
    built = 1;
    repeat (4) @(posedge clk); rst_n = 1;
    wait (done == 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
