// tb_mem_xbar: five requesters (one neighbour fetch and four Bloom-fetch-
// compute units of a pipeline) share four behavioural DDR channels through
// the interconnect. Channels refuse requests on 20% of the cycles and
// answer in order after 40 cycles. Each requester keeps up to 64 reads in
// flight with free slot numbers. Checks: every response reaches the
// requester that asked, with its slot and the line of the right channel and
// address; no response lost or duplicated. Phase 1: requester i (i < 4)
// reads only channel i; the four channels must together accept at least
// 0.7 x 4 reads per cycle. Phase 2: all five read channel 0 only; each must
// get between 10% and 30% of the grants (round-robin fairness).
module tb_mem_xbar;
  import falcon_pkg::*;

  localparam int unsigned NREQ = 5, N_CH = 4, MAX_OUT = 64, SW = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [NREQ-1:0] req_valid, req_ready, rsp_valid;
  logic [1:0] req_chan [NREQ];
  addr_t req_addr [NREQ];
  logic [SW-1:0] req_slot [NREQ], rsp_slot [NREQ];
  line_t rsp_data [NREQ];
  logic [N_CH-1:0] ch_req_valid, ch_req_ready, ch_rsp_valid, ch_rsp_ready;
  addr_t ch_req_addr [N_CH];
  logic [TAG_W-1:0] ch_req_tag [N_CH], ch_rsp_tag [N_CH];
  line_t ch_rsp_data [N_CH];

  mem_xbar #(.NREQ(NREQ), .N_CH(N_CH), .MAX_OUT(MAX_OUT)) dut (.*);

  function automatic line_t pattern(int c, addr_t a);
    return {16{16'(c * 1000 + 7), a[15:0]}};
  endfunction

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    ddr_channel_model #(.LAT(40), .DEPTH(128), .STALL_PCT(20)) u_ch (
      .clk, .rst_n, .req_valid(ch_req_valid[c]), .req_ready(ch_req_ready[c]),
      .req_addr(ch_req_addr[c]), .req_tag(ch_req_tag[c]), .rsp_valid(ch_rsp_valid[c]),
      .rsp_ready(ch_rsp_ready[c]), .rsp_tag(ch_rsp_tag[c]), .rsp_data(ch_rsp_data[c]));
    initial for (int a = 0; a < 1024; a++) u_ch.mem[addr_t'(a)] = pattern(c, addr_t'(a));
  end

  int phase = 0;
  int grants [NREQ];
  int n_req = 0, n_rsp = 0;
  for (genvar r = 0; r < NREQ; r++) begin : g_rq
    bit   busy [MAX_OUT];
    line_t want [MAX_OUT];
    int   n_out = 0;
    logic [SW-1:0] free_slot;
    bit   any_free;
    always_comb begin
      any_free = 0; free_slot = '0;
      for (int s = MAX_OUT - 1; s >= 0; s--) if (!busy[s]) begin any_free = 1; free_slot = SW'(s); end
    end
    initial for (int s = 0; s < MAX_OUT; s++) busy[s] = 0;
    assign req_slot[r] = free_slot;
    always @(posedge clk) begin
      if (rst_n && rsp_valid[r]) begin
        check(busy[rsp_slot[r]], $sformatf("requester %0d: response for idle slot %0d", r, rsp_slot[r]));
        check(rsp_data[r] == want[rsp_slot[r]], $sformatf("requester %0d slot %0d data", r, rsp_slot[r]));
        busy[rsp_slot[r]] = 0; n_rsp++;
      end
      if (rst_n && req_valid[r] && req_ready[r]) begin
        busy[free_slot] = 1; want[free_slot] = pattern(int'(req_chan[r]), req_addr[r]);
        grants[r]++; n_req++;
      end
      // next request
      req_valid[r] <= rst_n && any_free && (phase == 2 || (phase == 1 && r < N_CH));
      req_chan[r]  <= (phase == 2) ? 2'd0 : 2'(r % N_CH);
      req_addr[r]  <= addr_t'($urandom_range(1023));
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int g0;
    for (int r = 0; r < NREQ; r++) grants[r] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    phase = 1;
    repeat (200) @(posedge clk);
    g0 = n_req;
    repeat (2000) @(posedge clk);
    check((n_req - g0) * 10 >= 2000 * 4 * 7, $sformatf("phase 1: %0d reads in 2000 cycles", n_req - g0));
    $display("phase 1: %0d reads accepted in 2000 cycles on 4 channels", n_req - g0);
    phase = 0;
    repeat (300) @(posedge clk);
    check(n_req == n_rsp, "phase 1 drained");
    for (int r = 0; r < NREQ; r++) grants[r] = 0;
    phase = 2;
    repeat (3000) @(posedge clk);
    phase = 0;
    repeat (300) @(posedge clk);
    begin
      int tot;
      tot = 0;
      for (int r = 0; r < NREQ; r++) tot += grants[r];
      for (int r = 0; r < NREQ; r++)
        check(grants[r] * 10 >= tot && grants[r] * 10 <= tot * 3, $sformatf("requester %0d: %0d of %0d grants", r, grants[r], tot));
      $display("phase 2 grants: %0d %0d %0d %0d %0d", grants[0], grants[1], grants[2], grants[3], grants[4]);
    end
    check(n_req == n_rsp, $sformatf("%0d reads, %0d responses", n_req, n_rsp));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
