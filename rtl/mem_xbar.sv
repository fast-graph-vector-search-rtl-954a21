// mem_xbar: memory interconnect between the fetch units and the DDR channels.
//
// The paper's overview shows one memory controller block joining every
// query processing pipeline to every channel; its insides are not described.
// This module is the routing part of it. Each of NREQ requesters sends a line
// read to the channel it names; a round-robin arbiter per channel grants one
// requester per cycle and the request leaves with tag {requester, slot}. On
// the way back, a round-robin arbiter per requester takes one response per
// cycle from the channels that hold one for it (rsp_ready to the others is
// low). The DDR controllers themselves sit outside, behind the ch_* ports.
// Combinational path from req_valid to req_ready and from ch_rsp_valid to
// ch_rsp_ready; no latency is added. The channel tag is TAG_W (16) bits; the
// bits above {requester, slot} are always zero.
module mem_xbar
  import falcon_pkg::*;
#(
  parameter int unsigned NREQ    = 5,
  parameter int unsigned N_CH    = 4,
  parameter int unsigned MAX_OUT = 64,
  localparam int unsigned SW     = $clog2(MAX_OUT),
  localparam int unsigned CHW    = idx_w(N_CH)
) (
  input  logic              clk,
  input  logic              rst_n,
  // requester side
  input  logic [NREQ-1:0]   req_valid,
  output logic [NREQ-1:0]   req_ready,
  input  logic [CHW-1:0]    req_chan [NREQ],
  input  addr_t             req_addr [NREQ],
  input  logic [SW-1:0]     req_slot [NREQ],
  output logic [NREQ-1:0]   rsp_valid,
  output logic [SW-1:0]     rsp_slot [NREQ],
  output line_t             rsp_data [NREQ],
  // channel side
  output logic [N_CH-1:0]   ch_req_valid,
  input  logic [N_CH-1:0]   ch_req_ready,
  output addr_t             ch_req_addr [N_CH],
  output logic [TAG_W-1:0]  ch_req_tag  [N_CH],
  input  logic [N_CH-1:0]   ch_rsp_valid,
  output logic [N_CH-1:0]   ch_rsp_ready,
  input  logic [TAG_W-1:0]  ch_rsp_tag  [N_CH],
  input  line_t             ch_rsp_data [N_CH]
);
  localparam int unsigned RW = idx_w(NREQ);

  // ---------------- requests
  logic [RW-1:0] rq_ptr [N_CH];
  logic [RW-1:0] rq_sel [N_CH];
  logic [N_CH-1:0] rq_any;

  always_comb begin
    req_ready = '0;
    for (int c = 0; c < N_CH; c++) begin
      rq_any[c] = 1'b0; rq_sel[c] = '0;
      for (int i = NREQ-1; i >= 0; i--) begin
        logic [RW-1:0] r;
        r = RW'((int'(rq_ptr[c]) + i) % NREQ);
        if (req_valid[r] && (N_CH == 1 || int'(req_chan[r]) == c)) begin
          rq_any[c] = 1'b1; rq_sel[c] = r;
        end
      end
      ch_req_valid[c] = rq_any[c];
      ch_req_addr[c]  = req_addr[rq_sel[c]];
      ch_req_tag[c]   = TAG_W'({rq_sel[c], req_slot[rq_sel[c]]});
      if (rq_any[c] && ch_req_ready[c]) req_ready[rq_sel[c]] = 1'b1;
    end
  end

  // ---------------- responses
  logic [CHW-1:0] rs_ptr [NREQ];
  logic [CHW-1:0] rs_sel [NREQ];
  logic [NREQ-1:0] rs_any;

  function automatic int unsigned tag_req(logic [TAG_W-1:0] t);
    return int'(t) >> SW;
  endfunction

  always_comb begin
    ch_rsp_ready = '0;
    for (int r = 0; r < NREQ; r++) begin
      rs_any[r] = 1'b0; rs_sel[r] = '0;
      for (int i = N_CH-1; i >= 0; i--) begin
        logic [CHW-1:0] c;
        c = CHW'((int'(rs_ptr[r]) + i) % N_CH);
        if (ch_rsp_valid[c] && tag_req(ch_rsp_tag[c]) == r) begin
          rs_any[r] = 1'b1; rs_sel[r] = c;
        end
      end
      rsp_valid[r] = rs_any[r];
      rsp_slot[r]  = SW'(ch_rsp_tag[rs_sel[r]]);
      rsp_data[r]  = ch_rsp_data[rs_sel[r]];
      if (rs_any[r]) ch_rsp_ready[rs_sel[r]] = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int c = 0; c < N_CH; c++) rq_ptr[c] <= '0;
      for (int r = 0; r < NREQ; r++) rs_ptr[r] <= '0;
    end else begin
      for (int c = 0; c < N_CH; c++)
        if (rq_any[c] && ch_req_ready[c])
          rq_ptr[c] <= (int'(rq_sel[c]) == NREQ-1) ? '0 : rq_sel[c] + 1'b1;
      for (int r = 0; r < NREQ; r++)
        if (rs_any[r])
          rs_ptr[r] <= (int'(rs_sel[r]) == N_CH-1) ? '0 : rs_sel[r] + 1'b1;
    end
  end

  initial assert (RW + SW <= TAG_W) else $fatal(1, "mem_xbar: tag too narrow");
endmodule
