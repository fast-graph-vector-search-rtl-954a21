// query_router: hands incoming queries to the query processing pipelines.
//
// In the across-query variant every pipeline works on its own query; the
// paper only says that different queries are processed across the pipelines.
// This router takes the query stream (the vector lines of one query, the
// last one marked) and, at the first line of a query, picks the lowest
// numbered pipeline that is ready for a new query; the rest of the query
// follows to the same pipeline. A query is thus started as soon as it
// arrives, without waiting for the rest of a batch. Each line passes through
// a one-beat register (one cycle of latency, full rate while the pipeline
// takes one line per cycle), which also cuts the wide data path between the
// network side and the pipelines. A pipeline whose registered beat is still
// pending is not chosen for a new query.
//
// Interface: in_* is a valid/ready stream; out_valid is one-hot and the
// addressed pipeline takes the beat when its qpp_ready is high.
module query_router
  import falcon_pkg::*;
#(
  parameter int unsigned N_QPP = 4
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [15:0]        in_qid,
  input  line_t              in_data,
  input  logic               in_last,
  input  logic [N_QPP-1:0]   qpp_ready,     // q_ready of each pipeline
  output logic [N_QPP-1:0]   out_valid,
  output logic [15:0]        out_qid,
  output line_t              out_data,
  output logic               out_last
);
  localparam int unsigned QW = idx_w(N_QPP);

  // one-beat output register, addressed to pipeline dst
  logic          full;
  logic [QW-1:0] dst;
  logic          locked;      // inside a query: its lines go to cur
  logic [QW-1:0] cur;
  logic [QW-1:0] free_sel;
  logic          free_any;
  logic [N_QPP-1:0] avail;

  wire take = full && qpp_ready[dst];

  // a pipeline that still has to take the registered beat is not free
  always_comb begin
    avail = qpp_ready;
    if (full) avail[dst] = 1'b0;
    free_any = 1'b0; free_sel = '0;
    for (int i = N_QPP-1; i >= 0; i--)
      if (avail[i]) begin free_any = 1'b1; free_sel = QW'(i); end
  end

  logic [QW-1:0] sel;
  assign sel      = locked ? cur : free_sel;
  assign in_ready = (!full || take) && (locked || free_any);
  always_comb begin
    out_valid = '0;
    if (full) out_valid[dst] = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      locked <= 1'b0; cur <= '0; full <= 1'b0; dst <= '0;
    end else begin
      if (in_valid && in_ready) begin
        locked <= !in_last;
        cur    <= sel;
        full   <= 1'b1;
        dst    <= sel;
      end else if (take) begin
        full <= 1'b0;
      end
    end
  end
  always_ff @(posedge clk) begin
    if (in_valid && in_ready) begin
      out_qid <= in_qid; out_data <= in_data; out_last <= in_last;
    end
  end

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(out_valid));
endmodule
