// result_merger: merges the result streams of the query processing
// pipelines into the one stream going back to the network.
//
// A pipeline's results for one query (k beats, the last one marked) are
// passed on whole: once a pipeline is granted, it keeps the output until its
// last beat; then the next pipeline with results, in round-robin order, is
// granted. With one pipeline this is a plain pass-through with registered
// grant state. The order of whole result lists is this design's choice; the
// paper only says that results go back to the clients over the network.
module result_merger
  import falcon_pkg::*;
#(
  parameter int unsigned N_QPP = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [N_QPP-1:0] in_valid,
  output logic [N_QPP-1:0] in_ready,
  input  result_t          in_res  [N_QPP],
  input  logic [N_QPP-1:0] in_last,
  output logic             out_valid,
  input  logic             out_ready,
  output result_t          out_res,
  output logic             out_last
);
  localparam int unsigned QW = idx_w(N_QPP);

  logic          locked;
  logic [QW-1:0] cur, ptr, pick;
  logic          any;

  always_comb begin
    any = 1'b0; pick = ptr;
    for (int i = N_QPP-1; i >= 0; i--) begin
      logic [QW-1:0] j;
      j = QW'((int'(ptr) + i) % N_QPP);
      if (in_valid[j]) begin any = 1'b1; pick = j; end
    end
  end

  logic [QW-1:0] sel;
  assign sel       = locked ? cur : pick;
  assign out_valid = locked ? in_valid[cur] : any;
  assign out_res   = in_res[sel];
  assign out_last  = in_last[sel];
  always_comb begin
    in_ready = '0;
    if (out_valid) in_ready[sel] = out_ready;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      locked <= 1'b0; cur <= '0; ptr <= '0;
    end else if (out_valid && out_ready) begin
      locked <= !out_last;
      cur    <= sel;
      if (out_last) ptr <= (int'(sel) == N_QPP-1) ? '0 : sel + 1'b1;
    end
  end
endmodule
