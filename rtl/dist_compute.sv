// dist_compute: the compute PE (S4) of a Bloom-fetch-compute unit.
//
// It takes the line stream of the vector fetch unit, one 64-byte line
// (ELEMS_PER_LINE = 32 signed 16-bit elements) per cycle, so that, as the
// paper requires, its throughput matches the read throughput of one fetch
// unit. Line i of a vector is combined with line i of the query:
//   stage 1: 32 parallel squared differences (L2) or products (inner product)
//   stage 2: adder tree over the 32 terms
//   stage 3: accumulation over the lines of the vector
// After the last line the distance leaves with the node ID and group. For the
// inner product the result is IP_BIAS - <q,x>, so that smaller is closer in
// both metrics; cosine similarity is the inner product of normalised vectors.
// The paper names the three metrics and the pipelining; the stage split,
// element type and widths are this design's. Latency: 3 cycles from the last
// line to out_valid. The whole pipeline stalls while a result waits.
module dist_compute
  import falcon_pkg::*;
#(
  parameter int unsigned MAX_VEC_LINES = 4
) (
  input  logic    clk,
  input  logic    rst_n,
  input  metric_e metric,
  input  line_t   query [MAX_VEC_LINES],
  input  logic    in_valid,
  output logic    in_ready,
  input  line_t   in_data,
  input  item_t   in_item,
  input  logic    in_last,
  output logic    out_valid,
  input  logic    out_ready,
  output scored_t out_res
);
  localparam int unsigned E   = ELEMS_PER_LINE;
  localparam int unsigned QIW = idx_w(MAX_VEC_LINES);
  localparam int unsigned PW  = 2 * ELEM_W + 2;          // one term
  localparam int unsigned SW  = PW + $clog2(E) + 1;      // one line's sum
  localparam int unsigned LIW = $clog2(MAX_VEC_LINES + 1);

  wire adv = !(out_valid && !out_ready);
  assign in_ready = adv;

  // line index within the current vector
  logic [LIW-1:0] li;
  always_ff @(posedge clk) begin
    if (!rst_n) li <= '0;
    else if (in_valid && in_ready) li <= in_last ? '0 : li + 1'b1;
  end

  // stage 1: element terms
  logic signed [PW-1:0] term [E];
  logic  v1, l1;
  item_t it1;
  line_t qline;
  assign qline = query[(li < LIW'(MAX_VEC_LINES)) ? QIW'(li) : '0];
  always_ff @(posedge clk) begin
    if (adv) begin
      for (int e = 0; e < E; e++) begin
        logic signed [PW-1:0] a, b, d;
        a = PW'($signed(in_data[e*ELEM_W +: ELEM_W]));
        b = PW'($signed(qline[e*ELEM_W +: ELEM_W]));
        d = a - b;
        term[e] <= (metric == METRIC_L2) ? d * d : a * b;
      end
      it1 <= in_item; l1 <= in_last;
    end
  end

  // stage 2: adder tree
  logic signed [SW-1:0] lsum;
  logic  v2, l2;
  item_t it2;
  always_ff @(posedge clk) begin
    if (adv) begin
      logic signed [SW-1:0] s;
      s = '0;
      for (int e = 0; e < E; e++) s = s + SW'(term[e]);
      lsum <= s; it2 <= it1; l2 <= l1;
    end
  end

  // stage 3: accumulate over lines
  logic signed [DIST_W:0] acc;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; out_valid <= 1'b0; acc <= '0;
    end else if (adv) begin
      v1 <= in_valid;
      v2 <= v1;
      out_valid <= v2 && l2;
      if (v2) acc <= l2 ? '0 : acc + (DIST_W+1)'(lsum);
      if (v2 && l2) begin
        logic signed [DIST_W:0] tot;
        tot = acc + (DIST_W+1)'(lsum);
        out_res.id   <= it2.id;
        out_res.grp  <= it2.grp;
        out_res.score <= (metric == METRIC_L2) ? DIST_W'(tot)
                                              : DIST_W'((DIST_W+1)'(IP_BIAS) - tot);
      end
    end
  end
endmodule
