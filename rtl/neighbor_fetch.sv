// neighbor_fetch: the "fetch neighbor IDs" step (S1) of the control logic.
//
// For every candidate popped from the candidate queue it reads the node's
// adjacency record from the channel that holds it (channel id % N_CH, local
// index id / N_CH, round-robin partitioning as in the paper) and emits the
// neighbour IDs one per cycle, each tagged with the candidate's group. When
// the first line of a record arrives, the degree is reported on deg_valid /
// deg so the controller knows how many items the candidate produces.
//
// Record layout (this design's choice): word 0 of line 0 holds the degree,
// words 1..deg the neighbour IDs, ADJ_LINES = ceil((MAX_DEG+1)*4/64) lines
// per node starting at adj_base + (id / N_CH) * ADJ_LINES. All ADJ_LINES lines
// are read; lines past the degree are skipped without a cycle spent per word.
// The line reads go through a mem_reader with up to MAX_OUT reads in flight.
module neighbor_fetch
  import falcon_pkg::*;
#(
  parameter int unsigned N_CH    = 4,
  parameter int unsigned MAX_DEG = 64,
  parameter int unsigned MAX_OUT = 64
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  addr_t                      adj_base,
  // candidates
  input  logic                       cand_valid,
  output logic                       cand_ready,
  input  node_t                      cand_id,
  input  gid_t                       cand_grp,
  // memory read port
  output logic                       req_valid,
  input  logic                       req_ready,
  output logic [idx_w(N_CH)-1:0]     req_chan,
  output addr_t                      req_addr,
  output logic [$clog2(MAX_OUT)-1:0] req_slot,
  input  logic                       rsp_valid,
  input  logic [$clog2(MAX_OUT)-1:0] rsp_slot,
  input  line_t                      rsp_data,
  // degree report
  output logic                       deg_valid,
  output gid_t                       deg_grp,
  output logic [CNT_W-1:0]           deg,
  // neighbour IDs
  output logic                       nb_valid,
  input  logic                       nb_ready,
  output node_t                      nb_id,
  output gid_t                       nb_grp
);
  localparam int unsigned ADJ_LINES = adj_lines(MAX_DEG);
  localparam int unsigned CHW = idx_w(N_CH);
  localparam int unsigned LW  = $clog2(ADJ_LINES + 1);
  localparam int unsigned WPL = WORDS_PER_LINE;
  localparam int unsigned WW  = $clog2(WORDS_PER_LINE);
  localparam int unsigned NIW = $clog2((ADJ_LINES + 1) * WPL);

  logic  rd_valid, rd_ready, rd_last;
  line_t rd_data;
  gid_t  rd_meta;

  logic [CHW-1:0] job_chan;
  addr_t          job_addr;
  if (N_CH > 1) begin : g_ch
    assign job_chan = cand_id[CHW-1:0];
    assign job_addr = adj_base + addr_t'((cand_id >> CHW) * ADJ_LINES);
  end else begin : g_noch
    assign job_chan = '0;
    assign job_addr = adj_base + addr_t'(cand_id * ADJ_LINES);
  end

  mem_reader #(.MAX_OUT(MAX_OUT), .N_CH(N_CH), .LEN_W(LW), .META_W(GID_W)) u_rd (
    .clk, .rst_n,
    .job_valid(cand_valid), .job_ready(cand_ready), .job_chan, .job_addr,
    .job_len(LW'(ADJ_LINES)), .job_meta(cand_grp),
    .req_valid, .req_ready, .req_chan, .req_addr, .req_slot,
    .rsp_valid, .rsp_slot, .rsp_data,
    .out_valid(rd_valid), .out_ready(rd_ready), .out_data(rd_data),
    .out_meta(rd_meta), .out_last(rd_last)
  );

  // unpacker: holds one line and walks over its words
  logic             have;       // a line is held
  line_t            cur;
  gid_t             cur_grp;
  logic             cur_first;  // held line is line 0 of its record
  logic [NIW-1:0]   base_idx;   // neighbour index of word 0 of the held line
  logic [WW-1:0]    w;    // current word
  logic [CNT_W-1:0] cur_deg;
  logic             next_first; // next line from the reader starts a record

  // neighbour index of word w in the held line (word 0 of line 0 is the degree)
  logic [NIW:0] nidx;
  assign nidx = {1'b0, base_idx} + (NIW+1)'(w) - (NIW+1)'(1);
  wire   word_ok  = (cur_first && w == '0) ? 1'b0 : ((CNT_W+1)'(nidx) < (CNT_W+1)'(cur_deg));
  wire   line_end = (w == WW'(WPL-1)) ||
                    ((CNT_W+1)'(nidx) + 1 >= (CNT_W+1)'(cur_deg) && !(cur_first && w == '0));

  assign nb_valid = have && word_ok;
  assign nb_id    = cur[w*NODE_W +: NODE_W];
  assign nb_grp   = cur_grp;

  // the held word is finished when emitted or when it is not a neighbour
  wire step     = have && (!word_ok || nb_ready);
  wire release_ = step && line_end;
  assign rd_ready = !have || release_;
  wire load = rd_valid && rd_ready;

  // degree report when line 0 of a record is loaded
  assign deg_valid = load && next_first;
  assign deg_grp   = rd_meta;
  assign deg       = CNT_W'(rd_data[NODE_W-1:0] > MAX_DEG ? MAX_DEG : rd_data[NODE_W-1:0]);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      have <= 1'b0; next_first <= 1'b1; w <= '0; base_idx <= '0; cur_deg <= '0;
      cur_first <= 1'b0;
    end else begin
      if (load) begin
        have      <= 1'b1;
        cur       <= rd_data;
        cur_grp   <= rd_meta;
        cur_first <= next_first;
        w         <= '0;
        next_first <= rd_last;
        if (next_first) begin
          base_idx <= '0;
          cur_deg  <= deg;
        end else begin
          base_idx <= base_idx + NIW'(WPL);
        end
      end else if (release_) begin
        have <= 1'b0;
      end else if (step) begin
        w <= w + 1'b1;
      end
    end
  end
endmodule
