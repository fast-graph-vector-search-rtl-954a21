// ddr_channel_model: behavioural model of one DDR channel behind its memory
// controller (not synthesizable). A tagged line read is accepted when fewer
// than DEPTH reads are pending (and, if STALL_PCT > 0, not on randomly chosen
// cycles); its data comes back LAT cycles later, in request order, with the
// tag. The response waits while rsp_ready is low. Contents live in an
// associative array written by the testbench (missing lines read as zero).
// It counts accepted reads, cycles with a refused request and cycles with a
// response held back.
module ddr_channel_model
  import falcon_pkg::*;
#(
  parameter int unsigned LAT       = 40,
  parameter int unsigned DEPTH     = 128,
  parameter int unsigned STALL_PCT = 0
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             req_valid,
  output logic             req_ready,
  input  addr_t            req_addr,
  input  logic [TAG_W-1:0] req_tag,
  output logic             rsp_valid,
  input  logic             rsp_ready,
  output logic [TAG_W-1:0] rsp_tag,
  output line_t            rsp_data
);
  line_t mem [addr_t];
  typedef struct { longint t; addr_t a; logic [TAG_W-1:0] tag; } pend_t;
  pend_t q [$];
  longint now;
  int unsigned n_reads, n_refused, n_held;
  logic stall;

  always_ff @(posedge clk) stall <= (STALL_PCT > 0) && ($urandom_range(99) < STALL_PCT);

  assign req_ready = rst_n && (q.size() < DEPTH) && !stall;
  assign rsp_valid = rst_n && (q.size() > 0) && (q[0].t <= now);
  assign rsp_tag   = (q.size() > 0) ? q[0].tag : '0;
  assign rsp_data  = (q.size() > 0 && mem.exists(q[0].a)) ? mem[q[0].a] : '0;

  initial begin now = 0; n_reads = 0; n_refused = 0; n_held = 0; end
  always @(posedge clk) begin
    now <= now + 1;
    if (rst_n) begin
      if (rsp_valid && rsp_ready) void'(q.pop_front());
      if (rsp_valid && !rsp_ready) n_held++;
      if (req_valid && req_ready) begin
        q.push_back('{t: now + longint'(LAT), a: req_addr, tag: req_tag});
        n_reads++;
      end
      if (req_valid && !req_ready) n_refused++;
    end
  end
endmodule
