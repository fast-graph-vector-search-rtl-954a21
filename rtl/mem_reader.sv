// mem_reader: pipelined line-read engine shared by the fetch units.
//
// A job asks for LEN consecutive 64-byte lines of one memory channel. The
// engine issues one line request per cycle without waiting for earlier data,
// keeping up to MAX_OUT reads in flight (64 in the paper, "configurable"),
// which hides the memory latency. Each request carries the index of a slot of
// a reorder buffer; responses may come back in any order (they can come from
// different channels) and are written into their slot, and lines leave in
// request order. A slot is only reused after its line has left, so a
// response can always be accepted (no rsp_ready). The output carries the
// job's META_W-bit tag and marks the job's last line. A new job is accepted
// in the cycle the previous one issues its last request, so back-to-back
// jobs keep one request per cycle.
module mem_reader
  import falcon_pkg::*;
#(
  parameter int unsigned MAX_OUT = 64,
  parameter int unsigned N_CH    = 4,
  parameter int unsigned LEN_W   = 4,
  parameter int unsigned META_W  = 8
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // job
  input  logic                        job_valid,
  output logic                        job_ready,
  input  logic [idx_w(N_CH)-1:0]   job_chan,
  input  addr_t                       job_addr,
  input  logic [LEN_W-1:0]            job_len,    // >= 1
  input  logic [META_W-1:0]           job_meta,
  // memory read port
  output logic                        req_valid,
  input  logic                        req_ready,
  output logic [idx_w(N_CH)-1:0]   req_chan,
  output addr_t                       req_addr,
  output logic [$clog2(MAX_OUT)-1:0]  req_slot,
  input  logic                        rsp_valid,
  input  logic [$clog2(MAX_OUT)-1:0]  rsp_slot,
  input  line_t                       rsp_data,
  // in-order line stream
  output logic                        out_valid,
  input  logic                        out_ready,
  output line_t                       out_data,
  output logic [META_W-1:0]           out_meta,
  output logic                        out_last
);
  localparam int unsigned SW = $clog2(MAX_OUT);
  localparam int unsigned CHW = idx_w(N_CH);

  // current job
  logic               busy;
  logic [CHW-1:0]     cur_chan;
  addr_t              cur_addr;
  logic [LEN_W-1:0]   left;
  logic [META_W-1:0]  cur_meta;

  logic [SW-1:0] wp, rp;
  logic [SW:0]   inflight;          // slots between rp and wp
  line_t         rob_data [MAX_OUT];
  logic          rob_full [MAX_OUT];
  logic [META_W-1:0] rob_meta [MAX_OUT];
  logic          rob_last [MAX_OUT];

  assign req_valid = busy && (inflight < (SW+1)'(MAX_OUT));
  assign req_chan  = cur_chan;
  assign req_addr  = cur_addr;
  assign req_slot  = wp;
  wire do_req   = req_valid && req_ready;
  wire last_req = do_req && (left == LEN_W'(1));
  // the next job is taken in the cycle the current one issues its last read
  assign job_ready = !busy || last_req;

  assign out_valid = rob_full[rp];
  assign out_data  = rob_data[rp];
  assign out_meta  = rob_meta[rp];
  assign out_last  = rob_last[rp];
  wire do_out = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0; wp <= '0; rp <= '0; inflight <= '0;
      for (int i = 0; i < MAX_OUT; i++) rob_full[i] <= 1'b0;
    end else begin
      if (job_valid && job_ready) begin
        busy <= 1'b1; cur_chan <= job_chan; cur_addr <= job_addr;
        left <= job_len; cur_meta <= job_meta;
      end else if (do_req) begin
        cur_addr <= cur_addr + 1'b1;
        left     <= left - 1'b1;
        if (left == LEN_W'(1)) busy <= 1'b0;
      end
      if (do_req) wp <= wp + 1'b1;
      if (do_out) rp <= rp + 1'b1;
      inflight <= inflight + (SW+1)'(do_req) - (SW+1)'(do_out);
      if (rsp_valid) rob_full[rsp_slot] <= 1'b1;
      if (do_out)    rob_full[rp] <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (do_req) begin
      rob_meta[wp] <= cur_meta;
      rob_last[wp] <= (left == LEN_W'(1));
    end
    if (rsp_valid) rob_data[rsp_slot] <= rsp_data;
  end
endmodule
