// vector_fetch: the "fetch vectors" step (S3) of a Bloom-fetch-compute unit.
//
// For each node that passed the Bloom filter it reads the node's vector,
// vec_lines 64-byte lines starting at vec_base + (id / N_CH) * vec_lines in
// channel id % N_CH (round-robin partitioning by node ID, as in the paper; a
// vector is never split across channels). As the paper describes, requests
// are pipelined: up to MAX_OUT (64) line reads are in flight, over a 64-byte
// data path. Lines come out in order, tagged with the node ID and group and
// with the last line of each vector marked. vec_lines is a run-time setting
// (ceil(dim * 2 / 64) for 16-bit elements), at most MAX_VEC_LINES.
module vector_fetch
  import falcon_pkg::*;
#(
  parameter int unsigned N_CH          = 4,
  parameter int unsigned MAX_OUT       = 64,
  parameter int unsigned MAX_VEC_LINES = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  addr_t                      vec_base,
  input  logic [$clog2(MAX_VEC_LINES+1)-1:0] vec_lines,
  // nodes to fetch
  input  logic                       in_valid,
  output logic                       in_ready,
  input  item_t                      in_item,
  // memory read port
  output logic                       req_valid,
  input  logic                       req_ready,
  output logic [idx_w(N_CH)-1:0]     req_chan,
  output addr_t                      req_addr,
  output logic [$clog2(MAX_OUT)-1:0] req_slot,
  input  logic                       rsp_valid,
  input  logic [$clog2(MAX_OUT)-1:0] rsp_slot,
  input  line_t                      rsp_data,
  // vector lines
  output logic                       out_valid,
  input  logic                       out_ready,
  output line_t                      out_data,
  output item_t                      out_item,
  output logic                       out_last
);
  localparam int unsigned CHW = idx_w(N_CH);
  localparam int unsigned LW  = $clog2(MAX_VEC_LINES + 1);

  logic [CHW-1:0] job_chan;
  addr_t          job_addr;
  if (N_CH > 1) begin : g_ch
    assign job_chan = in_item.id[CHW-1:0];
    assign job_addr = vec_base + addr_t'((in_item.id >> CHW) * vec_lines);
  end else begin : g_noch
    assign job_chan = '0;
    assign job_addr = vec_base + addr_t'(in_item.id * vec_lines);
  end

  mem_reader #(.MAX_OUT(MAX_OUT), .N_CH(N_CH), .LEN_W(LW), .META_W($bits(item_t))) u_rd (
    .clk, .rst_n,
    .job_valid(in_valid), .job_ready(in_ready), .job_chan, .job_addr,
    .job_len(vec_lines), .job_meta(in_item),
    .req_valid, .req_ready, .req_chan, .req_addr, .req_slot,
    .rsp_valid, .rsp_slot, .rsp_data,
    .out_valid, .out_ready, .out_data, .out_meta(out_item), .out_last
  );
endmodule
