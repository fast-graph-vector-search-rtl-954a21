// read_port_model: behavioural memory behind one requester port of a fetch
// unit (channel, line address, slot), used by the unit testbenches. Each
// accepted read is answered after at least MIN_LAT cycles, in random order,
// so the requester's reorder logic is exercised. It records how many reads
// were in flight at most. Contents: associative array indexed by
// {channel, address}, written by the testbench.
module read_port_model
  import falcon_pkg::*;
#(
  parameter int unsigned CHW     = 2,
  parameter int unsigned SW      = 6,
  parameter int unsigned MIN_LAT = 20
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           req_valid,
  output logic           req_ready,
  input  logic [CHW-1:0] req_chan,
  input  addr_t          req_addr,
  input  logic [SW-1:0]  req_slot,
  output logic           rsp_valid,
  output logic [SW-1:0]  rsp_slot,
  output line_t          rsp_data
);
  line_t mem [logic [CHW+ADDR_W-1:0]];
  typedef struct { longint t; logic [CHW+ADDR_W-1:0] a; logic [SW-1:0] s; } pend_t;
  pend_t q [$];
  longint now;
  int max_inflight, n_reads, n_ooo;
  int last_slot;

  assign req_ready = rst_n;
  initial begin now = 0; max_inflight = 0; n_reads = 0; n_ooo = 0; last_slot = -1; rsp_valid = 0; end

  always @(posedge clk) begin
    int pick;
    now <= now + 1;
    rsp_valid <= 1'b0;
    if (rst_n) begin
      if (req_valid) begin
        q.push_back('{t: now + MIN_LAT + $urandom_range(15), a: {req_chan, req_addr}, s: req_slot});
        n_reads++;
      end
      if (q.size() > max_inflight) max_inflight = q.size();
      pick = -1;
      for (int i = 0; i < q.size() && i < 8; i++)
        if (q[i].t <= now && (pick < 0 || $urandom_range(1) == 1)) pick = i;
      if (pick >= 0) begin
        rsp_valid <= 1'b1;
        rsp_slot  <= q[pick].s;
        rsp_data  <= mem.exists(q[pick].a) ? mem[q[pick].a] : '0;
        if (pick != 0) n_ooo++;
        q.delete(pick);
      end
    end
  end
endmodule
