// systolic_pq: systolic priority queue used as the candidate queue and as the
// result queue of a query processing pipeline.
//
// Following the paper, the queue is a register array of SIZE entries joined by
// SIZE-1 compare-swap units. In every cycle either the even pairs (0,1),(2,3)..
// or the odd pairs (1,2),(3,4).. compare and swap, alternating, so that the
// smaller distance moves towards entry 0. The paper fixes the rate (one
// insertion per two cycles) and the sorting time (SIZE-1 cycles); where a new
// element enters and how the minimum leaves are this design's choice:
//  * an insertion overwrites the last entry, and only if the new element is
//    closer than what is there. A full queue thus drops its farthest element,
//    which is the "keep only the closest l" step of the search. It is accepted
//    only in the cycle before the pair (SIZE-2,SIZE-1) compares, so each new
//    element starts a bubble pass that never collides with the previous one;
//  * SIZE-1 cycles after the last insertion the array is sorted (`sorted`).
//    Only then may `pop` remove entry 0; a pop shifts the whole array by one
//    place in one cycle. The controller therefore pops only after a
//    synchronisation, which is what the paper's search does.
// Invalid entries count as farther than any valid one. `head` is the nearest
// entry and `tail` the farthest; when the queue is sorted and full, tail.score
// is the largest distance held. Insert and pop are never done in one cycle:
// ins_ready is low while pop is high.
module systolic_pq
  import falcon_pkg::*;
#(
  parameter int unsigned SIZE = 64
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      flush,       // empty the queue (one cycle)
  input  logic      ins_valid,
  output logic      ins_ready,
  input  dist_t     ins_dist,
  input  node_t     ins_id,
  input  logic      pop,         // remove head; only when sorted
  output pq_entry_t head,
  output pq_entry_t tail,
  output logic      sorted
);
  localparam int unsigned CW = $clog2(SIZE);
  localparam logic INS_PHASE = ~1'(SIZE % 2);  // phase in which pair (SIZE-2,SIZE-1) is idle

  pq_entry_t q [SIZE];
  logic      phase;                 // 0: pairs starting at even index, 1: odd
  logic [CW-1:0] settle;            // cycles since the last insertion

  function automatic logic worse(logic [DIST_W:0] ka, logic [DIST_W:0] kb);
    // an entry with key ka sorts after one with key kb
    return ka > kb;
  endfunction

  pq_entry_t ins_e;
  // sort keys: invalid entries sort after every valid one
  logic [DIST_W:0] kq [SIZE];
  always_comb for (int i = 0; i < SIZE; i++) kq[i] = {~q[i].valid, q[i].score};
  assign ins_e = '{valid: 1'b1, score: ins_dist, id: ins_id};

  assign ins_ready = (phase == INS_PHASE) && !pop && !flush;
  wire   do_ins    = ins_valid && ins_ready;
  assign sorted    = (settle == CW'(SIZE-1));
  assign head      = q[0];
  assign tail      = q[SIZE-1];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < SIZE; i++) q[i] <= '0;
      phase  <= 1'b0;
      settle <= CW'(SIZE-1);
    end else begin
      phase <= ~phase;
      if (flush) begin
        for (int i = 0; i < SIZE; i++) q[i] <= '0;
        settle <= CW'(SIZE-1);
      end else if (pop) begin
        for (int i = 0; i < SIZE-1; i++) q[i] <= q[i+1];
        q[SIZE-1] <= '0;
      end else begin
        // compare-swap units of the current phase
        for (int i = 0; i < SIZE-1; i++) begin
          if ((i % 2) == int'(phase) && worse(kq[i], kq[i+1])) begin
            q[i]   <= q[i+1];
            q[i+1] <= q[i];
          end
        end
        // insertion into the last entry (never touched by this phase's pairs)
        if (do_ins && worse(kq[SIZE-1], {~ins_e.valid, ins_e.score})) q[SIZE-1] <= ins_e;
        if (do_ins)       settle <= '0;
        else if (!sorted) settle <= settle + 1'b1;
      end
    end
  end

  // the controller may only pop a sorted queue
  a_pop_sorted: assert property (@(posedge clk) disable iff (!rst_n) pop |-> sorted);
endmodule
