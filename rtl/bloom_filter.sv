// bloom_filter: visited-node filter of one Bloom-fetch-compute unit.
//
// Each node ID is hashed by N_HASH Murmur2 pipelines running in parallel
// (three in the paper) into a BITS-bit bitmap (256 Kbit in the paper). A node
// is reported `visited` when all of its N_HASH bits were already set, and its
// bits are set in the same step (test-and-set), so the first arrival of a
// node passes and later arrivals are dropped, up to the false-positive rate
// (1 - e^(-h*m/b))^h of the paper.
//
// How the bitmap is organised is not given in the paper; here it is split
// into N_HASH banks, one per hash function, so that every bank does one
// read-modify-write per cycle and the filter takes one ID per cycle. A bank is
// an array of WORD_W-bit words; hash j selects bit (hash_j * BANK_BITS) >> 32
// of bank j (multiply-shift range reduction). A clear sweeps one word of every
// bank per cycle (BANK_WORDS cycles) and holds in_ready low meanwhile.
//
// Pipeline: LAT = 4 hash stages + 1 test-and-set stage, all advancing together
// when the output register is free (valid/ready back-pressure). The output
// carries the ID, its META_W-bit tag and the verdict.
module bloom_filter
  import falcon_pkg::*;
#(
  parameter int unsigned BITS   = 262144,
  parameter int unsigned N_HASH = 3,
  parameter int unsigned WORD_W = 256,
  parameter int unsigned META_W = GID_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,        // start clearing the bitmap
  output logic              busy,         // clearing
  input  logic              in_valid,
  output logic              in_ready,
  input  node_t             in_id,
  input  logic [META_W-1:0] in_meta,
  output logic              out_valid,
  input  logic              out_ready,
  output node_t             out_id,
  output logic [META_W-1:0] out_meta,
  output logic              out_visited
);
  localparam int unsigned BANK_WORDS = BITS / (N_HASH * WORD_W);
  localparam int unsigned BANK_BITS  = BANK_WORDS * WORD_W;
  localparam int unsigned WAW        = $clog2(BANK_WORDS);
  localparam int unsigned BW         = $clog2(WORD_W);
  localparam int unsigned IW         = $clog2(BANK_BITS);
  localparam int unsigned HLAT       = 4;
  localparam logic [31:0] SEEDS [8] = '{32'h9747b28c, 32'h1b873593, 32'hcc9e2d51,
                                        32'h85ebca6b, 32'hc2b2ae35, 32'h27d4eb2f,
                                        32'h165667b1, 32'hd3a2646c};

  // ---- clear sweep
  logic [WAW-1:0] clr_addr;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b1; clr_addr <= '0;     // clear after reset
    end else if (clear && !busy) begin
      busy <= 1'b1; clr_addr <= '0;
    end else if (busy) begin
      if (clr_addr == WAW'(BANK_WORDS-1)) busy <= 1'b0;
      clr_addr <= clr_addr + 1'b1;
    end
  end

  // ---- pipeline control
  logic adv;
  assign adv      = !(out_valid && !out_ready) && !busy;
  assign in_ready = adv && !clear;

  logic              v_sr [HLAT];
  node_t             id_sr [HLAT];
  logic [META_W-1:0] m_sr [HLAT];
  logic [31:0]       hash [N_HASH];

  for (genvar j = 0; j < N_HASH; j++) begin : g_hash
    murmur2_hash #(.SEED(SEEDS[j % 8])) u_h (.clk, .en(adv), .key(in_id), .hash(hash[j]));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int s = 0; s < HLAT; s++) v_sr[s] <= 1'b0;
    end else if (adv) begin
      v_sr[0] <= in_valid && in_ready;
      for (int s = 1; s < HLAT; s++) v_sr[s] <= v_sr[s-1];
    end
  end
  always_ff @(posedge clk) begin
    if (adv) begin
      id_sr[0] <= in_id; m_sr[0] <= in_meta;
      for (int s = 1; s < HLAT; s++) begin id_sr[s] <= id_sr[s-1]; m_sr[s] <= m_sr[s-1]; end
    end
  end

  // ---- bit positions
  logic [IW-1:0]  bitidx [N_HASH];
  logic [WAW-1:0] widx   [N_HASH];
  logic [BW-1:0]  boff   [N_HASH];
  logic [N_HASH-1:0] hit;
  always_comb begin
    for (int j = 0; j < N_HASH; j++) begin
      bitidx[j] = IW'((64'(hash[j]) * 64'(BANK_BITS)) >> 32);
      widx[j]   = WAW'(bitidx[j] >> BW);
      boff[j]   = BW'(bitidx[j]);
    end
  end

  // ---- one bank per hash function; test-and-set of the addressed bit,
  // written back as a whole word (or the clear sweep's zero word)
  wire do_ts = adv && v_sr[HLAT-1];
  for (genvar j = 0; j < N_HASH; j++) begin : g_bank
    logic [WORD_W-1:0] mem [BANK_WORDS];
    logic [WORD_W-1:0] rd;
    assign rd     = mem[widx[j]];
    assign hit[j] = rd[boff[j]];
    always_ff @(posedge clk) begin
      if (busy)       mem[clr_addr] <= '0;
      else if (do_ts) mem[widx[j]]  <= rd | (WORD_W'(1) << boff[j]);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else if (adv) out_valid <= v_sr[HLAT-1];
  end
  always_ff @(posedge clk) begin
    if (adv) begin
      out_id      <= id_sr[HLAT-1];
      out_meta    <= m_sr[HLAT-1];
      out_visited <= &hit;
    end
  end
endmodule
