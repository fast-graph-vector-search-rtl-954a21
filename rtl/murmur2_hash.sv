// murmur2_hash: pipelined 32-bit MurmurHash2 of one 4-byte key.
//
// The paper's Bloom filters use Murmur2 hashes, each computed by a pipeline
// that yields one hash per clock cycle. This module is such a pipeline for
// the 4-byte case of MurmurHash2 (m = 0x5bd1e995, r = 24):
//   h = seed ^ 4;  k *= m; k ^= k >> 24; k *= m;  h *= m; h ^= k;
//   h ^= h >> 13;  h *= m; h ^= h >> 15.
// The seed-dependent start value is a constant. The four register stages
// (one 32-bit multiply each at most) are this design's choice; the pipeline
// advances when `en` is high, so a caller can stall it. Latency: LAT cycles of
// `en` from `key` to `hash`.
module murmur2_hash #(
  parameter logic [31:0] SEED = 32'h0
) (
  input  logic        clk,
  input  logic        en,
  input  logic [31:0] key,
  output logic [31:0] hash
);
  localparam logic [31:0] M  = 32'h5bd1e995;
  localparam logic [31:0] H0 = (SEED ^ 32'd4) * M;

  logic [31:0] s1, s2, s3, s4;
  logic [31:0] k1x, h1, h2;

  assign k1x = s1 ^ (s1 >> 24);
  assign h1  = H0 ^ s2;
  assign h2  = s3 ^ (s3 >> 13);

  always_ff @(posedge clk) begin
    if (en) begin
      s1 <= key * M;          // k *= m
      s2 <= k1x * M;          // k ^= k>>r; k *= m
      s3 <= h1;               // h = (seed^len)*m ^ k
      s4 <= h2 * M;           // h ^= h>>13; h *= m
    end
  end

  assign hash = s4 ^ (s4 >> 15);
endmodule
