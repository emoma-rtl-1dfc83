// emoma_hash -- the hash functions of EMOMA: h1(x), h2(x) and g1(x)..gk(x).
//
// h1(x) plays two roles, and that sharing is the heart of EMOMA: it is the first bucket of
// x in the cuckoo table and also the block of the counting block Bloom filter (CBBF) that
// x uses. h2(x) is the second bucket. g1..gk select k bits inside the CBBF block.
// h1 and the g fields are cut from one 64-bit mix of the key (low BUCKET_AW bits for h1,
// the top K nibbles for g), h2 from a second mix with a different seed. The construction
// of the functions is this design's own choice; the roles and the sizes (2^19 buckets,
// 16-bit blocks, k = 4) follow the FPGA prototype.
//
// Purely combinational: key in, addresses and bit positions out in the same cycle.
// Lint note: only the low BUCKET_AW bits of the second mix are used (for h2); the other
// bits are discarded by design.
module emoma_hash
  import emoma_pkg::*;
#(
  parameter int unsigned BUCKET_AW = 19,
  parameter int unsigned K         = 4,
  parameter int unsigned BLOCK_W   = 16,
  localparam int unsigned G_W      = $clog2(BLOCK_W)
) (
  input  key_t                 key,
  output logic [BUCKET_AW-1:0] h1,
  output logic [BUCKET_AW-1:0] h2,
  output logic [K-1:0][G_W-1:0] g
);

  logic [63:0] m1, m2;

  always_comb begin
    m1 = mix64(key ^ SEED1);
    m2 = mix64(key ^ SEED2);
    h1 = m1[BUCKET_AW-1:0];
    h2 = m2[BUCKET_AW-1:0];
    for (int i = 0; i < K; i++) begin
      g[i] = m1[64 - G_W*(i+1) +: G_W];
    end
  end

  initial begin
    assert (BUCKET_AW + K*G_W <= 64)
      else $error("emoma_hash: h1 and g fields overlap in the 64-bit mix");
  end

endmodule
