// emoma_pkg -- sizes, bucket layout and hash mixer shared by the EMOMA lookup core.
//
// An EMOMA table stores (key, value) pairs in buckets of four cells. One bucket is one
// 512-bit word of external memory (64-bit key + 64-bit value per cell), which is exactly
// one DRAM burst, so one external access reads a whole bucket. The sizes below follow the
// FPGA prototype the design was sized for; everything else here is this design's own
// choice:
//   * Cell c of a bucket sits at bits [128c+127:128c]: key in the low half, value in the
//     high half. A bucket has no spare bits for valid flags, so key 0 is reserved to mean
//     "empty cell" and can never be stored.
//   * The hash functions h1, h2 and g1..gk are built from one 64-bit xor-shift-multiply
//     mixer (the splitmix64 finaliser) applied to the key xored with a per-function seed.
//     h1 and the g positions come from one mix (low bits and top nibbles), h2 from a
//     second mix with another seed. Any good hardware hash could take its place.
package emoma_pkg;

  localparam int unsigned KEY_W    = 64;
  localparam int unsigned VAL_W    = 64;
  localparam int unsigned CELLS    = 4;
  localparam int unsigned CELL_W   = KEY_W + VAL_W;     // 128
  localparam int unsigned BUCKET_W = CELLS * CELL_W;    // 512

  localparam logic [KEY_W-1:0] EMPTY_KEY = '0;

  localparam logic [63:0] SEED1 = 64'h9E37_79B9_7F4A_7C15;
  localparam logic [63:0] SEED2 = 64'hD1B5_4A32_D192_ED03;

  typedef logic [KEY_W-1:0]    key_t;
  typedef logic [VAL_W-1:0]    val_t;
  typedef logic [BUCKET_W-1:0] bucket_t;

  typedef struct packed {
    val_t value;
    key_t key;
  } cell_t;

  // Where a lookup found (or looked for) its key.
  typedef enum logic [1:0] {
    SRC_STASH = 2'd0,
    SRC_H1    = 2'd1,
    SRC_H2    = 2'd2
  } src_e;

  function automatic cell_t get_cell(bucket_t b, int unsigned c);
    return cell_t'(b[c*CELL_W +: CELL_W]);
  endfunction

  // splitmix64 finaliser: a bijective 64-bit mixer made of shifts, xors and two multiplies.
  function automatic logic [63:0] mix64(logic [63:0] x);
    logic [63:0] z;
    z = x;
    z = (z ^ (z >> 30)) * 64'hBF58_476D_1CE4_E5B9;
    z = (z ^ (z >> 27)) * 64'h94D0_49BB_1331_11EB;
    z =  z ^ (z >> 31);
    return z;
  endfunction

endpackage
