// h3_hash: one H3-class hash function of a counting Bloom filter.
//
// The row address is shifted right by a fixed, hard-wired amount (no logic),
// XORed with a seed, and truncated to the counter-index width. Changing the
// seed changes which rows alias with each other; the D-CBF loads a fresh
// random seed every time it clears a filter. Purely combinational.
//
// Follows the source design: static shift plus XOR with a seed. Own choice:
// the shift amounts (set by the instantiating filter) and truncation to the
// low IDX_W bits.
module h3_hash #(
  parameter int ROW_W = bh_pkg::ROW_W,
  parameter int IDX_W = $clog2(bh_pkg::CBF_SIZE),
  parameter int SHIFT = 0
) (
  input  logic [ROW_W-1:0] row,
  input  logic [IDX_W-1:0] seed,
  output logic [IDX_W-1:0] idx
);
  logic [ROW_W-1:0] shifted;
  assign shifted = row >> SHIFT;
  assign idx     = shifted[IDX_W-1:0] ^ seed;
endmodule
