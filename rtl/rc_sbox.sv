// rc_sbox: the small S-box of a Reinforced Concrete Bar, applied to one
// decomposed chunk.
//
// A chunk z in [0, s_i) is replaced by S(z) when z < v and passed unchanged
// when z >= v, so the map is a permutation of [0, s_i) and never changes a
// chunk's range. S is a 1024-entry lookup table filled at elaboration time.
// Purely combinational.
// The paper only names this lookup; v = 659 and S(z) = z^(v-2) mod v
// (inversion in F_v, 0 -> 0) are this design's choice.
module rc_sbox
  import hash_pkg::*;
(
  input  chunk_t z,
  output chunk_t y
);
  assign y = RC_SBOX[z];
endmodule
