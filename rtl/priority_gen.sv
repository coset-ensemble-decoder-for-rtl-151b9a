// priority_gen: the priority generator of an ensemble-forest-exploration
// instance, HashToUnit(seed, i, v, e) in the paper's algorithm.
//
// Returns a PW-bit pseudo-random priority for one object (a compressed-graph
// node when is_edge = 0, an edge when is_edge = 1) of candidate 'inst'.
// The key {seed, inst, is_edge, id} is mixed by an integer hash of the
// xor-shift-multiply kind (two odd 32-bit multipliers), so equal keys give
// equal priorities and different candidates see independent orders. The
// per-task seed comes from one stateful PRNG stream in the top, matching the
// paper's fixed-seed low-cost randomness. The mixing function itself is this
// design's choice; the paper only asks for a keyed hash into (0,1).
// Purely combinational.
module priority_gen
  import ced_pkg::*;
#(
  parameter int unsigned IDW = 8
) (
  input  logic [31:0]    seed,
  input  logic [4:0]     inst,
  input  logic           is_edge,
  input  logic [IDW-1:0] id,
  output logic [PW-1:0]  prio
);

  logic [31:0] h;
  always_comb begin
    h = seed ^ {inst, 2'b0, is_edge, 24'(id)};
    h = h ^ (h >> 16);
    h = h * 32'h7FEB_352D;
    h = h ^ (h >> 15);
    h = h * 32'h846C_A68B;
    h = h ^ (h >> 16);
    prio = h[PW-1:0];
  end

endmodule
