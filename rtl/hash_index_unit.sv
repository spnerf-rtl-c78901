// hash_index_unit: spatial hash of a voxel-grid vertex, paper Eq. (1),
//   h(p) = (x * pi1  XOR  y * pi2  XOR  z * pi3) mod T,
// with pi1 = 1, pi2 = 2654435761, pi3 = 805459861 (the Instant-NGP primes)
// and T = 2^HASH_W table entries (32 k in the paper's chosen configuration).
// Because T is a power of two, "mod T" keeps the low HASH_W bits, so only
// the low HASH_W bits of each product are formed (the products are taken
// modulo 2^32 as in the software hash; higher bits never reach the result).
// Interface: coord in, index out; combinational.
module hash_index_unit
  import spnerf_pkg::*;
#(
  parameter int unsigned HW = HASH_W
) (
  input  vcoord_t        coord,
  output logic [HW-1:0]  index
);
  logic [HW-1:0] px, py, pz;
  always_comb begin
    px    = HW'(coord.x) * HW'(HASH_PI1);
    py    = HW'(coord.y) * HW'(HASH_PI2);
    pz    = HW'(coord.z) * HW'(HASH_PI3);
    index = px ^ py ^ pz;
  end
endmodule
