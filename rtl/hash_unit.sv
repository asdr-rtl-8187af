// hash_unit: spatial hash of one grid vertex for a high-resolution table.
//
// index = (x * pi1) xor (y * pi2) xor (z * pi3) mod 2^T_LOG2
//
// Three multipliers, an XOR tree and a final truncation (the "shift" box of
// the hash unit), all combinational. The primes are those of Instant-NGP
// (1, 2654435761, 805459861); the formula is the one the accelerator uses,
// the primes are this implementation's choice because the design only calls
// them "unique, large prime numbers". Only the low T_LOG2 bits of each
// product are ever needed, so the multipliers are T_LOG2 bits wide.
module hash_unit
  import asdr_pkg::*;
#(
  parameter int unsigned T_BITS = asdr_pkg::T_LOG2
) (
  input  logic [GRID_W-1:0] x,
  input  logic [GRID_W-1:0] y,
  input  logic [GRID_W-1:0] z,
  output logic [T_BITS-1:0] index
);
  logic [T_BITS-1:0] px, py, pz;
  always_comb begin
    px = T_BITS'(x) * PI1[T_BITS-1:0];
    py = T_BITS'(y) * PI2[T_BITS-1:0];
    pz = T_BITS'(z) * PI3[T_BITS-1:0];
    index = px ^ py ^ pz;
  end
endmodule
