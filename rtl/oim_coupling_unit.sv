// oim_coupling_unit: the coupling term J_ij * Fc(phi_i - phi_j) of one
// neighbour.
//
// The phase difference is taken with a W-bit subtractor; since phases are
// fractions of a cycle with the binary point ahead of the MSB, the modulo-1
// of the coupling function is the natural wrap of the subtraction. Fc is +1
// when the difference lies in [0, 0.5), i.e. when its MSB is 0, and -1
// otherwise. The product with J_ij is a 2:1 multiplexer (the "sgn" block)
// that passes J or its two's complement negation. All of this follows the
// paper. Negating the most negative weight wraps to itself, a consequence of
// the W-bit datapath. Purely combinational.
module oim_coupling_unit
  import oim_pkg::*;
#(
  parameter int unsigned W = DATA_W
) (
  input  logic        [W-1:0] phase_self,  // phi_i
  input  logic        [W-1:0] phase_nbr,   // phi_j
  input  logic signed [W-1:0] weight,      // J_ij
  output logic signed [W-1:0] term         // J_ij * Fc(phi_i - phi_j)
);

  logic [W-1:0] diff;
  logic         fc_neg;   // 1 when Fc = -1

  always_comb begin
    diff   = phase_self - phase_nbr;
    fc_neg = diff[W-1];
    term   = fc_neg ? -weight : weight;
  end

endmodule
