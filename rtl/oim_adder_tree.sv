// oim_adder_tree: the coupling sum of Algorithm 1 for one PE.
//
// Eight coupling terms are added pairwise in a 4-2-1 tree of W-bit adders,
// and a fourth-level adder adds the synchronization term, as in the PE
// datapath figure (seven tree adders plus one). Every adder is W bits wide,
// like the paper's 8-bit adders, so a sum outside the signed W-bit range
// wraps; weights and the Fs magnitude must be chosen so that
// |sum of |J|| + fs_mag stays below 2^(W-1). Purely combinational.
module oim_adder_tree
  import oim_pkg::*;
#(
  parameter int unsigned W = DATA_W
) (
  input  logic signed [NNBR-1:0][W-1:0] terms,
  input  logic signed [W-1:0]           fs_term,
  output logic signed [W-1:0]           sum
);

  logic signed [W-1:0] l1 [4];
  logic signed [W-1:0] l2 [2];
  logic signed [W-1:0] l3;

  always_comb begin
    for (int i = 0; i < 4; i++) l1[i] = terms[2*i] + terms[2*i+1];
    for (int i = 0; i < 2; i++) l2[i] = l1[2*i] + l1[2*i+1];
    l3  = l2[0] + l2[1];
    sum = l3 + fs_term;
  end

endmodule
