// oim_barrel_shifter: multiplication by the Forward Euler step h = 2^-k.
//
// Because the paper restricts h to negative powers of two, the product is an
// arithmetic right shift of the signed coupling sum by k, done here as a
// logarithmic barrel shifter of SHAMT_W stages (stage s shifts by 2^s when bit
// s of k is set). Shifting rounds toward minus infinity. k is programmable;
// its width (0..7 for SHAMT_W = 3) is this design's choice. Combinational.
module oim_barrel_shifter
  import oim_pkg::*;
#(
  parameter int unsigned W    = DATA_W,
  parameter int unsigned SHAMT_W = SH_W
) (
  input  logic signed [W-1:0]    din,
  input  logic        [SHAMT_W-1:0] shamt,
  output logic signed [W-1:0]    dout
);

  logic signed [W-1:0] stage [SHAMT_W+1];

  always_comb begin
    stage[0] = din;
    for (int s = 0; s < SHAMT_W; s++)
      stage[s+1] = shamt[s] ? (stage[s] >>> (1 << s)) : stage[s];
    dout = stage[SHAMT_W];
  end

endmodule
