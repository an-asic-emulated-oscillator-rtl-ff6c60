// oim_cfg_shiftreg: the run-configuration segment of the programming shift
// chain.
//
// The paper programs the chip through a shift-register interface but does
// not describe its contents. This design puts the run configuration at the
// head of the chain, in front of the PEs: the Forward Euler iteration count,
// the settling iterations before the synchronization term is switched on,
// the size of one Fs unit, the step-size shift k (h = 2^-k) and the Ising /
// Potts mode. Fields are laid out as cfg_t in oim_pkg and shift MSB first:
// with shift_en high the register takes scan_in into its LSB each cycle and
// presents its MSB on scan_out. Reset loads CFG_RESET (1000 iterations, the
// paper's run length; k = 6, the paper's example h = 2^-6; Ising mode; 500
// settling iterations and an Fs unit of 8 weight LSBs, both own choices).
module oim_cfg_shiftreg
  import oim_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic shift_en,
  input  logic scan_in,
  output logic scan_out,
  output cfg_t cfg_o
);

  cfg_t cfg;

  always_ff @(posedge clk) begin
    if (!rst_n)        cfg <= CFG_RESET;
    else if (shift_en) cfg <= cfg_t'({cfg[CFG_W-2:0], scan_in});
  end

  assign scan_out = cfg[CFG_W-1];
  assign cfg_o    = cfg;

endmodule
