// oim_chip: top level of the emulated oscillator Ising/Potts machine.
//
// The chip solves an Ising (max-cut) or 3-state Potts (3-colouring) problem
// mapped onto a ROWS x COLS king's graph by emulating coupled oscillators:
// every PE integrates the simplified Kuramoto equation for its own phase,
// one Forward Euler iteration per clock cycle, all PEs in parallel. It holds
// the configuration shift register, the run controller and the PE array,
// which the paper lists as the parts of its core (with the interconnect and
// weight registers, which live inside the array and the PEs).
//
// Use: with shift_en high, shift in CFG_W + 40*ROWS*COLS bits at scan_in,
// one per cycle. The first bit shifted in ends in the MSB of PE
// (ROWS-1, COLS-1); the order is PE (ROWS-1, COLS-1) down to PE (0, 0) in
// row-major order, each as {phase, j_e, j_sw, j_s, j_se} MSB first, then the
// configuration word (cfg_t) MSB first. Pulse start; busy is high for
// total_iters cycles and done then rises; iter_o and sync_o show progress.
// The array's parallel phase outputs are left open: results leave the chip
// through the chain. Shifting the chain again brings
// the final state out at scan_out in the same order (PE (ROWS-1, COLS-1)
// first) while loading the next problem; the phase of each PE is the
// solution (Ising: near 0 is one spin, near 1/2 the other; Potts: the
// nearest of the three stable phases is the colour). The chain, its order
// and this pin list are this design's choices; the paper only says the chip
// is programmed through a shift-register interface.
module oim_chip
  import oim_pkg::*;
#(
  parameter int unsigned ROWS = 20,
  parameter int unsigned COLS = 20
) (
  input  logic clk,
  input  logic rst_n,
  input  logic shift_en,
  input  logic scan_in,
  output logic scan_out,
  input  logic start,
  output logic busy,
  output logic done,
  // status: iteration being computed, synchronization term active
  output logic [ITER_W-1:0] iter_o,
  output logic              sync_o
);

  cfg_t                                  cfg;
  logic                                  cfg_to_array;
  logic                                  run;
  logic                                  sync_enable;

  oim_cfg_shiftreg u_cfg (
    .clk      (clk),
    .rst_n    (rst_n),
    .shift_en (shift_en),
    .scan_in  (scan_in),
    .scan_out (cfg_to_array),
    .cfg_o    (cfg)
  );

  oim_ctrl u_ctrl (
    .clk          (clk),
    .rst_n        (rst_n),
    .start        (start),
    .shift_en     (shift_en),
    .total_iters  (cfg.total_iters),
    .settle_iters (cfg.settle_iters),
    .run          (run),
    .sync_enable  (sync_enable),
    .busy         (busy),
    .done         (done),
    .iter_o       (iter_o)
  );

  assign sync_o = sync_enable;

  oim_pe_array #(.ROWS(ROWS), .COLS(COLS)) u_array (
    .clk         (clk),
    .rst_n       (rst_n),
    .shift_en    (shift_en),
    .scan_in     (cfg_to_array),
    .scan_out    (scan_out),
    .run         (run),
    .sync_enable (sync_enable),
    .mode        (cfg.mode),
    .fs_mag      (cfg.fs_mag),
    .h_shift     (cfg.h_shift),
    .phase_o     ()
  );

endmodule
