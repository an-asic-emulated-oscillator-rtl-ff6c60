// oim_pkg: shared widths, types and constants of the emulated oscillator
// Ising/Potts machine.
//
// Every datapath value is an 8-bit word. A phase is an unsigned fraction of a
// cycle with the binary point ahead of the MSB (phase p stands for p/256), so
// modulo-1 wrap-around is free. Coupling weights, coupling terms, the Fs term
// and the coupling sum are 8-bit two's complement integers counted in phase
// LSBs before the multiplication by the step size h = 2^-k. The 8-bit width
// of phases and weights follows the paper; the meaning of a weight LSB and
// the configuration field widths are this design's own choices.
package oim_pkg;

  localparam int unsigned DATA_W = 8;   // phase and weight width (paper: 8 bits)
  localparam int unsigned SH_W   = 3;   // width of the step-size shift k
  localparam int unsigned ITER_W = 16;  // width of the iteration counters
  localparam int unsigned NNBR   = 8;   // neighbours of an interior PE

  typedef logic        [DATA_W-1:0] phase_t;
  typedef logic signed [DATA_W-1:0] weight_t;

  // Neighbour order used on every 8-entry bundle, numbered as the 3x3 window
  // around PE 5 in the figure of the PE grid (1 2 3 / 4 5 6 / 7 8 9).
  typedef enum logic [2:0] {
    NB_NW = 3'd0,  // 1
    NB_N  = 3'd1,  // 2
    NB_NE = 3'd2,  // 3
    NB_W  = 3'd3,  // 4
    NB_E  = 3'd4,  // 6
    NB_SW = 3'd5,  // 7
    NB_S  = 3'd6,  // 8
    NB_SE = 3'd7   // 9
  } nbr_e;

  // The four weights a PE owns: those of its E, SW, S and SE edges. The
  // other four are read from the neighbour that owns the shared edge.
  typedef struct packed {
    weight_t j_e;
    weight_t j_sw;
    weight_t j_s;
    weight_t j_se;
  } pe_weights_t;

  // Everything a PE holds in its part of the programming shift chain.
  typedef struct packed {
    phase_t      phase;
    pe_weights_t w;
  } pe_regs_t;

  localparam int unsigned PE_REGS_W = $bits(pe_regs_t);   // 40

  // Spin model selected for the synchronization function.
  typedef enum logic {
    MODE_OIM = 1'b0,   // N = 2, Ising
    MODE_OPM = 1'b1    // N = 3, Potts
  } mode_e;

  // Run configuration, the first segment of the programming shift chain.
  typedef struct packed {
    logic [ITER_W-1:0] total_iters;   // Forward Euler iterations per run
    logic [ITER_W-1:0] settle_iters;  // iterations before sync_enable rises
    weight_t           fs_mag;        // size of one Fs unit, in weight LSBs
    logic [SH_W-1:0]   h_shift;       // k in h = 2^-k
    mode_e             mode;
  } cfg_t;

  localparam int unsigned CFG_W = $bits(cfg_t);            // 44

  // Reset values of the configuration register.
  localparam cfg_t CFG_RESET = '{
    total_iters:  ITER_W'(1000),
    settle_iters: ITER_W'(500),
    fs_mag:       weight_t'(8),
    h_shift:      SH_W'(6),
    mode:         MODE_OIM
  };

endpackage
