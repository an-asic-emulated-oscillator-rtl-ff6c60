// oim_pe_array: the ROWS x COLS grid of PEs in king's-graph topology.
//
// PE (r, c) exchanges its phase with its eight spatial neighbours
// (r+-1, c+-1) over dedicated W-bit links, and reads the four weights of its
// NW, N, NE and W edges from the neighbour that stores them: the SE weight
// of PE (r-1, c-1), the S weight of (r-1, c), the SW weight of (r-1, c+1)
// and the E weight of (r, c-1). A link that would leave the grid carries
// phase 0 and weight 0, so edge and corner PEs see only their existing
// neighbours (a zero weight contributes nothing to the coupling sum); the
// weights an edge PE stores for edges leaving the grid are unused. The
// topology, the 20 x 20 size and the weight sharing follow the paper.
//
// The programming chain runs through the PEs in row-major order: scan_in
// enters PE (0, 0), PE (r, c) feeds the next PE, and PE (ROWS-1, COLS-1)
// drives scan_out. The chain order is this design's choice. All PEs update
// together, one Forward Euler iteration per clock cycle with run high.
module oim_pe_array
  import oim_pkg::*;
#(
  parameter int unsigned ROWS = 20,
  parameter int unsigned COLS = 20
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic                                   shift_en,
  input  logic                                   scan_in,
  output logic                                   scan_out,
  input  logic                                   run,
  input  logic                                   sync_enable,
  input  mode_e                                  mode,
  input  weight_t                                fs_mag,
  input  logic [SH_W-1:0]                        h_shift,
  output logic [ROWS-1:0][COLS-1:0][DATA_W-1:0]  phase_o
);

  localparam int unsigned NPE = ROWS * COLS;

  pe_weights_t                  w   [ROWS][COLS];
  logic        [ROWS-1:0][COLS-1:0][DATA_W-1:0] ph;
  logic        [NPE:0]          chain;

  assign chain[0] = scan_in;
  assign scan_out = chain[NPE];
  assign phase_o  = ph;

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      localparam bit HAS_N = (r > 0);
      localparam bit HAS_S = (r < ROWS - 1);
      localparam bit HAS_W = (c > 0);
      localparam bit HAS_E = (c < COLS - 1);

      logic [NNBR-1:0][DATA_W-1:0] nb_ph;
      logic [3:0][DATA_W-1:0]      nb_w;
      logic [NNBR-1:0]             nb_v;

      assign nb_v = {HAS_S && HAS_E, HAS_S, HAS_S && HAS_W, HAS_E,
                     HAS_W, HAS_N && HAS_E, HAS_N, HAS_N && HAS_W};

      // neighbour phases, order NW N NE W E SW S SE
      assign nb_ph[NB_NW] = (HAS_N && HAS_W) ? ph[HAS_N ? r-1 : r][HAS_W ? c-1 : c] : '0;
      assign nb_ph[NB_N]  =  HAS_N           ? ph[HAS_N ? r-1 : r][c]               : '0;
      assign nb_ph[NB_NE] = (HAS_N && HAS_E) ? ph[HAS_N ? r-1 : r][HAS_E ? c+1 : c] : '0;
      assign nb_ph[NB_W]  =  HAS_W           ? ph[r][HAS_W ? c-1 : c]               : '0;
      assign nb_ph[NB_E]  =  HAS_E           ? ph[r][HAS_E ? c+1 : c]               : '0;
      assign nb_ph[NB_SW] = (HAS_S && HAS_W) ? ph[HAS_S ? r+1 : r][HAS_W ? c-1 : c] : '0;
      assign nb_ph[NB_S]  =  HAS_S           ? ph[HAS_S ? r+1 : r][c]               : '0;
      assign nb_ph[NB_SE] = (HAS_S && HAS_E) ? ph[HAS_S ? r+1 : r][HAS_E ? c+1 : c] : '0;

      // weights stored by the NW, N, NE and W neighbours
      assign nb_w[0] = (HAS_N && HAS_W) ? w[HAS_N ? r-1 : r][HAS_W ? c-1 : c].j_se : '0;
      assign nb_w[1] =  HAS_N           ? w[HAS_N ? r-1 : r][c].j_s                : '0;
      assign nb_w[2] = (HAS_N && HAS_E) ? w[HAS_N ? r-1 : r][HAS_E ? c+1 : c].j_sw : '0;
      assign nb_w[3] =  HAS_W           ? w[r][HAS_W ? c-1 : c].j_e                : '0;

      oim_pe u_pe (
        .clk         (clk),
        .rst_n       (rst_n),
        .shift_en    (shift_en),
        .scan_in     (chain[r*COLS + c]),
        .scan_out    (chain[r*COLS + c + 1]),
        .run         (run),
        .sync_enable (sync_enable),
        .mode        (mode),
        .fs_mag      (fs_mag),
        .h_shift     (h_shift),
        .nbr_phase   (nb_ph),
        .nbr_weight  (nb_w),
        .nbr_valid   (nb_v),
        .phase_o     (ph[r][c]),
        .weights_o   (w[r][c])
      );
    end
  end

endmodule
