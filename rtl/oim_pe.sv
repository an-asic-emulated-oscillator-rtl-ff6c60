// oim_pe: one processing element, emulating one oscillator.
//
// The PE holds its 8-bit phase and the four 8-bit coupling weights it owns
// (its E, SW, S and SE edges). The weights of its other four edges come from
// the neighbours that own them (the NW neighbour's SE weight, the N
// neighbour's S weight, the NE neighbour's SW weight and the W neighbour's E
// weight), so each weight of the symmetric coupling matrix is stored once.
// Each enabled clock cycle performs one Forward Euler iteration of
// Algorithm 1 in the single-cycle datapath of the paper's PE figure:
//   eight coupling units  (subtractor, Fc, sgn)     -> 8 subtractors
//   adder tree 4-2-1 plus the Fs adder               -> 8 adders
//   barrel shifter (>>> k, h = 2^-k)
//   phase update phi <- phi - (sum >>> k)            -> 1 adder/subtractor
// which is the paper's count of 17 8-bit adder/subtractors.
//
// Programming: with shift_en high the phase and the four weights form one
// 40-bit shift register (phase first, then j_e, j_sw, j_s, j_se, MSB first),
// entered at scan_in and left at scan_out, MSB end. Shifting has priority
// over run. A serial chain is how this design realises the paper's
// "shift-register interface"; its order and bit layout are this design's
// choice, as is the synchronous active-low reset to all zeros.
//
// Timing: phase_o changes one clock edge after a cycle with run high.
// Edge and corner PEs have fewer neighbours: nbr_valid, tied off by the
// array, forces the weight of a missing neighbour to zero, so that a weight
// left in an unused register (e.g. j_e of the last column) has no effect.
module oim_pe
  import oim_pkg::*;
#(
  parameter int unsigned W = DATA_W
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // programming chain
  input  logic                          shift_en,
  input  logic                          scan_in,
  output logic                          scan_out,
  // run control and configuration, shared by all PEs
  input  logic                          run,
  input  logic                          sync_enable,
  input  mode_e                         mode,
  input  logic signed [W-1:0]           fs_mag,
  input  logic        [SH_W-1:0]        h_shift,
  // neighbour interconnect, order NW N NE W E SW S SE (see nbr_e)
  input  logic        [NNBR-1:0][W-1:0] nbr_phase,
  // weights owned by the NW, N, NE and W neighbours, in that order
  input  logic signed [3:0][W-1:0]      nbr_weight,
  // 1 where the neighbour exists (0 off the edge of the grid)
  input  logic        [NNBR-1:0]        nbr_valid,
  output logic        [W-1:0]           phase_o,
  output pe_weights_t                   weights_o
);

  pe_regs_t regs;

  logic signed [NNBR-1:0][W-1:0] w_raw;
  logic signed [NNBR-1:0][W-1:0] w_all;
  logic signed [NNBR-1:0][W-1:0] terms;
  logic signed [W-1:0]           fs_term;
  logic signed [W-1:0]           sum;
  logic signed [W-1:0]           delta;
  logic        [W-1:0]           phase_next;

  always_comb begin
    w_raw[NB_NW] = nbr_weight[0];
    w_raw[NB_N]  = nbr_weight[1];
    w_raw[NB_NE] = nbr_weight[2];
    w_raw[NB_W]  = nbr_weight[3];
    w_raw[NB_E]  = regs.w.j_e;
    w_raw[NB_SW] = regs.w.j_sw;
    w_raw[NB_S]  = regs.w.j_s;
    w_raw[NB_SE] = regs.w.j_se;
    for (int k = 0; k < NNBR; k++) w_all[k] = nbr_valid[k] ? w_raw[k] : '0;
  end

  for (genvar k = 0; k < NNBR; k++) begin : g_cpl
    oim_coupling_unit #(.W(W)) u_cpl (
      .phase_self (regs.phase),
      .phase_nbr  (nbr_phase[k]),
      .weight     (w_all[k]),
      .term       (terms[k])
    );
  end

  oim_sync_unit #(.W(W)) u_fs (
    .phase       (regs.phase),
    .mode        (mode),
    .sync_enable (sync_enable),
    .fs_mag      (fs_mag),
    .term        (fs_term)
  );

  oim_adder_tree #(.W(W)) u_tree (
    .terms   (terms),
    .fs_term (fs_term),
    .sum     (sum)
  );

  oim_barrel_shifter #(.W(W), .SHAMT_W(SH_W)) u_shift (
    .din   (sum),
    .shamt (h_shift),
    .dout  (delta)
  );

  assign phase_next = regs.phase - delta;

  always_ff @(posedge clk) begin
    if (!rst_n)        regs <= '0;
    else if (shift_en) regs <= pe_regs_t'({regs[PE_REGS_W-2:0], scan_in});
    else if (run)      regs.phase <= phase_next;
  end

  assign scan_out  = regs[PE_REGS_W-1];
  assign phase_o   = regs.phase;
  assign weights_o = regs.w;

endmodule
