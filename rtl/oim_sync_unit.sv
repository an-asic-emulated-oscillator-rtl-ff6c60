// oim_sync_unit: the synchronization (sub-harmonic injection) term Fs that
// pulls each phase into one of N discrete states.
//
// Ising mode (N = 2) inspects bit W-2 of the phase: phases in [0, 1/4) and
// [1/2, 3/4) have it clear. Potts mode (N = 3) inspects the top three bits,
// i.e. which eighth of the cycle the phase is in, and gives each eighth the
// value the paper's three-state function takes at the eighth's centre:
// eighths 0..7 -> -1 +1 +1 -1 +1 -1 -1 +1. With three bits the switching
// points fall on 1/8, 3/8, 1/2, 5/8 and 7/8 instead of multiples of 1/6, so
// the Potts stable points become 0, 3/8 and 5/8 rather than 0, 1/3 and 2/3;
// the paper names this 3-bit quantization as the source of its lower
// colouring accuracy.
//
// Sign: the output is the term added into the coupling sum, which the PE
// multiplies by h and subtracts from the phase. The paper's piecewise Fs
// tables (-1 on [0, 1/4) for N = 2) combined with that subtraction would
// make 1/4 and 3/4 the stable points, while its text, its unit-circle figure
// and the sinusoidal Fs it approximates all put them at 0 and 1/2. This
// design keeps the stated stable points: the term is -Fs(table) * fs_mag.
// The size of one Fs unit relative to a weight LSB is not given in the
// paper and is the programmable fs_mag. The term is 0 while sync_enable is
// low (the settling period). Purely combinational.
module oim_sync_unit
  import oim_pkg::*;
#(
  parameter int unsigned W = DATA_W
) (
  input  logic        [W-1:0] phase,
  input  mode_e               mode,
  input  logic                sync_enable,
  input  logic signed [W-1:0] fs_mag,
  output logic signed [W-1:0] term
);

  logic fs_pos;   // 1 when the paper's Fs table gives +1

  always_comb begin
    if (mode == MODE_OIM) begin
      fs_pos = phase[W-2];
    end else begin
      unique case (phase[W-1 -: 3])
        3'd1, 3'd2, 3'd4, 3'd7: fs_pos = 1'b1;
        default:                fs_pos = 1'b0;
      endcase
    end

    if (!sync_enable) term = '0;
    else              term = fs_pos ? -fs_mag : fs_mag;
  end

endmodule
