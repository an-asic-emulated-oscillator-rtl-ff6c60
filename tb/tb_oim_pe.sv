// tb_oim_pe: one PE. Loads the phase and the four owned weights through the
// shift chain and checks they come back out of scan_out unchanged, then
// drives random neighbour phases and neighbour-owned weights and checks that
// every cycle with run high performs exactly one Forward Euler step of the
// reference model (single-cycle latency), and that the phase holds with run
// low. Covers both modes, sync on/off and all step sizes.
module tb_oim_pe;
  import oim_pkg::*;
  import tb_oim_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                  shift_en = 0, scan_in = 0, scan_out;
  logic                  run = 0, sync_en = 0;
  mode_e                 mode = MODE_OIM;
  logic signed [7:0]     mag = 8'sd4;
  logic [2:0]            k = 3'd2;
  logic [7:0][7:0]       nbr_phase = '0;
  logic signed [3:0][7:0] nbr_w = '0;
  logic [7:0]            phase;
  logic [7:0]            valid = '1;
  pe_weights_t           wts;
  int checks = 0, failures = 0;

  oim_pe dut (.clk, .rst_n, .shift_en, .scan_in, .scan_out, .run,
              .sync_enable(sync_en), .mode, .fs_mag(mag), .h_shift(k),
              .nbr_phase, .nbr_weight(nbr_w), .nbr_valid(valid), .phase_o(phase), .weights_o(wts));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, int got, int exp_v);
    checks++;
    if (got != exp_v) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp_v);
    end
  endtask

  // shift 40 bits in (MSB first) while collecting what falls out
  task automatic shift40(input logic [39:0] din, output logic [39:0] dout);
    for (int b = 39; b >= 0; b--) begin
      scan_in  = din[b];
      shift_en = 1;
      #1 dout[b] = scan_out;
      @(posedge clk); #1;
    end
    shift_en = 0;
  endtask

  initial begin
    logic [39:0] img, img2, outb;
    int own[4];
    int nb[8], w[8], exp_p;
    repeat (2) @(posedge clk);
    rst_n = 1; #1;
    check("phase after reset", int'(phase), 0);

    for (int trial = 0; trial < 300; trial++) begin
      // program: phase, j_e, j_sw, j_s, j_se
      img = {$urandom, 8'($urandom)};
      for (int i = 0; i < 4; i++) begin
        own[i] = int'($urandom_range(40)) - 20;
        img[31 - 8*i -: 8] = 8'(own[i]);
      end
      shift40(img, outb);
      check("phase loaded", int'(phase), int'(img[39:32]));
      check("j_e loaded",  int'(wts.j_e),  own[0]);
      check("j_se loaded", int'(wts.j_se), own[3]);
      // read back: the previous image must come out
      img2 = img;
      shift40(img2, outb);
      check("scan readback", int'(outb == img), 1);

      mode    = (trial % 2) ? MODE_OPM : MODE_OIM;
      sync_en = (trial % 3) != 0;
      k       = 3'($urandom_range(7));
      mag     = 8'($urandom_range(20));
      for (int step = 0; step < 4; step++) begin
        for (int i = 0; i < 8; i++) nbr_phase[i] = 8'($urandom);
        for (int i = 0; i < 4; i++) nbr_w[i] = 8'(int'($urandom_range(40)) - 20);
        // weight order NW N NE W (neighbours) E SW S SE (own)
        for (int i = 0; i < 8; i++) nb[i] = int'(nbr_phase[i]);
        for (int i = 0; i < 4; i++) w[i] = int'(nbr_w[i]);
        for (int i = 0; i < 4; i++) w[4 + i] = own[i];
        // now and then a PE on the edge of the grid: missing neighbours
        valid = (step == 3) ? 8'($urandom) : 8'hFF;
        for (int i = 0; i < 8; i++) if (!valid[i]) w[i] = 0;
        exp_p = next_phase(int'(phase), nb, w, mode == MODE_OPM, sync_en,
                           int'(mag), int'(k));
        // run low: phase must hold
        run = 0;
        begin
          int prev_ph;
          prev_ph = int'(phase);
          @(posedge clk); #1;
          check("hold with run low", int'(phase), prev_ph);
        end
        run = 1;
        @(posedge clk); #1;
        run = 0;
        check($sformatf("step trial %0d mode %0d sync %0d k %0d", trial, mode, sync_en, k),
              int'(phase), exp_p);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
