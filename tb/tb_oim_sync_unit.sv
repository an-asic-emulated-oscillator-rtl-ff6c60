// tb_oim_sync_unit: every phase, both modes, sync on and off, several Fs
// magnitudes. Expected terms come from the Fs interval tables in
// tb_oim_ref_pkg. Also checks the stable points the terms create: just
// above a stable phase the term is positive (the phase is pushed down),
// just below it negative. Ends with the TB_RESULT line.
module tb_oim_sync_unit;
  import oim_pkg::*;
  import tb_oim_ref_pkg::*;

  logic        [7:0] phase;
  mode_e             mode;
  logic              sync_en;
  logic signed [7:0] mag, term;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  oim_sync_unit dut (.phase(phase), .mode(mode), .sync_enable(sync_en),
                     .fs_mag(mag), .term(term));

  initial begin
    repeat (100000) @(posedge clk);
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

  task automatic term_at(input int p, input bit potts, output int t);
    phase = 8'(p); mode = potts ? MODE_OPM : MODE_OIM; sync_en = 1; mag = 8'sd4;
    #1;
    t = int'(term);
  endtask

  initial begin
    int mags[4] = '{1, 4, 64, 127};
    for (int m = 0; m < 2; m++)
      foreach (mags[i])
        for (int s = 0; s < 2; s++)
          for (int p = 0; p < 256; p++) begin
            phase = 8'(p); mode = m ? MODE_OPM : MODE_OIM;
            sync_en = s[0]; mag = 8'(mags[i]);
            #1;
            check($sformatf("mode=%0d sync=%0d mag=%0d phase=%0d", m, s, mags[i], p),
                  int'(term), fs_term(p, m[0], s[0], mags[i]));
          end
    // stable points: Ising 0 and 128, Potts 0, 96 and 160
    begin
      int st2[2] = '{0, 128};
      int st3[3] = '{0, 96, 160};
      int t_up, t_dn;
      foreach (st2[i]) begin
        term_at((st2[i] + 1) % 256, 0, t_up);
        term_at((st2[i] + 255) % 256, 0, t_dn);
        check($sformatf("Ising stable point %0d", st2[i]), int'(t_up > 0 && t_dn < 0), 1);
      end
      foreach (st3[i]) begin
        term_at((st3[i] + 1) % 256, 1, t_up);
        term_at((st3[i] + 255) % 256, 1, t_dn);
        check($sformatf("Potts stable point %0d", st3[i]), int'(t_up > 0 && t_dn < 0), 1);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
