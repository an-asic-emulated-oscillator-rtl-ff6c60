// tb_oim_coupling_unit: exhaustive check of the coupling term over all
// phase pairs, for a spread of weights including the extremes.
// Expected values come from the interval definition of Fc in
// tb_oim_ref_pkg. Ends with the TB_RESULT line; a watchdog stops it.
module tb_oim_coupling_unit;
  import tb_oim_ref_pkg::*;

  logic        [7:0] ps, pn;
  logic signed [7:0] w, term;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  oim_coupling_unit dut (.phase_self(ps), .phase_nbr(pn), .weight(w), .term(term));

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int wl[6] = '{1, -1, 37, -100, 127, -128};
    foreach (wl[i]) begin
      for (int a = 0; a < 256; a++)
        for (int b = 0; b < 256; b += (i < 2 ? 1 : 7)) begin
          int exp_t;
          ps = 8'(a); pn = 8'(b); w = 8'(wl[i]);
          #1;
          exp_t = wrap8(wl[i] * fc(a, b));
          checks++;
          if (int'(term) != exp_t) begin
            failures++;
            if (failures < 10)
              $display("FAIL phi_i=%0d phi_j=%0d J=%0d term=%0d expected %0d",
                       a, b, wl[i], term, exp_t);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
