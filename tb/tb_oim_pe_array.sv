// tb_oim_pe_array: a 4 x 5 grid (small enough to check every PE every
// cycle). Random phases and weights are loaded through the chain; then the
// array runs Forward Euler iterations, in both modes and with the
// synchronization term off and on, and after each cycle every phase is
// compared with the king's-graph reference model, which looks every edge
// weight up from the PE that owns it and gives edge and corner PEs only
// their existing neighbours. Finally the chain is read out and compared.
module tb_oim_pe_array;
  import oim_pkg::*;
  import tb_oim_ref_pkg::*;

  localparam int R = 4, C = 5;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic shift_en = 0, scan_in = 0, scan_out;
  logic run = 0, sync_en = 0;
  mode_e mode = MODE_OIM;
  logic signed [7:0] mag = 8'sd6;
  logic [2:0] k = 3'd1;
  logic [R-1:0][C-1:0][7:0] phase;
  int checks = 0, failures = 0;

  oim_pe_array #(.ROWS(R), .COLS(C)) dut (
    .clk, .rst_n, .shift_en, .scan_in, .scan_out, .run,
    .sync_enable(sync_en), .mode, .fs_mag(mag), .h_shift(k), .phase_o(phase));

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

  task automatic shift_stream(input bit q[$], output bit outq[$]);
    outq = {};
    foreach (q[i]) begin
      scan_in = q[i]; shift_en = 1;
      #1 outq.push_back(scan_out);
      @(posedge clk); #1;
    end
    shift_en = 0;
  endtask

  initial begin
    grid_model m;
    bit q[$], outq[$], img[$];
    m = new(R, C);
    repeat (2) @(posedge clk);
    rst_n = 1; #1;

    for (int pass = 0; pass < 4; pass++) begin
      foreach (m.ph[r, c]) begin
        m.ph[r][c]  = int'($urandom_range(255));
        m.je[r][c]  = int'($urandom_range(24)) - 12;
        m.jsw[r][c] = int'($urandom_range(24)) - 12;
        m.js[r][c]  = int'($urandom_range(24)) - 12;
        m.jse[r][c] = int'($urandom_range(24)) - 12;
      end
      q = {};
      m.pe_stream(q);
      shift_stream(q, outq);
      foreach (m.ph[r, c]) check("loaded phase", int'(phase[r][c]), m.ph[r][c]);

      m.build_wtab();
      m.potts = pass[0];  mode = pass[0] ? MODE_OPM : MODE_OIM;
      m.k = pass / 2 + 1; k = 3'(pass / 2 + 1);
      m.mag = int'(mag);
      for (int it = 0; it < 40; it++) begin
        sync_en = (it >= 15);
        run = 1;
        @(posedge clk); #1;
        m.step(sync_en);
        foreach (m.ph[r, c])
          check($sformatf("pass %0d iter %0d PE(%0d,%0d)", pass, it, r, c),
                int'(phase[r][c]), m.ph[r][c]);
      end
      run = 0;
      // read out: chain image must match the model
      img = {};
      m.pe_stream(img);
      shift_stream(img, outq);
      check("readout matches model", int'(outq == img), 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
