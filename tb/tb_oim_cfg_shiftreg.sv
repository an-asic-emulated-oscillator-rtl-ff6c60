// tb_oim_cfg_shiftreg: checks the reset configuration, then shifts random
// configuration words in MSB first and checks every field and the bits that
// fall out of scan_out (the previous word, MSB first), and that the word
// holds while shift_en is low.
module tb_oim_cfg_shiftreg;
  import oim_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic shift_en = 0, scan_in = 0, scan_out;
  cfg_t cfg;
  int checks = 0, failures = 0;

  oim_cfg_shiftreg dut (.clk, .rst_n, .shift_en, .scan_in, .scan_out, .cfg_o(cfg));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, longint got, longint exp_v);
    checks++;
    if (got != exp_v) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp_v);
    end
  endtask

  initial begin
    logic [43:0] prev, word, outw;
    repeat (2) @(posedge clk);
    rst_n = 1; #1;
    check("reset total_iters", cfg.total_iters, 1000);
    check("reset h_shift", cfg.h_shift, 6);
    check("reset mode", cfg.mode, 0);
    check("reset settle_iters", cfg.settle_iters, 500);
    check("reset fs_mag", cfg.fs_mag, 8);
    prev = {16'd1000, 16'd500, 8'd8, 3'd6, 1'b0};
    for (int n = 0; n < 50; n++) begin
      word = {$urandom, 12'($urandom)};
      for (int b = 43; b >= 0; b--) begin
        scan_in = word[b]; shift_en = 1;
        #1 outw[b] = scan_out;
        @(posedge clk); #1;
      end
      shift_en = 0;
      check("shifted-out word", outw, prev);
      check("total_iters",  cfg.total_iters,  word[43:28]);
      check("settle_iters", cfg.settle_iters, word[27:12]);
      check("fs_mag",       longint'($unsigned(cfg.fs_mag)),       word[11:4]);
      check("h_shift",      cfg.h_shift,      word[3:1]);
      check("mode",         cfg.mode,         word[0]);
      scan_in = ~scan_in;
      repeat (3) @(posedge clk); #1;
      check("hold", cfg, word);
      prev = word;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
