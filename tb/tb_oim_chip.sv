// tb_oim_chip: end-to-end test of the machine on a 4 x 4 grid. Each test
// programs configuration, phases and weights through the single shift
// chain, starts a run, checks that busy lasts exactly the programmed number
// of iterations and that sync_o rises after the settling period, then reads
// the whole chain back out (by shifting the expected image in, which leaves
// the state unchanged) and compares it bit for bit with the reference
// model. Mechanisms exercised and counted: chain programming and readout,
// Ising and Potts modes and switching between them, the settling period and
// the switch-on of the synchronization term, wrap-around of the 8-bit
// coupling sum, a second run continuing from the previous phases, a run
// aborted by shifting, and a short-step (k = 0) run. A mechanism that never
// occurred counts as a failure.
module tb_oim_chip;
  import oim_pkg::*;
  import tb_oim_ref_pkg::*;

  localparam int R = 4, C = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic shift_en = 0, scan_in = 0, scan_out, start = 0, busy, done, sync_o;
  logic [15:0] iter;
  int checks = 0, failures = 0;
  int n_load = 0, n_readout = 0, n_oim = 0, n_opm = 0, n_mode_switch = 0;
  int n_sync_on = 0, n_wrap = 0, n_continue = 0, n_abort = 0, n_k0 = 0;
  bit last_potts = 0;

  oim_chip #(.ROWS(R), .COLS(C)) dut (
    .clk, .rst_n, .shift_en, .scan_in, .scan_out, .start, .busy, .done,
    .iter_o(iter), .sync_o);

  initial begin
    repeat (400000) @(posedge clk);
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

  function automatic void image(grid_model m, int total, int settle, ref bit q[$]);
    q = {};
    m.pe_stream(q);
    m.cfg_stream(q, total, settle);
  endfunction

  task automatic load(grid_model m, int total, int settle);
    bit q[$], o[$];
    image(m, total, settle, q);
    shift_stream(q, o);
    n_load++;
  endtask

  task automatic readout(grid_model m, int total, int settle, string what);
    bit q[$], o[$];
    image(m, total, settle, q);
    shift_stream(q, o);
    check({what, ": chain readout equals model"}, int'(o == q), 1);
    n_readout++;
  endtask

  // start, watch the run, advance the model the same way
  task automatic run_once(grid_model m, int total, int settle);
    int n_busy, n_sync, lat;
    bit sync_seen;
    start = 1; @(posedge clk); #1; start = 0;
    n_busy = 0; n_sync = 0; lat = 1; sync_seen = 0;
    while (!done && lat < total + 10) begin
      if (busy) n_busy++;
      if (sync_o) begin
        n_sync++;
        if (!sync_seen) begin
          check("first synchronized iteration", int'(iter), settle);
          sync_seen = 1;
        end
      end
      @(posedge clk); #1;
      lat++;
    end
    check("busy cycles = iterations", n_busy, total);
    check("sync cycles", n_sync, (settle >= total) ? 0 : total - settle);
    check("start-to-done latency", lat, total + 1);
    if (sync_seen && n_busy > n_sync) n_sync_on++;
    if (m.potts) n_opm++; else n_oim++;
    if (m.potts != last_potts) n_mode_switch++;
    last_potts = m.potts;
    begin
      int w0;
      w0 = m.wraps;
      m.run(total, settle);
      if (m.wraps > w0) n_wrap++;
    end
  endtask

  function automatic void randomize_model(grid_model m, int wmax);
    foreach (m.ph[r, c]) begin
      m.ph[r][c]  = int'($urandom_range(255));
      m.je[r][c]  = int'($urandom_range(2 * wmax)) - wmax;
      m.jsw[r][c] = int'($urandom_range(2 * wmax)) - wmax;
      m.js[r][c]  = int'($urandom_range(2 * wmax)) - wmax;
      m.jse[r][c] = int'($urandom_range(2 * wmax)) - wmax;
    end
  endfunction

  initial begin
    grid_model m;
    m = new(R, C);
    repeat (2) @(posedge clk);
    rst_n = 1; #1;
    check("idle after reset", int'(busy || done), 0);

    for (int t = 0; t < 8; t++) begin
      int total, settle;
      randomize_model(m, (t == 2) ? 60 : 12);     // t = 2: sums overflow
      m.potts = t[0];
      m.mag   = 10;
      m.k     = (t == 5) ? 0 : 3;
      if (m.k == 0) n_k0++;
      total  = 30 + 10 * t;
      settle = 12 + t;
      load(m, total, settle);
      run_once(m, total, settle);
      readout(m, total, settle, $sformatf("test %0d", t));
      if (t == 3) begin
        // run again from where the phases ended
        run_once(m, total, settle);
        readout(m, total, settle, "continued run");
        n_continue++;
      end
    end

    // abort: shift in the middle of a run
    begin
      int done_steps;
      randomize_model(m, 12);
      m.potts = 0; m.mag = 10; m.k = 3;
      load(m, 80, 20);
      start = 1; @(posedge clk); #1; start = 0;
      done_steps = 0;
      repeat (25) begin
        if (busy) done_steps++;
        @(posedge clk); #1;
      end
      m.run(done_steps, 20);
      readout(m, 80, 20, "aborted run");
      check("not busy after abort", int'(busy), 0);
      n_abort++;
    end

    $display("mechanisms: load=%0d readout=%0d oim=%0d opm=%0d mode_switch=%0d sync_on=%0d wrap=%0d continue=%0d abort=%0d k0=%0d",
             n_load, n_readout, n_oim, n_opm, n_mode_switch, n_sync_on, n_wrap, n_continue, n_abort, n_k0);
    check("mechanism: chain load",      int'(n_load > 0), 1);
    check("mechanism: chain readout",   int'(n_readout > 0), 1);
    check("mechanism: Ising mode",      int'(n_oim > 0), 1);
    check("mechanism: Potts mode",      int'(n_opm > 0), 1);
    check("mechanism: mode switch",     int'(n_mode_switch > 0), 1);
    check("mechanism: sync switch-on",  int'(n_sync_on > 0), 1);
    check("mechanism: 8-bit sum wrap",  int'(n_wrap > 0), 1);
    check("mechanism: continued run",   int'(n_continue > 0), 1);
    check("mechanism: abort by shift",  int'(n_abort > 0), 1);
    check("mechanism: k = 0 step",      int'(n_k0 > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
