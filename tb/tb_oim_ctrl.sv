// tb_oim_ctrl: run controller. For a set of (total, settle) pairs, counts
// the cycles with run high (must equal total: one Forward Euler iteration
// per cycle), the cycles with sync_enable high (total - settle, all after
// the settling period), the start-to-done latency (total + 1 cycles),
// that a start during a run is ignored, that shift_en aborts a run, and
// that a zero-length run finishes at once.
module tb_oim_ctrl;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, shift_en = 0;
  logic [15:0] total = 0, settle = 0, iter;
  logic run, sync_en, busy, done;
  int checks = 0, failures = 0;

  oim_ctrl dut (.clk, .rst_n, .start, .shift_en, .total_iters(total),
                .settle_iters(settle), .run, .sync_enable(sync_en), .busy,
                .done, .iter_o(iter));

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

  task automatic do_run(input int t, input int s, input bit restart_midway);
    int n_run, n_sync, lat, first_sync, idx;
    total = 16'(t); settle = 16'(s);
    @(posedge clk); #1;
    start = 1;
    @(posedge clk); #1;
    start = 0;
    n_run = 0; n_sync = 0; lat = 1; first_sync = -1; idx = 0;
    while (!done && lat < t + 10) begin
      if (run) begin
        check("iteration index", int'(iter), idx);
        n_run++;
        if (sync_en) begin
          n_sync++;
          if (first_sync < 0) first_sync = idx;
        end
        idx++;
      end
      if (restart_midway && lat == t / 2) start = 1;
      @(posedge clk); #1;
      start = 0;
      lat++;
    end
    check($sformatf("run cycles (total %0d)", t), n_run, t);
    check($sformatf("sync cycles (total %0d settle %0d)", t, s), n_sync, (s >= t) ? 0 : t - s);
    if (s < t) check("first sync iteration", first_sync, s);
    check("start-to-done latency", lat, t + 1);
    check("done", int'(done), 1);
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1; #1;
    check("idle after reset", int'(busy || done), 0);
    do_run(10, 4, 0);
    do_run(1000, 500, 0);
    do_run(7, 0, 0);
    do_run(5, 9, 0);
    do_run(20, 3, 1);   // start during the run is ignored
    for (int n = 0; n < 20; n++) do_run(int'($urandom_range(1, 60)), int'($urandom_range(0, 70)), n[0]);
    // zero-length run
    total = 0;
    start = 1; @(posedge clk); #1; start = 0;
    check("zero-length run done", int'(done && !run), 1);
    // abort
    total = 100; settle = 10;
    start = 1; @(posedge clk); #1; start = 0;
    repeat (30) @(posedge clk); #1;
    check("running before abort", int'(run), 1);
    shift_en = 1; @(posedge clk); #1; shift_en = 0;
    check("aborted run stopped", int'(run || done), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
