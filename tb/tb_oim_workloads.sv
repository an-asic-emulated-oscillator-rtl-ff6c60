// tb_oim_workloads: repeated runs of the three 400-node workloads on the
// full 20 x 20 machine at its default parameters, the way the machine is
// meant to be used: each run shifts in the problem with fresh random
// initial phases while shifting out the previous run's result, then runs
// 1000 iterations. RUNS runs are made
// per problem (unweighted king's-graph max-cut and weighted max-cut in Ising
// mode, 3-colouring in Potts mode). Every run is checked bit for bit against
// the reference model and for its length; the accuracy statistics (mean,
// standard deviation, minimum, maximum) are printed. Max-cut accuracy is the
// cut weight over the best cut known: the larger of the column-stripe cut
// and the best cut seen in any run. Colouring accuracy is the fraction of
// edges whose ends get different colours. The weighted problem draws real
// weights in (0, 1] and quantizes them to integers 1..14, the largest range
// whose coupling sums fit the 8-bit adders.
module tb_oim_workloads;
  import oim_pkg::*;
  import tb_oim_ref_pkg::*;

  localparam int R = 20, C = 20;
  localparam int TOTAL = 1000, SETTLE = 500;
  localparam int JU = 12;       // weight of a unit edge, in weight LSBs
  localparam int RUNS = 100;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic shift_en = 0, scan_in = 0, scan_out, start = 0, busy, done, sync_o;
  logic [15:0] iter;
  int checks = 0, failures = 0;

  oim_chip dut (.clk, .rst_n, .shift_en, .scan_in, .scan_out, .start, .busy,
                .done, .iter_o(iter), .sync_o);

  initial begin
    repeat (40000000) @(posedge clk);
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

  // drive at the falling edge, where scan_out is stable
  task automatic shift_stream(input bit q[$], output bit outq[$]);
    outq = {};
    foreach (q[i]) begin
      @(negedge clk);
      scan_in = q[i]; shift_en = 1;
      outq.push_back(scan_out);
    end
    @(negedge clk);
    shift_en = 0;
  endtask

  // Expected chain image after the previous run, compared while the next
  // problem is shifted in (readout and loading share the same shifts).
  bit expect_q[$];
  bit have_expect = 0;

  task automatic compare_out(input bit o[$], input string name);
    if (have_expect) check({name, ": previous final state equals model"}, int'(o == expect_q), 1);
    have_expect = 0;
  endtask

  task automatic run_problem(grid_model m, string name);
    bit q[$], o[$];
    int n_busy, lat;
    q = {};
    m.pe_stream(q);
    m.cfg_stream(q, TOTAL, SETTLE);
    shift_stream(q, o);
    compare_out(o, name);
    start = 1; @(posedge clk); #1; start = 0;
    n_busy = 0; lat = 1;
    while (!done && lat < TOTAL + 10) begin
      if (busy) n_busy++;
      @(posedge clk); #1;
      lat++;
    end
    check({name, ": iterations"}, n_busy, TOTAL);
    m.run(TOTAL, SETTLE);
    expect_q = {};
    m.pe_stream(expect_q);
    m.cfg_stream(expect_q, TOTAL, SETTLE);
    have_expect = 1;
  endtask

  // edge list helpers: the four owned directions E, SW, S, SE
  int dr4[4] = '{0, 1, 1, 1};
  int dc4[4] = '{1, -1, 0, 1};

  function automatic void set_owned(grid_model m, int r, int c, int d, int v);
    case (d)
      0: m.je[r][c] = v;
      1: m.jsw[r][c] = v;
      2: m.js[r][c] = v;
      default: m.jse[r][c] = v;
    endcase
  endfunction

  initial begin
    grid_model m;
    int wt [R][C][4];
    int col [R][C];
    m = new(R, C);
    repeat (2) @(posedge clk);
    rst_n = 1; #1;

    for (int prob = 0; prob < 3; prob++) begin
      string name;
      real acc [RUNS];
      int score [RUNS];
      int best, ref_cut, edges;
      real mean, sd, mn, mx;
      name = (prob == 0) ? "unweighted max-cut" : (prob == 1) ? "weighted max-cut" : "3-colouring";
      foreach (col[r, c]) col[r][c] = int'($urandom_range(2));
      foreach (wt[r, c, d]) begin
        if (!m.inside_grid(r + dr4[d], c + dc4[d])) wt[r][c][d] = 0;
        else if (prob == 0) wt[r][c][d] = 1;
        else if (prob == 1) begin
          real x;
          x = real'($urandom_range(1, 1000000)) / 1000000.0;
          wt[r][c][d] = (x * 14.0 < 1.0) ? 1 : int'($floor(x * 14.0 + 0.5));
        end
        else wt[r][c][d] = (col[r][c] != col[r + dr4[d]][c + dc4[d]] &&
                            $urandom_range(99) < 70) ? 1 : 0;
      end
      ref_cut = 0; edges = 0;
      foreach (wt[r, c, d]) if (wt[r][c][d] != 0) begin
        edges++;
        if ((c % 2) != ((c + dc4[d]) % 2)) ref_cut += wt[r][c][d];
      end
      best = ref_cut;
      for (int run = 0; run < RUNS; run++) begin
        int sc;
        foreach (m.ph[r, c]) begin
          m.ph[r][c] = int'($urandom_range(255));
          for (int d = 0; d < 4; d++)
            set_owned(m, r, c, d, (prob == 0) ? -JU * wt[r][c][d] :
                                  (prob == 1) ? -wt[r][c][d] : -JU * wt[r][c][d]);
        end
        m.potts = (prob == 2);
        m.mag   = (prob == 1) ? 8 : JU;
        m.k     = 3;
        run_problem(m, $sformatf("%s run %0d", name, run));
        sc = 0;
        foreach (wt[r, c, d]) if (wt[r][c][d] != 0) begin
          if (prob < 2) begin
            if (m.spin(r, c) != m.spin(r + dr4[d], c + dc4[d])) sc += wt[r][c][d];
          end else begin
            if (m.colour(r, c) != m.colour(r + dr4[d], c + dc4[d])) sc++;
          end
        end
        score[run] = sc;
        if (prob < 2 && sc > best) best = sc;
      end
      foreach (score[i]) acc[i] = 100.0 * score[i] / ((prob < 2) ? best : edges);
      mean = 0; mn = 1000; mx = 0;
      foreach (acc[i]) begin
        mean += acc[i];
        if (acc[i] < mn) mn = acc[i];
        if (acc[i] > mx) mx = acc[i];
      end
      mean /= RUNS;
      sd = 0;
      foreach (acc[i]) sd += (acc[i] - mean) * (acc[i] - mean);
      sd = $sqrt(sd / RUNS);
      $display("%s over %0d runs: mean %0.2f%%, std %0.2f%%, min %0.2f%%, max %0.2f%% (reference %0d)",
               name, RUNS, mean, sd, mn, mx, (prob < 2) ? best : edges);
    end
    // read out the last run
    begin
      bit q[$], o[$];
      q = expect_q;
      shift_stream(q, o);
      compare_out(o, "last run");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
