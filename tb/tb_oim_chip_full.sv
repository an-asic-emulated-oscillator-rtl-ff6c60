// tb_oim_chip_full: the full 20 x 20 machine at its default parameters,
// running the three kinds of 400-node problem the design targets, each for
// 1000 Forward Euler iterations from random initial phases:
//   1. unweighted max-cut on the king's graph (Ising mode),
//   2. weighted max-cut on the king's graph with random 8-bit-quantized
//      weights (Ising mode),
//   3. 3-colouring of a random 3-colourable subgraph of the king's graph
//      (Potts mode).
// Every problem is programmed through the shift chain; the run length is
// checked (1000 busy cycles, i.e. 5 us at 200 MHz) and the final chain
// contents are compared bit for bit with the reference model. The solution
// quality is printed for information (cut weight against the stripe
// pattern's cut / total edge weight, fraction of properly coloured edges).
// Max-cut uses antiferromagnetic couplings J = -w * JU so that the phases
// of connected oscillators repel.
module tb_oim_chip_full;
  import oim_pkg::*;
  import tb_oim_ref_pkg::*;

  localparam int R = 20, C = 20;
  localparam int TOTAL = 1000, SETTLE = 500;
  localparam int JU = 12;       // weight of a unit edge, in weight LSBs

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic shift_en = 0, scan_in = 0, scan_out, start = 0, busy, done, sync_o;
  logic [15:0] iter;
  int checks = 0, failures = 0;

  oim_chip dut (.clk, .rst_n, .shift_en, .scan_in, .scan_out, .start, .busy,
                .done, .iter_o(iter), .sync_o);

  initial begin
    repeat (2000000) @(posedge clk);
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

  task automatic run_problem(grid_model m, string name);
    bit q[$], o[$];
    int n_busy, lat;
    q = {};
    m.pe_stream(q);
    m.cfg_stream(q, TOTAL, SETTLE);
    shift_stream(q, o);
    start = 1; @(posedge clk); #1; start = 0;
    n_busy = 0; lat = 1;
    while (!done && lat < TOTAL + 10) begin
      if (busy) n_busy++;
      @(posedge clk); #1;
      lat++;
    end
    check({name, ": iterations"}, n_busy, TOTAL);
    m.run(TOTAL, SETTLE);
    q = {};
    m.pe_stream(q);
    m.cfg_stream(q, TOTAL, SETTLE);
    shift_stream(q, o);
    check({name, ": final state equals model"}, int'(o == q), 1);
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
    int wt [R][C][4];    // edge weights of the problem (0: no edge)
    int col [R][C];      // hidden colouring of the colouring problem
    m = new(R, C);
    repeat (2) @(posedge clk);
    rst_n = 1; #1;

    for (int prob = 0; prob < 3; prob++) begin
      string name;
      int cut, tot, ref_cut, good, edges;
      name = (prob == 0) ? "unweighted max-cut" : (prob == 1) ? "weighted max-cut" : "3-colouring";
      foreach (col[r, c]) col[r][c] = int'($urandom_range(2));
      foreach (wt[r, c, d]) begin
        if (!m.inside_grid(r + dr4[d], c + dc4[d])) wt[r][c][d] = 0;
        else if (prob == 0) wt[r][c][d] = 1;
        else if (prob == 1) wt[r][c][d] = int'($urandom_range(1, 8));
        else wt[r][c][d] = (col[r][c] != col[r + dr4[d]][c + dc4[d]] &&
                            $urandom_range(99) < 70) ? 1 : 0;
      end
      foreach (m.ph[r, c]) begin
        m.ph[r][c] = int'($urandom_range(255));
        for (int d = 0; d < 4; d++)
          set_owned(m, r, c, d, (prob == 1) ? -wt[r][c][d] : -JU * wt[r][c][d]);
      end
      m.potts = (prob == 2);
      m.mag   = (prob == 1) ? 8 : JU;
      m.k     = 3;
      run_problem(m, name);

      cut = 0; tot = 0; ref_cut = 0; good = 0; edges = 0;
      foreach (wt[r, c, d]) if (wt[r][c][d] != 0) begin
        int r2, c2;
        r2 = r + dr4[d]; c2 = c + dc4[d];
        tot += wt[r][c][d];
        if (m.spin(r, c) != m.spin(r2, c2)) cut += wt[r][c][d];
        if ((c % 2) != (c2 % 2)) ref_cut += wt[r][c][d];
        edges++;
        if (m.colour(r, c) != m.colour(r2, c2)) good++;
      end
      if (prob < 2)
        $display("%s: cut %0d, column-stripe cut %0d, total weight %0d (%0.2f%% of stripe cut)",
                 name, cut, ref_cut, tot, 100.0 * cut / ref_cut);
      else
        $display("%s: %0d of %0d edges properly coloured (%0.2f%%)",
                 name, good, edges, 100.0 * good / edges);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
