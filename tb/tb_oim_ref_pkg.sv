// tb_oim_ref_pkg: reference model of the emulated oscillator Ising/Potts
// machine, written from the equations rather than from the RTL.
//
// Phases are kept as integers 0..255 standing for p/256 of a cycle; Fc and
// Fs are evaluated from their interval
// definitions (Fc: +1 on [0, 0.5); Fs for N = 2: -1 where phi mod 0.5 lies in
// [0, 0.25); Fs for N = 3: the three-state table evaluated at the centre of
// the phase's eighth). The coupling sum is wrapped to 8-bit two's
// complement, the step h = 2^-k rounds toward minus infinity, and the
// synchronization term enters with the sign that makes 0 and 1/2 (0, 3/8,
// 5/8 for N = 3) stable. The grid model also produces and decodes the
// programming bit stream of the chip.
package tb_oim_ref_pkg;

  function automatic int wrap8(int v);
    int m;
    m = ((v % 256) + 256) % 256;
    return (m >= 128) ? m - 256 : m;
  endfunction

  // psi = (phi_i - phi_j) mod 1, in 1/256 units; +1 when psi < 1/2
  function automatic int fc(int pi, int pj);
    int psi;
    psi = ((pi - pj) % 256 + 256) % 256;
    return (psi < 128) ? 1 : -1;
  endfunction

  // Value of the paper's Fs table (+1 or -1).
  function automatic int fs_table(int p, bit potts);
    real phi, m;
    phi = real'(p) / 256.0;
    if (!potts) begin
      m = (phi >= 0.5) ? phi - 0.5 : phi;
      return (m < 0.25) ? -1 : 1;
    end else begin
      phi = (real'(p / 32) + 0.5) / 8.0;   // centre of the eighth
      if (phi < 1.0/6.0)      return -1;
      else if (phi < 1.0/3.0) return  1;
      else if (phi < 0.5)     return -1;
      else if (phi < 2.0/3.0) return  1;
      else if (phi < 5.0/6.0) return -1;
      else                    return  1;
    end
  endfunction

  // Term the sync unit adds to the coupling sum.
  function automatic int fs_term(int p, bit potts, bit sync_en, int mag);
    if (!sync_en) return 0;
    return wrap8(-fs_table(p, potts) * mag);
  endfunction

  function automatic int shr_floor(int v, int k);
    int d;
    d = 1 << k;
    if (v >= 0) return v / d;
    return -((-v + d - 1) / d);
  endfunction

  // One Forward Euler step of one oscillator; nb/w hold 8 neighbours.
  function automatic int next_phase(int p, int nb[8], int w[8], bit potts,
                                    bit sync_en, int mag, int k);
    int sum;
    sum = 0;
    for (int i = 0; i < 8; i++) sum += w[i] * fc(p, nb[i]);
    sum += fs_term(p, potts, sync_en, mag);
    sum = wrap8(sum);
    return (((p - shr_floor(sum, k)) % 256) + 256) % 256;
  endfunction

  // ROWS x COLS king's-graph machine.
  class grid_model;
    int rows, cols;
    int ph  [][];
    int je  [][];   // weights each PE owns: E, SW, S, SE
    int jsw [][];
    int js  [][];
    int jse [][];
    bit potts;
    int mag, k;
    int wraps;      // coupling sums that left the 8-bit range

    function new(int r, int c);
      rows = r; cols = c;
      ph = new[r]; je = new[r]; jsw = new[r]; js = new[r]; jse = new[r];
      foreach (ph[i]) begin
        ph[i] = new[c]; je[i] = new[c]; jsw[i] = new[c];
        js[i] = new[c]; jse[i] = new[c];
      end
      wraps = 0;
    endfunction

    function bit inside_grid(int r, int c);
      return r >= 0 && r < rows && c >= 0 && c < cols;
    endfunction

    // Weight of the edge between (r,c) and (r+dr, c+dc), from its owner.
    function int weight(int r, int c, int dr, int dc);
      int orr, oc, odr, odc;
      if (!inside_grid(r + dr, c + dc)) return 0;
      // the owner is the upper (or, in the same row, the left) end
      if (dr > 0 || (dr == 0 && dc > 0)) begin
        orr = r; oc = c; odr = dr; odc = dc;
      end else begin
        orr = r + dr; oc = c + dc; odr = -dr; odc = -dc;
      end
      if (odr == 0 && odc == 1)  return je[orr][oc];
      if (odr == 1 && odc == -1) return jsw[orr][oc];
      if (odr == 1 && odc == 0)  return js[orr][oc];
      return jse[orr][oc];
    endfunction

    // weight table of every PE's 8 neighbours; build_wtab() must be called
    // after the weights change (run() does it)
    int wtab [][][8];

    function void build_wtab();
      int dr[8] = '{-1, -1, -1, 0, 0, 1, 1, 1};
      int dc[8] = '{-1, 0, 1, -1, 1, -1, 0, 1};
      wtab = new[rows];
      foreach (wtab[r]) begin
        wtab[r] = new[cols];
        for (int c = 0; c < cols; c++)
          for (int i = 0; i < 8; i++) wtab[r][c][i] = weight(r, c, dr[i], dc[i]);
      end
    endfunction

    function void step(bit sync_en);
      int nxt [][];
      int nb[8], w[8];
      int dr[8] = '{-1, -1, -1, 0, 0, 1, 1, 1};
      int dc[8] = '{-1, 0, 1, -1, 1, -1, 0, 1};
      int raw;
      nxt = new[rows];
      foreach (nxt[r]) nxt[r] = new[cols];
      for (int r = 0; r < rows; r++)
        for (int c = 0; c < cols; c++) begin
          raw = 0;
          for (int i = 0; i < 8; i++) begin
            nb[i] = inside_grid(r + dr[i], c + dc[i]) ? ph[r + dr[i]][c + dc[i]] : 0;
            w[i]  = wtab[r][c][i];
            raw  += w[i] * fc(ph[r][c], nb[i]);
          end
          raw += fs_term(ph[r][c], potts, sync_en, mag);
          if (raw > 127 || raw < -128) wraps++;
          nxt[r][c] = next_phase(ph[r][c], nb, w, potts, sync_en, mag, k);
        end
      ph = nxt;
    endfunction

    // Append v as n bits, MSB first.
    static function void push_bits(ref bit q[$], input int v, input int n);
      for (int b = n - 1; b >= 0; b--) q.push_back(v[b]);
    endfunction

    // Chain image of the PEs: PE (rows-1, cols-1) first, each
    // {phase, j_e, j_sw, j_s, j_se} MSB first.
    function void pe_stream(ref bit q[$]);
      for (int i = rows * cols - 1; i >= 0; i--) begin
        int r, c;
        r = i / cols; c = i % cols;
        push_bits(q, ph[r][c], 8);
        push_bits(q, je[r][c], 8);
        push_bits(q, jsw[r][c], 8);
        push_bits(q, js[r][c], 8);
        push_bits(q, jse[r][c], 8);
      end
    endfunction

    // Configuration word {total, settle, fs_mag, k, mode}, MSB first.
    function void cfg_stream(ref bit q[$], input int total, input int settle);
      push_bits(q, total, 16);
      push_bits(q, settle, 16);
      push_bits(q, mag, 8);
      push_bits(q, k, 3);
      push_bits(q, int'(potts), 1);
    endfunction

    // Run total iterations, sync on from iteration settle.
    function void run(int total, int settle);
      build_wtab();
      for (int it = 0; it < total; it++) step(it >= settle);
    endfunction

    // Ising cut: spins from the half-cycle each phase is nearest to.
    function int spin(int r, int c);
      int p;
      p = ph[r][c];
      return (p >= 64 && p < 192) ? -1 : 1;
    endfunction

    // Potts colour: nearest of the stable phases 0, 3/8, 5/8 (in 1/256).
    function int colour(int r, int c);
      int p, best, bd, d;
      int pts[3] = '{0, 96, 160};
      p = ph[r][c]; best = 0; bd = 1000;
      for (int i = 0; i < 3; i++) begin
        d = (p - pts[i] + 256) % 256;
        if (d > 128) d = 256 - d;
        if (d < bd) begin bd = d; best = i; end
      end
      return best;
    endfunction
  endclass

endpackage
