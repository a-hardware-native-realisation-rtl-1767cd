// tb_workflow_top_full_tb -- the top at its default size: n-hexadecane.
// No parameter is overridden: 98 orbitals on 50 atoms (C16H34 in a minimal
// basis), a 512-point Slater-Koster table, room for ten geometries. The
// testbench builds an all-trans C16H34 chain (C-C 2.91 bohr, C-H 2.06 bohr),
// loads it and runs
//   1. one EHT geometry through the complete workflow (elements, assembly,
//      Jacobi diagonalisation, energy), compared with a double-precision model
//      (elements from the same formulas, eigenvalues by a real Jacobi method,
//      E = 2 * sum of the 49 lowest orbital energies) within 5e-3 hartree;
//   2. the same geometry through the DFTB0 workflow (Slater-Koster elements,
//      repulsive spline, diagonalisation, energy), compared with the model
//      E = 2 * sum of the 49 lowest eigenvalues + sum over atom pairs of
//      c0 + r(c1 + r(c2 + r c3)) within 5e-3 hartree;
//   3. one geometry through the stand-alone generator; every one of the 4851
//      elements is compared with the model within 2e-5, and the cycles from
//      start to the last beat are compared with the 0.0286 ms (2860 cycles at
//      100 MHz) reported for C16H34: the count must lie between NPAIR/2 and
//      2860 + 10 %.
// It prints the sweep and rotation counts and the cycle counts of both runs.
module tb_workflow_top_full_tb;
  import tb_fx_pkg::*;
  localparam int N = 98, NA = 50, NC = 16, NP = N*(N+1)/2, NB = (NP+1)/2;
  localparam int GR = 512, IDR = 50, OCC = 49;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic orb_we = 0, sk_we = 0, rep_we = 0, coord_we = 0;
  idx_t orb_waddr = '0;
  orb_desc_t orb_wdata = '0;
  logic [$clog2(GR)+3:0] sk_addr = '0;
  logic [4*FX_W-1:0] sk_wdata = '0;
  logic [$clog2(128)+3:0] rep_addr = '0;
  fx_t rep_wdata = '0;
  logic [$clog2(10*N*3)-1:0] coord_waddr = '0;
  fx_t coord_wdata = '0;
  logic start = 0, busy;
  tb_mode_e mode = MODE_EHT;
  logic [$clog2(10+1)-1:0] n_geom = '0;
  idx_t n_occ = idx_t'(OCC);
  logic energy_valid, energy_ready = 1;
  fx_t energy_data;
  idx_t vec_row = '0, vec_col = '0;
  fx_t vec_data;
  logic [7:0] jac_sweeps;
  logic [31:0] jac_rotations;
  logic h_valid, h_ready = 1;
  helem_t [1:0] h_data;
  logic [1:0] h_keep;

  tb_workflow_top dut (.*);

  function automatic fx_t r2f(real r); return fx_t'(longint'(r * 16777216.0)); endfunction
  function automatic real f2r(fx_t f); return real'(longint'(f)) / 16777216.0; endfunction
  localparam real PI = 3.14159265358979;

  real al [N], dv [N], ep [N], kv [N];
  int  lv [N], at [N], spc [N];
  real pos [NA][3];

  function automatic real opos(int o, int a); return pos[at[o]][a]; endfunction

  function automatic real overlap(int m, int n);
    real p, r[3], r2, sss;
    p = al[m] + al[n];
    r2 = 0;
    for (int a = 0; a < 3; a++) begin r[a] = opos(n, a) - opos(m, a); r2 += r[a]*r[a]; end
    sss = dv[m]*dv[n] * (PI/p)**1.5 * $exp(-al[m]*al[n]/p*r2);
    if (lv[m] == 0 && lv[n] == 0) return sss;
    if (lv[m] == 0) return -al[m]/p * r[lv[n]-1] * sss;
    if (lv[n] == 0) return al[n]/p * r[lv[m]-1] * sss;
    if (lv[m] == lv[n]) return (1.0/(2*p) - al[m]*al[n]/(p*p)*r[lv[m]-1]**2) * sss;
    return -al[m]*al[n]/(p*p) * r[lv[m]-1]*r[lv[n]-1] * sss;
  endfunction

  function automatic real yfun(int sp, int ch, int pi, real r);
    real a, b;
    a = (pi ? 0.2 : -0.6) + 0.05*sp - 0.03*ch;
    b = 0.6 + 0.1*sp + 0.05*ch + 0.2*pi;
    return a * $exp(-b*r);
  endfunction
  function automatic real ylook(int sp, int ch, int pi, real r);
    int i; real t, y0, y1;
    i = int'($floor(r * IDR));
    if (i >= GR) return 0.0;
    t = r*IDR - i;
    y0 = f2r(r2f(yfun(sp, ch, pi, real'(i)/IDR)));
    y1 = f2r(r2f(yfun(sp, ch, pi, real'(i+1)/IDR)));
    return y0 + t*(y1 - y0);
  endfunction
  function automatic real sk_elem(int m, int n);
    real r[3], rr, c[3], vs, vp;
    int sp, ch;
    if (at[m] == at[n]) return (m == n) ? ep[m] : 0.0;
    rr = 0;
    for (int a = 0; a < 3; a++) begin r[a] = opos(n, a) - opos(m, a); rr += r[a]*r[a]; end
    rr = $sqrt(rr);
    for (int a = 0; a < 3; a++) c[a] = r[a] / rr;
    sp = spc[m]*2 + spc[n];
    ch = (lv[m] != 0)*2 + (lv[n] != 0);
    vs = ylook(sp, ch, 0, rr);
    vp = ylook(sp, ch, 1, rr);
    if (lv[m] == 0 && lv[n] == 0) return vs;
    if (lv[m] == 0) return c[lv[n]-1] * vs;
    if (lv[n] == 0) return -c[lv[m]-1] * vs;
    return c[lv[m]-1]*c[lv[n]-1]*(vs - vp) + ((lv[m] == lv[n]) ? vp : 0.0);
  endfunction

  localparam int NSEG = 128, RIDR = 32;
  real rc [4][NSEG][4];   // repulsive spline [pair type][segment][k], quantised
  function automatic real vrep(int pt, real r);
    int sg;
    sg = int'($floor(r * RIDR));
    if (sg >= NSEG) return 0.0;
    return rc[pt][sg][0] + r*(rc[pt][sg][1] + r*(rc[pt][sg][2] + r*rc[pt][sg][3]));
  endfunction

  // real cyclic Jacobi; returns 2 * sum of the OCC lowest eigenvalues
  function automatic real band_energy(real h [N][N]);
    real a [N][N], w [N], off;
    a = h;
    for (int sw = 0; sw < 100; sw++) begin
      off = 0;
      for (int p = 0; p < N; p++) for (int q = p+1; q < N; q++) off += a[p][q]**2;
      if (off < 1e-20) break;
      for (int p = 0; p < N; p++) for (int q = p+1; q < N; q++) begin
        real th, t, c, s, akp, akq;
        if (a[p][q] == 0.0) continue;
        th = (a[q][q] - a[p][p]) / (2*a[p][q]);
        t = (th >= 0 ? 1.0 : -1.0) / ((th >= 0 ? th : -th) + $sqrt(th*th + 1));
        c = 1 / $sqrt(t*t + 1); s = t*c;
        for (int k = 0; k < N; k++) begin   // A <- A J
          akp = a[k][p]; akq = a[k][q];
          a[k][p] = c*akp - s*akq; a[k][q] = s*akp + c*akq;
        end
        for (int k = 0; k < N; k++) begin   // A <- J^T A
          akp = a[p][k]; akq = a[q][k];
          a[p][k] = c*akp - s*akq; a[q][k] = s*akp + c*akq;
        end
      end
    end
    for (int k = 0; k < N; k++) w[k] = a[k][k];
    for (int x = 1; x < N; x++)
      for (int y = x; y > 0 && w[y] < w[y-1]; y--) begin real t; t = w[y]; w[y] = w[y-1]; w[y-1] = t; end
    band_energy = 0;
    for (int k = 0; k < OCC; k++) band_energy += 2*w[k];
  endfunction


  int cyc = 0, bcnt = 0, tlast = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && h_valid && h_ready) begin
      for (int l = 0; l < 2; l++) if (h_keep[l]) begin
        int n; real got, want;
        n = 2*bcnt + l;
        got = f2r(h_data[l].h);
        want = sk_elem(h_data[l].i, h_data[l].j);
        checks++;
        if (got - want > 2e-5 || want - got > 2e-5 || n >= NP) begin
          failures++; $display("element %0d (%0d,%0d): got %f want %f", n, h_data[l].i, h_data[l].j, got, want);
        end
      end
      bcnt++;
      tlast = cyc;
    end
  end

  initial begin
    real e_ref, e_dftb, h [N][N];
    int t0, t1;
    // chain geometry
    for (int k = 0; k < NC; k++) begin
      real sy;
      pos[k][0] = 2.41 * k; pos[k][1] = (k % 2) ? 1.63 : 0.0; pos[k][2] = 0.0;
      sy = (k % 2) ? 1.0 : -1.0;
      for (int u = 0; u < 2; u++) begin   // two hydrogens per carbon, above and below
        pos[NC + 2*k + u][0] = pos[k][0];
        pos[NC + 2*k + u][1] = pos[k][1] + sy * 2.06 * 0.57;
        pos[NC + 2*k + u][2] = (u ? -1.0 : 1.0) * 2.06 * 0.82;
      end
    end
    pos[NA-2][0] = -2.06 * 0.94;         pos[NA-2][1] = -2.06 * 0.33; pos[NA-2][2] = 0.0;
    pos[NA-1][0] = pos[NC-1][0] + 2.06 * 0.94; pos[NA-1][1] = pos[NC-1][1] + 2.06 * 0.33; pos[NA-1][2] = 0.0;
    for (int o = 0; o < N; o++) begin
      if (o < 4*NC) begin
        at[o] = o / 4; lv[o] = o % 4; spc[o] = 1;
        al[o] = (lv[o] == 0) ? 0.32 : 0.28; dv[o] = (lv[o] == 0) ? 0.30 : 0.45;
        ep[o] = (lv[o] == 0) ? -0.78 : -0.42;
      end else begin
        at[o] = NC + (o - 4*NC); lv[o] = 0; spc[o] = 0;
        al[o] = 0.42; dv[o] = 0.35; ep[o] = -0.50;
      end
      kv[o] = 0.935;
    end
    for (int i = 0; i < N; i++) for (int j = i; j < N; j++) begin
      h[i][j] = (i == j) ? ep[i] : kv[i]*kv[j]*(ep[i]+ep[j])*overlap(i, j);
      h[j][i] = h[i][j];
    end
    e_ref = band_energy(h);
    $display("model EHT energy %f", e_ref);
    // DFTB0 model: Slater-Koster Hamiltonian plus repulsive spline. Segment
    // sg of pair type pt holds a cubic that decays over the segment.
    for (int pt = 0; pt < 4; pt++) for (int sg = 0; sg < NSEG; sg++) begin
      real a; a = (0.3 + 0.1*pt) * $exp(-0.9 * sg / RIDR);
      rc[pt][sg][0] = f2r(r2f(a));
      rc[pt][sg][1] = f2r(r2f(-0.2 * a));
      rc[pt][sg][2] = f2r(r2f(0.01 * a));
      rc[pt][sg][3] = f2r(r2f(-0.001 * a));
    end
    for (int i = 0; i < N; i++) for (int j = i; j < N; j++) begin
      h[i][j] = sk_elem(i, j); h[j][i] = h[i][j];
    end
    e_dftb = band_energy(h);
    for (int a = 0; a < NA; a++) for (int b = a+1; b < NA; b++) begin
      real rr; int sa, sb;
      rr = 0;
      for (int x = 0; x < 3; x++) rr += (pos[b][x] - pos[a][x])**2;
      sa = (a < NC); sb = (b < NC);
      e_dftb += vrep((sa | sb)*2 + (sa & sb), $sqrt(rr));
    end
    $display("model DFTB0 energy %f", e_dftb);

    repeat (3) @(posedge clk); rst_n = 1;
    for (int o = 0; o < N; o++) begin
      @(negedge clk);
      orb_we = 1; orb_waddr = idx_t'(o);
      orb_wdata = '0;
      orb_wdata.atom = idx_t'(at[o]); orb_wdata.species = spc[o][0]; orb_wdata.l = orb_l_e'(lv[o]);
      orb_wdata.alpha = r2f(al[o]); orb_wdata.d = r2f(dv[o]);
      orb_wdata.eps = r2f(ep[o]); orb_wdata.k = r2f(kv[o]);
    end
    @(negedge clk); orb_we = 0;
    for (int sp = 0; sp < 4; sp++) for (int ch = 0; ch < 4; ch++) for (int i = 0; i < GR; i++) begin
      fx_t ys0, ys1, yp0, yp1;
      ys0 = r2f(yfun(sp, ch, 0, real'(i)/IDR)); ys1 = r2f(yfun(sp, ch, 0, real'(i+1)/IDR));
      yp0 = r2f(yfun(sp, ch, 1, real'(i)/IDR)); yp1 = r2f(yfun(sp, ch, 1, real'(i+1)/IDR));
      @(negedge clk);
      sk_we = 1; sk_addr = {sp[1:0], ch[1:0], i[$clog2(GR)-1:0]};
      sk_wdata = {ys0, ys1 - ys0, yp0, yp1 - yp0};
    end
    @(negedge clk); sk_we = 0;
    for (int pt = 0; pt < 4; pt++) for (int sg = 0; sg < NSEG; sg++) for (int k = 0; k < 4; k++) begin
      @(negedge clk);
      rep_we = 1; rep_addr = {pt[1:0], sg[$clog2(NSEG)-1:0], k[1:0]}; rep_wdata = r2f(rc[pt][sg][k]);
    end
    @(negedge clk); rep_we = 0;
    for (int o = 0; o < N; o++) for (int x = 0; x < 3; x++) begin
      @(negedge clk);
      coord_we = 1; coord_waddr = (o*3 + x); coord_wdata = r2f(opos(o, x));
    end
    @(negedge clk); coord_we = 0;

    // 1. full workflow, EHT
    @(negedge clk); mode = MODE_EHT; n_geom = 1; start = 1; t0 = cyc;
    @(negedge clk); start = 0;
    while (!energy_valid) @(negedge clk);
    t1 = cyc;
    $display("EHT: E %f (model %f), %0d sweeps, %0d rotations, %0d cycles",
             f2r(energy_data), e_ref, jac_sweeps, jac_rotations, t1 - t0);
    checks++;
    if (f2r(energy_data) - e_ref > 5e-3 || e_ref - f2r(energy_data) > 5e-3) begin
      failures++; $display("FAIL: energy");
    end
    while (busy) @(negedge clk);

    // 2. full workflow, DFTB0
    @(negedge clk); mode = MODE_DFTB0; n_geom = 1; start = 1; t0 = cyc;
    @(negedge clk); start = 0;
    while (!energy_valid) @(negedge clk);
    t1 = cyc;
    $display("DFTB0: E %f (model %f), %0d sweeps, %0d rotations, %0d cycles",
             f2r(energy_data), e_dftb, jac_sweeps, jac_rotations, t1 - t0);
    checks++;
    if (f2r(energy_data) - e_dftb > 5e-3 || e_dftb - f2r(energy_data) > 5e-3) begin
      failures++; $display("FAIL: DFTB0 energy");
    end
    while (busy) @(negedge clk);

    // 3. stand-alone generator
    @(negedge clk); mode = MODE_HGEN; n_geom = 1; start = 1; t0 = cyc;
    @(negedge clk); start = 0;
    while (busy) @(negedge clk);
    repeat (5) @(negedge clk);
    $display("stand-alone: %0d beats, %0d cycles from start to the last beat", bcnt, tlast - t0);
    checks++; if (bcnt != NB) begin failures++; $display("FAIL: beat count"); end
    checks++;
    if (tlast - t0 < NB || tlast - t0 > 3146) begin failures++; $display("FAIL: generator cycle count"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
