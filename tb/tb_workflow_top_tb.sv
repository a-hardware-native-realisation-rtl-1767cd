// tb_workflow_top_tb -- end-to-end test of the whole workflow on methane.
// The top is built for CH4 (8 orbitals on 5 atoms, 4 occupied orbitals), a
// 256-point Slater-Koster table and a 32-segment repulsive spline. Three
// geometries are written to the coordinate memory (the third with one hydrogen
// pulled to 6 bohr, beyond both tables), then the design runs
//   1. EHT for the three geometries,
//   2. DFTB0 for the three geometries,
//   3. the stand-alone generator for the three geometries,
//   4. EHT again (a mode switch back).
// Every energy is compared with a double-precision model in this testbench
// (elements from the same formulas and table values, eigenvalues by a real
// Jacobi method, E = 2 * sum of the 4 lowest + E_rep) within 1e-3 hartree, and
// every element of the stand-alone stream with the model element within 2e-5.
// The energy and element outputs see random back-pressure.
// Mechanisms counted (each must happen at least once):
//   EHT energies, DFTB0 energies, stand-alone beats, mode switches, batches of
//   more than one geometry, output stalls (energy and elements), both
//   coordinate banks of an evaluator full (next geometry loaded during
//   evaluation), evaluator held by a full Hamiltonian buffer, Jacobi solves with
//   more than one sweep, solves that skipped sub-threshold rotations before
//   their final (rotation-free) sweep, elements beyond the
//   table cut-off, pairs beyond the repulsive spline.
module tb_workflow_top_tb;
  import tb_fx_pkg::*;
  localparam int N = 8, NA = 5, NP = N*(N+1)/2, NB = (NP+1)/2, NG = 3, MG = 4;
  localparam int GR = 256, IDR = 50, NS = 32, RDR = 8, OCC = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic orb_we = 0, sk_we = 0, rep_we = 0, coord_we = 0;
  idx_t orb_waddr = '0;
  orb_desc_t orb_wdata = '0;
  logic [$clog2(GR)+3:0] sk_addr = '0;
  logic [4*FX_W-1:0] sk_wdata = '0;
  logic [$clog2(NS)+3:0] rep_addr = '0;
  fx_t rep_wdata = '0;
  logic [$clog2(MG*N*3)-1:0] coord_waddr = '0;
  fx_t coord_wdata = '0;
  logic start = 0, busy;
  tb_mode_e mode = MODE_EHT;
  logic [$clog2(MG+1)-1:0] n_geom = '0;
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

  tb_workflow_top #(.N_ORB(N), .N_ATOM(NA), .MAX_GEOM(MG), .N_GRID(GR), .SK_INV_DR(IDR),
                    .N_SEG(NS), .REP_INV_DR(RDR), .MAX_SWEEPS(30)) dut (.*);

  function automatic fx_t r2f(real r); return fx_t'(longint'(r * 16777216.0)); endfunction
  function automatic real f2r(fx_t f); return real'(longint'(f)) / 16777216.0; endfunction
  localparam real PI = 3.14159265358979;

  // ---------------- model data ----------------
  real al [N], dv [N], ep [N], kv [N];
  int  lv [N], at [N], spc [N], aspc [NA];
  real pos [NG][NA][3];
  real coef [4][NS][4];
  real e_eht [NG], e_dftb [NG];
  real hd [NG][NP];          // DFTB0 elements in flat order

  function automatic real opos(int g, int o, int a); return pos[g][at[o]][a]; endfunction

  function automatic real overlap(int g, int m, int n);
    real p, r[3], r2, sss;
    p = al[m] + al[n];
    r2 = 0;
    for (int a = 0; a < 3; a++) begin r[a] = opos(g, n, a) - opos(g, m, a); r2 += r[a]*r[a]; end
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
  function automatic real sk_elem(int g, int m, int n);
    real r[3], rr, c[3], vs, vp;
    int sp, ch;
    if (at[m] == at[n]) return (m == n) ? ep[m] : 0.0;
    rr = 0;
    for (int a = 0; a < 3; a++) begin r[a] = opos(g, n, a) - opos(g, m, a); rr += r[a]*r[a]; end
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
  function automatic real vrep(int pt, real r);
    int s;
    s = int'($floor(r * RDR));
    if (s >= NS) return 0.0;
    return coef[pt][s][0] + r*(coef[pt][s][1] + r*(coef[pt][s][2] + r*coef[pt][s][3]));
  endfunction

  // real cyclic Jacobi; returns 2 * sum of the OCC lowest eigenvalues
  function automatic real band_energy(real h [N][N]);
    real a [N][N], w [N], off;
    a = h;
    for (int sw = 0; sw < 100; sw++) begin
      off = 0;
      for (int p = 0; p < N; p++) for (int q = p+1; q < N; q++) off += a[p][q]**2;
      if (off < 1e-22) break;
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

  // ---------------- mechanism counters ----------------
  int m_eht = 0, m_dftb = 0, m_hgen = 0, m_switch = 0, m_batch = 0, m_estall = 0, m_hstall = 0;
  int m_banks = 0, m_asmfull = 0, m_multisweep = 0, m_skip = 0, m_outside = 0, m_repout = 0;
  bit bp = 0;

  always @(posedge clk) if (rst_n) begin
    energy_ready <= bp ? ($urandom_range(0, 2) != 0) : 1'b1;
    h_ready      <= bp ? ($urandom_range(0, 2) != 0) : 1'b1;
    if (energy_valid && !energy_ready) m_estall++;
    if (h_valid && !h_ready) m_hstall++;
    if (dut.u_eht.full == 2'b11 || dut.u_dftb0.full == 2'b11 || dut.u_hgen.u_eval_even.full == 2'b11) m_banks++;
    if (dut.u_asm.full && (dut.e_v || dut.d_v)) m_asmfull++;
    if (dut.ev_v && dut.ev_r && dut.ev_last) begin   // end of one solve
      if (jac_sweeps > 1) m_multisweep++;
      if (int'(jac_rotations) < (int'(jac_sweeps) - 1) * N*(N-1)/2) m_skip++;
    end
    if (dut.u_dftb0.st[8].v && dut.u_dftb0.st[8].outside && dut.u_dftb0.adv) m_outside++;
    if (dut.u_rep.fb_take && dut.u_rep.fb_out) m_repout++;
  end

  // ---------------- output checkers ----------------
  int ecnt = 0, bcnt = 0;
  tb_mode_e cur = MODE_EHT;
  always @(posedge clk) if (rst_n) begin
    if (energy_valid && energy_ready) begin
      real got, want;
      got = f2r(energy_data);
      want = (cur == MODE_EHT) ? e_eht[ecnt % NG] : e_dftb[ecnt % NG];
      checks++;
      if (got - want > 1e-3 || want - got > 1e-3) begin
        failures++; $display("%s geometry %0d: E %f expected %f", cur.name(), ecnt, got, want);
      end
      if (cur == MODE_EHT) m_eht++; else m_dftb++;
      ecnt++;
    end
    if (h_valid && h_ready) begin
      int g, b;
      g = bcnt / NB; b = bcnt % NB;
      for (int l = 0; l < 2; l++) if (h_keep[l]) begin
        int n, ei, ej, x;
        real got;
        n = 2*b + l; x = 0; ei = 0; ej = 0;
        for (int i = 0; i < N; i++) for (int j = i; j < N; j++) begin
          if (x == n) begin ei = i; ej = j; end
          x++;
        end
        got = f2r(h_data[l].h);
        checks++;
        if (g >= NG || h_data[l].i != idx_t'(ei) || h_data[l].j != idx_t'(ej)
            || got - hd[g][n] > 2e-5 || hd[g][n] - got > 2e-5) begin
          failures++; $display("stand-alone g%0d pos %0d: got %f", g, n, got);
        end
      end
      m_hgen++;
      bcnt++;
    end
  end

  task automatic run(tb_mode_e m, int ng);
    @(negedge clk);
    if (m != cur) m_switch++;
    cur = m; ecnt = 0; bcnt = 0;
    if (ng > 1) m_batch++;
    mode = m; n_geom = ng[$clog2(MG+1)-1:0]; start = 1;
    @(negedge clk); start = 0;
    while (busy) @(negedge clk);
    checks++;
    if (m == MODE_HGEN ? (bcnt != ng*NB) : (ecnt != ng)) begin
      failures++; $display("%s run: %0d energies, %0d beats", m.name(), ecnt, bcnt);
    end
  endtask

  task automatic count(string name, int v);
    checks++;
    $display("  %-34s %0d", name, v);
    if (v == 0) begin failures++; $display("FAIL: mechanism never happened: %s", name); end
  endtask

  initial begin
    // orbitals: carbon s, px, py, pz, then four hydrogens
    lv  = '{0, 1, 2, 3, 0, 0, 0, 0};
    at  = '{0, 0, 0, 0, 1, 2, 3, 4};
    al  = '{0.32, 0.28, 0.28, 0.28, 0.42, 0.42, 0.42, 0.42};
    dv  = '{0.30, 0.45, 0.45, 0.45, 0.35, 0.35, 0.35, 0.35};
    ep  = '{-0.78, -0.42, -0.42, -0.42, -0.50, -0.50, -0.50, -0.50};
    kv  = '{0.935, 0.935, 0.935, 0.935, 0.935, 0.935, 0.935, 0.935};
    aspc = '{1, 0, 0, 0, 0};
    for (int o = 0; o < N; o++) spc[o] = aspc[at[o]];
    // geometries: tetrahedral CH4 (C-H 2.05 bohr) with random displacements
    for (int g = 0; g < NG; g++)
      for (int a = 0; a < NA; a++) for (int x = 0; x < 3; x++) begin
        int r; real sg;
        r = $urandom_range(0, 1000);
        sg = (a == 0) ? 0.0 : ((a == 1 || x == a - 1) ? 1.0 : -1.0);
        pos[g][a][x] = 1.18 * sg + (r - 500) / 3000.0;
      end
    for (int x = 0; x < 3; x++) pos[2][4][x] = 6.0 / $sqrt(3.0) * ((x == 2) ? 1.0 : -1.0);
    for (int pt = 0; pt < 4; pt++) for (int s = 0; s < NS; s++) for (int k = 0; k < 4; k++) begin
      int r; r = $urandom_range(0, 2000);
      coef[pt][s][k] = f2r(r2f((r - 1000) / (1.0e5 * (1 << k))));
    end
    // reference energies and elements
    for (int g = 0; g < NG; g++) begin
      real he [N][N], hs [N][N], erep;
      int n; n = 0;
      for (int i = 0; i < N; i++) for (int j = i; j < N; j++) begin
        he[i][j] = (i == j) ? ep[i] : kv[i]*kv[j]*(ep[i]+ep[j])*overlap(g, i, j);
        hs[i][j] = sk_elem(g, i, j);
        he[j][i] = he[i][j]; hs[j][i] = hs[i][j];
        hd[g][n] = hs[i][j]; n++;
      end
      erep = 0;
      for (int a = 0; a < NA; a++) for (int b = a+1; b < NA; b++) begin
        real rr; rr = 0;
        for (int x = 0; x < 3; x++) rr += (pos[g][b][x] - pos[g][a][x])**2;
        erep += vrep((aspc[a] | aspc[b])*2 + (aspc[a] & aspc[b]), $sqrt(rr));
      end
      e_eht[g]  = band_energy(he);
      e_dftb[g] = band_energy(hs) + erep;
      $display("geometry %0d: E(EHT) %f  E(DFTB0) %f (E_rep %f)", g, e_eht[g], e_dftb[g], erep);
    end

    repeat (3) @(posedge clk); rst_n = 1;
    // host loading
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
    for (int pt = 0; pt < 4; pt++) for (int s = 0; s < NS; s++) for (int k = 0; k < 4; k++) begin
      @(negedge clk);
      rep_we = 1; rep_addr = {pt[1:0], s[$clog2(NS)-1:0], k[1:0]}; rep_wdata = r2f(coef[pt][s][k]);
    end
    @(negedge clk); rep_we = 0;
    for (int g = 0; g < NG; g++) for (int o = 0; o < N; o++) for (int x = 0; x < 3; x++) begin
      @(negedge clk);
      coord_we = 1; coord_waddr = ((g*N + o)*3 + x); coord_wdata = r2f(opos(g, o, x));
    end
    @(negedge clk); coord_we = 0;

    bp = 0; run(MODE_EHT, NG);
    bp = 1; run(MODE_DFTB0, NG);
    run(MODE_HGEN, NG);
    bp = 0; run(MODE_HGEN, 1);
    bp = 1; run(MODE_EHT, NG);

    $display("mechanisms:");
    count("EHT energies", m_eht);
    count("DFTB0 energies", m_dftb);
    count("stand-alone element beats", m_hgen);
    count("mode switches", m_switch);
    count("multi-geometry batches", m_batch);
    count("energy output stall cycles", m_estall);
    count("element output stall cycles", m_hstall);
    count("cycles with both coordinate banks full", m_banks);
    count("evaluator held by full H buffer", m_asmfull);
    count("solves with more than one sweep", m_multisweep);
    count("solves with skipped rotations", m_skip);
    count("elements beyond the SK cut-off", m_outside);
    count("atom pairs beyond the spline", m_repout);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
