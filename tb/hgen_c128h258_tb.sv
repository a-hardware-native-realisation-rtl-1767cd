// hgen_c128h258_tb -- the two-branch stand-alone Hamiltonian generator at the
// largest published workload, n-octacosahectane C128H258: 128 carbons with
// s, px, py, pz and 258 hydrogens with s give 770 orbitals on 386 atoms and
// 770*771/2 = 296835 elements per geometry. Only N_ORB is set; the table
// (512 points, 50 points per bohr) and the ten-geometry limit are the
// defaults. An all-trans chain is built (C-C 2.91 bohr, C-H 2.06 bohr) and the
// Slater-Koster table holds smooth exponential test functions a*exp(-b r).
// Two runs:
//   1. a single geometry, as in the single-geometry configuration;
//   2. ten geometries, each a slightly stretched copy of the chain, as in the
//      ten-geometry configuration.
// Every element of every beat is compared with a double-precision model of
// the lookup and Slater-Koster rules (indices in order, value within 2e-5).
// Timing: at 100 MHz the published per-geometry times are 1.4986 ms (single)
// and 1.4897 ms (ten geometries), i.e. 149860 and 148970 cycles. The cycles
// from start to the last beat, per geometry, must lie between the bound of
// two elements per cycle, ceil(296835/2) = 148418, and the published figure.
module hgen_c128h258_tb;
  import tb_fx_pkg::*;
  localparam int NC = 128, NA = 3*NC + 2, N = 4*NC + (NA - NC), NP = N*(N+1)/2, NB = (NP+1)/2;
  localparam int GR = 512, IDR = 50, MG = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  orb_desc_t orb [N];
  logic start = 0, busy, cv = 0, cr, ov, ordy = 1;
  logic [$clog2(MG+1)-1:0] ng = '0;
  coord_t cd;
  helem_t [1:0] od;
  logic [1:0] ok;
  logic tw = 0;
  logic [$clog2(GR)+3:0] ta = '0;
  logic [4*FX_W-1:0] td = '0;

  hgen_standalone #(.N_ORB(N)) dut (.clk, .rst_n,
    .start, .n_geom(ng), .busy, .orb, .tbl_we(tw), .tbl_addr(ta), .tbl_wdata(td),
    .coord_valid(cv), .coord_ready(cr), .coord_data(cd),
    .out_valid(ov), .out_ready(ordy), .out_data(od), .out_keep(ok));

  function automatic fx_t r2f(real r); return fx_t'(longint'(r * 16777216.0)); endfunction
  function automatic real f2r(fx_t f); return real'(longint'(f)) / 16777216.0; endfunction

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

  int  lv [N], at [N], spc [N];
  real ep [N];
  real pos [NA][3];
  function automatic real opos(int o, int a, real sc); return pos[at[o]][a] * sc; endfunction

  function automatic real sk_elem(int m, int n, real sc);
    real r[3], rr, c[3], vs, vp;
    int sp, ch;
    if (at[m] == at[n]) return (m == n) ? ep[m] : 0.0;
    rr = 0;
    for (int a = 0; a < 3; a++) begin r[a] = opos(n, a, sc) - opos(m, a, sc); rr += r[a]*r[a]; end
    rr = $sqrt(rr);
    if (int'($floor(rr * IDR)) >= GR) return 0.0;
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

  function automatic real stretch(int g); return 1.0 + 0.004*g; endfunction

  // output checker: walks (i, j) in row order and restarts every NP elements
  int cyc = 0, bcnt = 0, tlast = 0, gout = 0, ci = 0, cj = 0, bad = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && ov && ordy) begin
      for (int l = 0; l < 2; l++) if (ok[l]) begin
        real got, want;
        got = f2r(od[l].h);
        want = sk_elem(ci, cj, stretch(gout));
        checks++;
        if (od[l].i != idx_t'(ci) || od[l].j != idx_t'(cj) || got - want > 2e-5 || want - got > 2e-5) begin
          failures++;
          if (bad++ < 10) $display("g%0d (%0d,%0d): got (%0d,%0d) %f want %f", gout, ci, cj, od[l].i, od[l].j, got, want);
        end
        if (cj == N-1) begin
          ci++; cj = ci;
          if (ci == N) begin ci = 0; cj = 0; gout++; end
        end else cj++;
      end
      bcnt++;
      tlast = cyc;
    end
  end

  task automatic run(int ngeo, int limit, string name);
    int t0, b0, g0;
    b0 = bcnt; g0 = gout;
    @(negedge clk); ng = ngeo[$clog2(MG+1)-1:0]; start = 1; t0 = cyc;
    @(negedge clk); start = 0;
    for (int g = 0; g < ngeo; g++) begin
      real sc;
      sc = stretch(g0 + g);
      for (int o = 0; o < N; o++) begin
        @(negedge clk);
        cv = 1; cd = '{x: r2f(opos(o, 0, sc)), y: r2f(opos(o, 1, sc)), z: r2f(opos(o, 2, sc))};
        while (!cr) @(negedge clk);
        @(posedge clk);
      end
    end
    @(negedge clk); cv = 0;
    while (busy) @(negedge clk);
    repeat (20) @(posedge clk);
    $display("%s: %0d geometries, %0d beats, %0d cycles, %0d per geometry (published %0d)",
             name, ngeo, bcnt - b0, tlast - t0 + 1, (tlast - t0 + 1) / ngeo, limit);
    checks++;
    if (bcnt - b0 != ngeo*NB || gout - g0 != ngeo) begin
      failures++; $display("FAIL: %0d beats, %0d geometries", bcnt - b0, gout - g0);
    end
    checks++;
    if ((tlast - t0 + 1) > ngeo*limit || (tlast - t0 + 1) < ngeo*NB) begin
      failures++; $display("FAIL: cycle count outside [%0d, %0d]", ngeo*NB, ngeo*limit);
    end
  endtask

  initial begin
    // chain geometry
    for (int k = 0; k < NC; k++) begin
      real sy;
      pos[k][0] = 2.41 * k; pos[k][1] = (k % 2) ? 1.63 : 0.0; pos[k][2] = 0.0;
      sy = (k % 2) ? 1.0 : -1.0;
      for (int u = 0; u < 2; u++) begin
        pos[NC + 2*k + u][0] = pos[k][0];
        pos[NC + 2*k + u][1] = pos[k][1] + sy * 2.06 * 0.57;
        pos[NC + 2*k + u][2] = (u ? -1.0 : 1.0) * 2.06 * 0.82;
      end
    end
    pos[NA-2][0] = -2.06 * 0.94;               pos[NA-2][1] = -2.06 * 0.33;         pos[NA-2][2] = 0.0;
    pos[NA-1][0] = pos[NC-1][0] + 2.06 * 0.94; pos[NA-1][1] = pos[NC-1][1] + 2.06 * 0.33; pos[NA-1][2] = 0.0;
    for (int o = 0; o < N; o++) begin
      if (o < 4*NC) begin
        at[o] = o / 4; lv[o] = o % 4; spc[o] = 1; ep[o] = (lv[o] == 0) ? -0.78 : -0.42;
      end else begin
        at[o] = NC + (o - 4*NC); lv[o] = 0; spc[o] = 0; ep[o] = -0.50;
      end
      orb[o] = '0;
      orb[o].atom = idx_t'(at[o]); orb[o].species = spc[o][0];
      orb[o].l = orb_l_e'(lv[o]); orb[o].eps = r2f(ep[o]);
    end
    repeat (3) @(posedge clk); rst_n = 1;
    for (int sp = 0; sp < 4; sp++) for (int ch = 0; ch < 4; ch++) for (int i = 0; i < GR; i++) begin
      fx_t ys0, ys1, yp0, yp1;
      ys0 = r2f(yfun(sp, ch, 0, real'(i)/IDR)); ys1 = r2f(yfun(sp, ch, 0, real'(i+1)/IDR));
      yp0 = r2f(yfun(sp, ch, 1, real'(i)/IDR)); yp1 = r2f(yfun(sp, ch, 1, real'(i+1)/IDR));
      @(negedge clk);
      tw = 1; ta = {sp[1:0], ch[1:0], i[$clog2(GR)-1:0]};
      td = {ys0, ys1 - ys0, yp0, yp1 - yp0};
    end
    @(negedge clk); tw = 0;
    run(1, 149860, "single-geometry");
    run(MG, 148970, "ten-geometry");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
