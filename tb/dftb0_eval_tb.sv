// dftb0_eval_tb -- DFTB0 element evaluator against a real-arithmetic model.
// The Slater-Koster table is filled with smooth test functions
// y(r) = A exp(-b r) (different A, b per species pair, channel and sigma/pi)
// stored as (y_i, y_{i+1} - y_i) tuples. A 6-orbital system (carbon s, p and
// two hydrogens) is evaluated for two random geometries; every element must
// match linear interpolation plus the Slater-Koster rules computed here in
// double precision within 2e-5. One geometry also places a hydrogen beyond the
// table cut-off. Timing: the 21 elements of the first geometry leave in 21
// consecutive cycles; the second geometry sees random back-pressure.
module dftb0_eval_tb;
  import tb_fx_pkg::*;
  localparam int N = 6, NP = N*(N+1)/2, NG = 256, IDR = 50;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  orb_desc_t orb [N];
  logic cv = 0, cr, pv = 0, pr, ov, ordy = 1;
  coord_t cd;
  pair_t pd;
  helem_t od;
  logic tw = 0;
  logic [$clog2(NG)+3:0] ta = '0;
  logic [4*FX_W-1:0] td = '0;

  dftb0_eval #(.N_ORB(N), .N_GRID(NG), .INV_DR(IDR)) dut (.clk, .rst_n, .orb,
    .tbl_we(tw), .tbl_addr(ta), .tbl_wdata(td),
    .coord_valid(cv), .coord_ready(cr), .coord_data(cd),
    .pair_valid(pv), .pair_ready(pr), .pair_data(pd),
    .out_valid(ov), .out_ready(ordy), .out_data(od));

  function automatic fx_t r2f(real r); return fx_t'(longint'(r * 16777216.0)); endfunction
  function automatic real f2r(fx_t f); return real'(longint'(f)) / 16777216.0; endfunction

  // test integral: species pair sp (0..3), channel ch (0..3), pi (0/1)
  function automatic real yfun(int sp, int ch, int pi, real r);
    real a, b;
    a = (pi ? 0.2 : -0.6) + 0.05*sp - 0.03*ch;
    b = 0.6 + 0.1*sp + 0.05*ch + 0.2*pi;
    return a * $exp(-b*r);
  endfunction
  // model of the table lookup: grid value plus t times difference, all in the
  // fixed-point grid values the table holds
  function automatic real ylook(int sp, int ch, int pi, real r);
    int i; real t, y0, y1;
    i = int'($floor(r * IDR));
    if (i >= NG) return 0.0;
    t = r*IDR - i;
    y0 = f2r(r2f(yfun(sp, ch, pi, real'(i)/IDR)));
    y1 = f2r(r2f(yfun(sp, ch, pi, real'(i+1)/IDR)));
    return y0 + t*(y1 - y0);
  endfunction

  int lv [N], at [N], spc [N];
  real ep [N];
  real pos [2][N][3];
  real href [2][NP];

  function automatic real element(int g, int m, int n);
    real r[3], rr, c[3], vs, vp;
    int sp, ch;
    if (at[m] == at[n]) return (m == n) ? ep[m] : 0.0;
    rr = 0;
    for (int a = 0; a < 3; a++) begin r[a] = pos[g][n][a] - pos[g][m][a]; rr += r[a]*r[a]; end
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

  int ocnt = 0, cyc = 0, t0 = -1, t1 = -1;
  always @(posedge clk) begin
    cyc++;
    ordy <= (ocnt >= NP) ? ($urandom_range(0, 1) == 1) : 1'b1;
    if (rst_n && ov && ordy) begin
      int g, n, m, ei, ej;
      real got;
      g = ocnt / NP; n = ocnt % NP; m = 0; ei = 0; ej = 0;
      for (int i = 0; i < N; i++) for (int j = i; j < N; j++) begin
        if (m == n) begin ei = i; ej = j; end
        m++;
      end
      got = f2r(od.h);
      checks++;
      if (od.i != idx_t'(ei) || od.j != idx_t'(ej) || (got - href[g][n] > 2e-5) || (href[g][n] - got > 2e-5)) begin
        failures++;
        $display("g%0d (%0d,%0d): got %f ref %f", g, od.i, od.j, got, href[g][n]);
      end
      if (g == 0 && n == 0) t0 = cyc;
      if (g == 0 && n == NP-1) t1 = cyc;
      ocnt++;
    end
  end

  initial begin
    lv  = '{0, 1, 2, 3, 0, 0};
    at  = '{0, 0, 0, 0, 1, 2};
    spc = '{1, 1, 1, 1, 0, 0};
    ep  = '{-0.50, -0.19, -0.19, -0.19, -0.24, -0.24};
    for (int g = 0; g < 2; g++) begin
      for (int a = 0; a < 3; a++) begin
        int r0, r1, r2;
        r0 = $urandom_range(0, 1000); r1 = $urandom_range(0, 2000); r2 = $urandom_range(0, 2000);
        for (int o = 0; o < 4; o++) pos[g][o][a] = (r0 - 500) / 1000.0;
        pos[g][4][a] = pos[g][0][a] + (r1 - 1000) / 1000.0;
        pos[g][5][a] = pos[g][0][a] - (r2 - 1000) / 1000.0;
      end
      pos[g][4][0] += 1.3; pos[g][5][1] -= 1.4;
    end
    pos[1][5][2] += 6.0;   // beyond the 5.12 bohr table
    for (int o = 0; o < N; o++) begin
      orb[o] = '0;
      orb[o].atom = idx_t'(at[o]);
      orb[o].species = spc[o][0];
      orb[o].l = orb_l_e'(lv[o]);
      orb[o].eps = r2f(ep[o]);
    end
    for (int g = 0; g < 2; g++) begin
      int n; n = 0;
      for (int i = 0; i < N; i++) for (int j = i; j < N; j++) begin
        href[g][n] = element(g, i, j); n++;
      end
    end
    repeat (3) @(posedge clk); rst_n = 1;
    // table
    for (int sp = 0; sp < 4; sp++) for (int ch = 0; ch < 4; ch++) for (int i = 0; i < NG; i++) begin
      fx_t ys0, ys1, yp0, yp1;
      ys0 = r2f(yfun(sp, ch, 0, real'(i)/IDR)); ys1 = r2f(yfun(sp, ch, 0, real'(i+1)/IDR));
      yp0 = r2f(yfun(sp, ch, 1, real'(i)/IDR)); yp1 = r2f(yfun(sp, ch, 1, real'(i+1)/IDR));
      @(negedge clk);
      tw = 1; ta = {sp[1:0], ch[1:0], i[$clog2(NG)-1:0]};
      td = {ys0, ys1 - ys0, yp0, yp1 - yp0};
    end
    @(negedge clk); tw = 0;
    for (int g = 0; g < 2; g++)
      for (int o = 0; o < N; o++) begin
        @(negedge clk);
        cv = 1; cd = '{x: r2f(pos[g][o][0]), y: r2f(pos[g][o][1]), z: r2f(pos[g][o][2])};
        while (!cr) @(negedge clk);
        @(posedge clk);
      end
    @(negedge clk); cv = 0;
    for (int g = 0; g < 2; g++) begin
      for (int i = 0; i < N; i++) for (int j = i; j < N; j++) begin
        @(negedge clk);
        pv = 1; pd = '{i: idx_t'(i), j: idx_t'(j)};
        while (!pr) @(negedge clk);
        @(posedge clk);
      end
      @(negedge clk); pv = 0;
    end
    repeat (40) @(posedge clk);
    checks++; if (ocnt != 2*NP) begin failures++; $display("count %0d", ocnt); end
    checks++; if (t1 - t0 != NP-1) begin failures++; $display("II: span %0d", t1-t0); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
