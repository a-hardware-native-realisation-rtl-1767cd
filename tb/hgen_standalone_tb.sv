// hgen_standalone_tb -- two-branch stand-alone Hamiltonian generator.
// A 6-orbital system (carbon s, p and two hydrogens; 21 elements per geometry,
// an odd number, so the last beat of each geometry is half full) is run for
// three geometries. The Slater-Koster table holds the same smooth test
// functions as the single-evaluator testbench, and every element of every beat
// is compared with the double-precision model (position, indices, value within
// 2e-5). Timing: with both branches running, a geometry leaves in
// ceil(21/2) = 11 beats on 11 consecutive cycles, i.e. about NPAIR/2 cycles per
// geometry; the third geometry meets random back-pressure.
module hgen_standalone_tb;
  import tb_fx_pkg::*;
  localparam int N = 6, NP = N*(N+1)/2, NB = (NP+1)/2, NG = 3, GR = 256, IDR = 50;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  orb_desc_t orb [N];
  logic start = 0, busy, cv = 0, cr, ov, ordy = 1;
  logic [$clog2(10+1)-1:0] ng = '0;
  coord_t cd;
  helem_t [1:0] od;
  logic [1:0] ok;
  logic tw = 0;
  logic [$clog2(GR)+3:0] ta = '0;
  logic [4*FX_W-1:0] td = '0;

  hgen_standalone #(.N_ORB(N), .MAX_GEOM(10), .N_GRID(GR), .INV_DR(IDR)) dut (.clk, .rst_n,
    .start, .n_geom(ng), .busy, .orb, .tbl_we(tw), .tbl_addr(ta), .tbl_wdata(td),
    .coord_valid(cv), .coord_ready(cr), .coord_data(cd),
    .out_valid(ov), .out_ready(ordy), .out_data(od), .out_keep(ok));

  function automatic fx_t r2f(real r); return fx_t'(longint'(r * 16777216.0)); endfunction
  function automatic real f2r(fx_t f); return real'(longint'(f)) / 16777216.0; endfunction
  localparam int NG_ = GR;
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
    if (i >= NG_) return 0.0;
    t = r*IDR - i;
    y0 = f2r(r2f(yfun(sp, ch, pi, real'(i)/IDR)));
    y1 = f2r(r2f(yfun(sp, ch, pi, real'(i+1)/IDR)));
    return y0 + t*(y1 - y0);
  endfunction

  int lv [N], at [N], spc [N];
  real ep [N];
  real pos [NG][N][3];
  real href [NG][NP];

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

  int pi_ [NP], pj_ [NP];
  int bcnt = 0, cyc = 0;
  int tb0 [NG], tb1 [NG];

  task automatic chk_elem(int g, int n, helem_t e);
    real got;
    got = f2r(e.h);
    checks++;
    if (e.i != idx_t'(pi_[n]) || e.j != idx_t'(pj_[n]) || got - href[g][n] > 2e-5 || href[g][n] - got > 2e-5) begin
      failures++;
      $display("g%0d pos %0d: (%0d,%0d) got %f ref %f", g, n, e.i, e.j, got, href[g][n]);
    end
  endtask

  always @(posedge clk) begin
    cyc++;
    ordy <= (bcnt >= 2*NB) ? ($urandom_range(0, 2) != 0) : 1'b1;
    if (rst_n && ov && ordy) begin
      int g, b;
      g = bcnt / NB; b = bcnt % NB;
      if (g < NG) begin
        chk_elem(g, 2*b, od[0]);
        checks++;
        if (ok != ((b == NB-1 && NP % 2 == 1) ? 2'b01 : 2'b11)) begin failures++; $display("keep %b", ok); end
        if (ok[1]) chk_elem(g, 2*b+1, od[1]);
        if (b == 0) tb0[g] = cyc;
        if (b == NB-1) tb1[g] = cyc;
      end
      bcnt++;
    end
  end

  initial begin
    int n; n = 0;
    for (int i = 0; i < N; i++) for (int j = i; j < N; j++) begin pi_[n] = i; pj_[n] = j; n++; end
    lv  = '{0, 1, 2, 3, 0, 0};
    at  = '{0, 0, 0, 0, 1, 2};
    spc = '{1, 1, 1, 1, 0, 0};
    ep  = '{-0.50, -0.19, -0.19, -0.19, -0.24, -0.24};
    for (int g = 0; g < NG; g++) begin
      for (int a = 0; a < 3; a++) begin
        int r0, r1, r2;
        r0 = $urandom_range(0, 1000); r1 = $urandom_range(0, 2000); r2 = $urandom_range(0, 2000);
        for (int o = 0; o < 4; o++) pos[g][o][a] = (r0 - 500) / 1000.0;
        pos[g][4][a] = pos[g][0][a] + (r1 - 1000) / 1000.0;
        pos[g][5][a] = pos[g][0][a] - (r2 - 1000) / 1000.0;
      end
      pos[g][4][0] += 1.3; pos[g][5][1] -= 1.4;
    end
    for (int o = 0; o < N; o++) begin
      orb[o] = '0;
      orb[o].atom = idx_t'(at[o]);
      orb[o].species = spc[o][0];
      orb[o].l = orb_l_e'(lv[o]);
      orb[o].eps = r2f(ep[o]);
    end
    for (int g = 0; g < NG; g++) begin
      n = 0;
      for (int i = 0; i < N; i++) for (int j = i; j < N; j++) begin
        href[g][n] = element(g, i, j); n++;
      end
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
    ng = NG; start = 1; @(negedge clk); start = 0;
    for (int g = 0; g < NG; g++)
      for (int o = 0; o < N; o++) begin
        @(negedge clk);
        cv = 1; cd = '{x: r2f(pos[g][o][0]), y: r2f(pos[g][o][1]), z: r2f(pos[g][o][2])};
        while (!cr) @(negedge clk);
        @(posedge clk);
      end
    @(negedge clk); cv = 0;
    while (busy) @(negedge clk);
    repeat (40) @(posedge clk);
    checks++; if (bcnt != NG*NB) begin failures++; $display("beats %0d", bcnt); end
    for (int g = 0; g < 2; g++) begin
      checks++;
      if (tb1[g] - tb0[g] != NB-1) begin failures++; $display("g%0d: %0d beats took %0d cycles", g, NB, tb1[g]-tb0[g]+1); end
    end
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
