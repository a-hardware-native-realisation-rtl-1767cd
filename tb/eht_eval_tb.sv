// eht_eval_tb -- EHT element evaluator against a real-arithmetic model.
// A 6-orbital system (carbon s, px, py, pz and two hydrogen s) is evaluated for
// two random geometries. Every element must match the closed-form overlap and
// EHNDO formula computed here in double precision within 2e-5 hartree. The
// first geometry runs without back-pressure and must deliver its 21 elements
// in 21 consecutive cycles (initiation interval 1); the second geometry's
// coordinates are sent while the first is still being evaluated (double
// buffer) and its output sees random back-pressure.
module eht_eval_tb;
  import tb_fx_pkg::*;
  localparam int N = 6, NP = N*(N+1)/2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  orb_desc_t orb [N];
  logic cv = 0, cr, pv = 0, pr, ov, ordy = 1;
  coord_t cd;
  pair_t pd;
  helem_t od;

  eht_eval #(.N_ORB(N)) dut (.clk, .rst_n, .orb, .coord_valid(cv), .coord_ready(cr),
    .coord_data(cd), .pair_valid(pv), .pair_ready(pr), .pair_data(pd),
    .out_valid(ov), .out_ready(ordy), .out_data(od));

  function automatic fx_t r2f(real r); return fx_t'(longint'(r * 16777216.0)); endfunction
  function automatic real f2r(fx_t f); return real'(longint'(f)) / 16777216.0; endfunction

  real al [N], dv [N], ep [N], kv [N];
  int  lv [N];
  real pos [2][N][3];
  real href [2][NP];
  localparam real PI = 3.14159265358979;

  function automatic real overlap(int g, int m, int n);
    real p, r[3], r2, sss;
    p = al[m] + al[n];
    r2 = 0;
    for (int a = 0; a < 3; a++) begin r[a] = pos[g][n][a] - pos[g][m][a]; r2 += r[a]*r[a]; end
    sss = dv[m]*dv[n] * (PI/p)**1.5 * $exp(-al[m]*al[n]/p*r2);
    if (lv[m] == 0 && lv[n] == 0) return sss;
    if (lv[m] == 0) return -al[m]/p * r[lv[n]-1] * sss;
    if (lv[n] == 0) return al[n]/p * r[lv[m]-1] * sss;
    if (lv[m] == lv[n]) return (1.0/(2*p) - al[m]*al[n]/(p*p)*r[lv[m]-1]**2) * sss;
    return -al[m]*al[n]/(p*p) * r[lv[m]-1]*r[lv[n]-1] * sss;
  endfunction

  int ocnt = 0, cyc = 0, t0 = -1, t1 = -1;
  logic bp = 1;
  always @(posedge clk) begin
    cyc++;
    ordy <= (bp && ocnt >= NP) ? ($urandom_range(0, 1) == 1) : 1'b1;
    if (rst_n && ov && ordy) begin
      int g, n, ei, ej;
      real got;
      g = ocnt / NP; n = ocnt % NP;
      ei = 0; ej = 0;
      begin int m; m = 0;
        for (int i = 0; i < N; i++) for (int j = i; j < N; j++) begin
          if (m == n) begin ei = i; ej = j; end
          m++;
        end
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
    // carbon s, px, py, pz; two hydrogens
    lv = '{0, 1, 2, 3, 0, 0};
    al = '{0.32, 0.28, 0.28, 0.28, 0.42, 0.42};
    dv = '{0.30, 0.45, 0.45, 0.45, 0.35, 0.35};
    ep = '{-0.78, -0.42, -0.42, -0.42, -0.50, -0.50};
    kv = '{0.935, 0.935, 0.935, 0.935, 0.935, 0.935};
    for (int g = 0; g < 2; g++) begin
      real c[3], h1[3], h2[3];
      for (int a = 0; a < 3; a++) begin
        int r0, r1, r2;
        r0 = $urandom_range(0, 1000); r1 = $urandom_range(0, 2000); r2 = $urandom_range(0, 2000);
        c[a]  = (r0 - 500) / 1000.0;
        h1[a] = c[a] + (r1 - 1000) / 800.0;
        h2[a] = c[a] - (r2 - 1000) / 800.0;
      end
      h1[0] += 1.2; h2[1] -= 1.2;
      for (int o = 0; o < 4; o++) for (int a = 0; a < 3; a++) pos[g][o][a] = c[a];
      for (int a = 0; a < 3; a++) begin pos[g][4][a] = h1[a]; pos[g][5][a] = h2[a]; end
    end
    for (int o = 0; o < N; o++) begin
      orb[o].atom = (o < 4) ? '0 : idx_t'(o - 3);
      orb[o].species = (o < 4);
      orb[o].l = orb_l_e'(lv[o]);
      orb[o].alpha = r2f(al[o]); orb[o].d = r2f(dv[o]);
      orb[o].eps = r2f(ep[o]);   orb[o].k = r2f(kv[o]);
    end
    for (int g = 0; g < 2; g++) begin
      int n; n = 0;
      for (int i = 0; i < N; i++) for (int j = i; j < N; j++) begin
        href[g][n] = (i == j) ? ep[i] : kv[i]*kv[j]*(ep[i]+ep[j])*overlap(g, i, j);
        n++;
      end
    end
    repeat (3) @(posedge clk); rst_n = 1;
    // geometry 0 coordinates
    for (int o = 0; o < N; o++) begin
      @(negedge clk);
      cv = 1; cd = '{x: r2f(pos[0][o][0]), y: r2f(pos[0][o][1]), z: r2f(pos[0][o][2])};
      while (!cr) @(negedge clk);
      @(posedge clk);
    end
    @(negedge clk); cv = 0;
    // geometry 1 coordinates go to the second bank
    for (int o = 0; o < N; o++) begin
      @(negedge clk);
      cv = 1; cd = '{x: r2f(pos[1][o][0]), y: r2f(pos[1][o][1]), z: r2f(pos[1][o][2])};
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
    repeat (3000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
