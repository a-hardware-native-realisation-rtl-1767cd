// rep_eval_tb -- repulsive-energy evaluator against a real-arithmetic model.
// Four atoms (two carbons, two hydrogens; six orbitals, so the carbon tokens
// repeat and the orbital-to-atom map is exercised) and a random cubic spline
// per pair type. Eight geometries are streamed; two put an atom beyond the
// last spline segment, and after the third result the erep output is stalled
// at random to exercise the hold rule of the valid/ready handshake. Each E_rep must equal the sum over the six atom pairs
// of c0 + r(c1 + r(c2 + r c3)) within 1e-4. Timing: the Horner engine takes one
// pair every four cycles, so with pairs always offered the six pairs of a
// geometry need 4*6 cycles between consecutive results.
module rep_eval_tb;
  import tb_fx_pkg::*;
  localparam int N = 6, NA = 4, NAP = NA*(NA-1)/2, NS = 16, IDR = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  orb_desc_t orb [N];
  logic cw = 0;
  logic [$clog2(NS)+3:0] ca = '0;
  fx_t cdat = '0;
  logic cv = 0, cr, av = 0, ar, ev, erdy;
  coord_t cd;
  pair_t ad;
  fx_t ed;

  rep_eval #(.N_ORB(N), .N_ATOM(NA), .N_SEG(NS), .INV_DR(IDR)) dut (.clk, .rst_n, .orb,
    .coef_we(cw), .coef_addr(ca), .coef_wdata(cdat),
    .coord_valid(cv), .coord_ready(cr), .coord_data(cd),
    .apair_valid(av), .apair_ready(ar), .apair_data(ad),
    .erep_valid(ev), .erep_ready(erdy), .erep_data(ed));

  function automatic fx_t r2f(real r); return fx_t'(longint'(r * 16777216.0)); endfunction
  function automatic real f2r(fx_t f); return real'(longint'(f)) / 16777216.0; endfunction

  localparam int NG = 8;
  real coef [4][NS][4];   // [pair type][segment][k], quantised
  real pos [NG][NA][3];
  int  spc [NA];
  int  oat [N];
  real eref [NG];

  function automatic real vrep(int pt, real r);
    int s;
    s = int'($floor(r * IDR));
    if (s >= NS) return 0.0;
    return coef[pt][s][0] + r*(coef[pt][s][1] + r*(coef[pt][s][2] + r*coef[pt][s][3]));
  endfunction

  int ecnt = 0, cyc = 0;
  int tev [NG];
  always @(negedge clk) erdy <= (ecnt < 3) || ($urandom_range(0, 2) != 0);
  always @(posedge clk) begin
    cyc++;
    if (rst_n && ev && erdy) begin
      real got;
      got = f2r(ed);
      checks++;
      if (ecnt >= NG || got - eref[ecnt] > 1e-4 || eref[ecnt] - got > 1e-4) begin
        failures++; $display("E_rep %0d: got %f ref %f", ecnt, got, ecnt < NG ? eref[ecnt] : 0.0);
      end
      if (ecnt < NG) tev[ecnt] = cyc;
      ecnt++;
    end
  end

  initial begin
    spc = '{1, 0, 1, 0};
    oat = '{0, 0, 1, 2, 2, 3};   // atom 0: 2 tokens, atom 2: 2 tokens
    for (int o = 0; o < N; o++) begin
      orb[o] = '0; orb[o].atom = idx_t'(oat[o]); orb[o].species = spc[oat[o]][0];
    end
    for (int pt = 0; pt < 4; pt++) for (int s = 0; s < NS; s++) for (int k = 0; k < 4; k++) begin
      int r; r = $urandom_range(0, 2000);
      coef[pt][s][k] = f2r(r2f((r - 1000) / (1000.0 * (1 << k))));
    end
    for (int g = 0; g < NG; g++) begin
      for (int a = 0; a < NA; a++) for (int x = 0; x < 3; x++) begin
        int r; r = $urandom_range(0, 1000);
        pos[g][a][x] = (r - 500) / 400.0 + ((a == x) ? 0.8 : 0.0);
      end
      eref[g] = 0;
    end
    pos[1][3][0] = 9.0;   // beyond NS/IDR = 4 bohr from all others
    pos[5][0][1] = -9.0;
    for (int g = 0; g < NG; g++)
      for (int a = 0; a < NA; a++) for (int b = a+1; b < NA; b++) begin
        real rr; int pt;
        rr = 0;
        for (int x = 0; x < 3; x++) rr += (pos[g][b][x]-pos[g][a][x])**2;
        pt = (spc[a] | spc[b]) * 2 + (spc[a] & spc[b]);
        eref[g] += vrep(pt, $sqrt(rr));
      end
    repeat (3) @(posedge clk); rst_n = 1;
    for (int pt = 0; pt < 4; pt++) for (int s = 0; s < NS; s++) for (int k = 0; k < 4; k++) begin
      @(negedge clk); cw = 1; ca = {pt[1:0], s[$clog2(NS)-1:0], k[1:0]}; cdat = r2f(coef[pt][s][k]);
    end
    @(negedge clk); cw = 0;
    fork
      for (int g = 0; g < NG; g++)
        for (int o = 0; o < N; o++) begin
          @(negedge clk);
          cv = 1;
          cd = '{x: r2f(pos[g][oat[o]][0]), y: r2f(pos[g][oat[o]][1]), z: r2f(pos[g][oat[o]][2])};
          while (!cr) @(negedge clk);
          @(posedge clk);
          @(negedge clk); cv = 0;
        end
      for (int g = 0; g < NG; g++)
        for (int a = 0; a < NA; a++) for (int b = a+1; b < NA; b++) begin
          @(negedge clk);
          av = 1; ad = '{i: idx_t'(a), j: idx_t'(b)};
          while (!ar) @(negedge clk);
          @(posedge clk);
          @(negedge clk); av = 0;
        end
    join
    repeat (200) @(posedge clk);
    checks++; if (ecnt != NG) begin failures++; $display("count %0d", ecnt); end
    // pairs 1..2 streams were back to back once the banks were loaded
    checks++; if (tev[2] - tev[1] != 4*NAP) begin failures++; $display("rate: %0d cycles", tev[2]-tev[1]); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
