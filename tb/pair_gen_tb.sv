// pair_gen_tb -- checks the three pair walkers against a nested-loop model.
// A full walker (STRIDE 1, with atom pairs) and the even/odd stride-2 walkers
// run for two geometries of a 7-orbital, 3-atom system. The full walker sees
// random back-pressure; its sequence must equal for i, for j >= i. The
// even/odd walkers run without back-pressure: together they must give the
// same flat order (even at even positions, odd at odd positions) and each
// must deliver one pair per cycle. Atom pairs must be all a < b in order.
module pair_gen_tb;
  import tb_fx_pkg::*;
  localparam int N = 7, NA = 3, NP = N*(N+1)/2;
  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic b_f, b_e, b_o;
  logic fv, fr, av, ar, ev, ov, dummy_v1, dummy_v2;
  pair_t fd, ad, ed, od, dd1, dd2;

  pair_gen #(.N_ORB(N), .N_ATOM(NA), .MAX_GEOM(2), .STRIDE(1), .PHASE(0), .ATOM_PAIRS(1)) u_f (
    .clk, .rst_n, .start, .n_geom(2'd2), .busy(b_f), .pair_valid(fv), .pair_ready(fr),
    .pair_data(fd), .apair_valid(av), .apair_ready(ar), .apair_data(ad));
  pair_gen #(.N_ORB(N), .N_ATOM(NA), .MAX_GEOM(2), .STRIDE(2), .PHASE(0), .ATOM_PAIRS(0)) u_e (
    .clk, .rst_n, .start, .n_geom(2'd2), .busy(b_e), .pair_valid(ev), .pair_ready(1'b1),
    .pair_data(ed), .apair_valid(dummy_v1), .apair_ready(1'b1), .apair_data(dd1));
  pair_gen #(.N_ORB(N), .N_ATOM(NA), .MAX_GEOM(2), .STRIDE(2), .PHASE(1), .ATOM_PAIRS(0)) u_o (
    .clk, .rst_n, .start, .n_geom(2'd2), .busy(b_o), .pair_valid(ov), .pair_ready(1'b1),
    .pair_data(od), .apair_valid(dummy_v2), .apair_ready(1'b1), .apair_data(dd2));

  int ref_i [NP], ref_j [NP];
  int fcnt = 0, acnt = 0, ecnt = 0, ocnt = 0, cyc = 0, first_e = -1, last_e = -1;

  initial begin
    int n = 0;
    for (int i = 0; i < N; i++) for (int j = i; j < N; j++) begin ref_i[n] = i; ref_j[n] = j; n++; end
  end

  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    fr <= ($urandom_range(0, 3) != 0);
    ar <= ($urandom_range(0, 1) != 0);
  end

  always @(posedge clk) if (rst_n) begin
    if (fv && fr) begin
      int n; n = fcnt % NP;
      checks++;
      if (fd.i != idx_t'(ref_i[n]) || fd.j != idx_t'(ref_j[n])) begin
        failures++; $display("full pair %0d: got (%0d,%0d)", fcnt, fd.i, fd.j);
      end
      fcnt++;
    end
    if (av && ar) begin
      int n, a, b, m;
      n = acnt % (NA*(NA-1)/2); m = 0; a = 0; b = 0;
      for (int x = 0; x < NA; x++) for (int y = x+1; y < NA; y++) begin
        if (m == n) begin a = x; b = y; end
        m++;
      end
      checks++;
      if (ad.i != idx_t'(a) || ad.j != idx_t'(b)) begin
        failures++; $display("atom pair %0d: got (%0d,%0d)", acnt, ad.i, ad.j);
      end
      acnt++;
    end
    if (ev) begin
      int n; n = (ecnt % ((NP+1)/2)) * 2;
      checks++;
      if (ed.i != idx_t'(ref_i[n]) || ed.j != idx_t'(ref_j[n])) begin
        failures++; $display("even pair %0d: got (%0d,%0d)", ecnt, ed.i, ed.j);
      end
      if (first_e < 0) first_e = cyc;
      last_e = cyc;
      ecnt++;
    end
    if (ov) begin
      int n; n = (ocnt % (NP/2)) * 2 + 1;
      checks++;
      if (od.i != idx_t'(ref_i[n]) || od.j != idx_t'(ref_j[n])) begin
        failures++; $display("odd pair %0d: got (%0d,%0d)", ocnt, od.i, od.j);
      end
      ocnt++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); start <= 1; @(posedge clk); start <= 0;
    repeat (5) @(posedge clk);
    wait (!b_f && !b_e && !b_o);
    repeat (3) @(posedge clk);
    checks++; if (fcnt != 2*NP) begin failures++; $display("full count %0d", fcnt); end
    checks++; if (acnt != 2*NA*(NA-1)/2) begin failures++; $display("atom count %0d", acnt); end
    checks++; if (ecnt != 2*((NP+1)/2)) begin failures++; $display("even count %0d", ecnt); end
    checks++; if (ocnt != 2*(NP/2)) begin failures++; $display("odd count %0d", ocnt); end
    // initiation interval 1: consecutive cycles, no gaps
    checks++; if (last_e - first_e != ecnt - 1) begin failures++; $display("even II: span %0d for %0d", last_e-first_e, ecnt); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
