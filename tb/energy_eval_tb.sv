// energy_eval_tb -- total energy from an unsorted eigenvalue stream.
// N = 8. Four solves: random eigenvalues in random order, n_occ from 1 to 8,
// use_rep on for two of them with E_rep values pushed into the FIFO ahead of
// time (two of them queued at once). The expected energy
// 2 * (sum of the n_occ lowest) + E_rep is computed here by sorting in the
// testbench. Timing: the eigenvalue stream is never stalled (eight values in
// eight consecutive cycles), and E appears n_occ + 3 cycles after the last
// value (this design's sum-then-add sequence).
module energy_eval_tb;
  import tb_fx_pkg::*;
  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic use_rep = 0;
  idx_t n_occ = '0;
  logic ev = 0, er, el = 0, rv = 0, rr, ov, ordy = 1;
  fx_t ed = '0, rd = '0, od;

  energy_eval #(.N_ORB(N)) dut (.clk, .rst_n, .use_rep, .n_occ,
    .eval_valid(ev), .eval_ready(er), .eval_data(ed), .eval_last(el),
    .erep_valid(rv), .erep_ready(rr), .erep_data(rd),
    .energy_valid(ov), .energy_ready(ordy), .energy_data(od));

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  fx_t erep_q [$];

  initial begin
    int occ [4] = '{3, 1, 8, 5};
    bit rep [4] = '{1'b1, 1'b0, 1'b1, 1'b0};
    repeat (3) @(posedge clk); rst_n = 1;
    // two E_rep values queued before the first solve
    for (int r = 0; r < 2; r++) begin
      fx_t x; x = fx_t'(longint'($urandom_range(0, 1 << 26)) - (1 << 25));
      erep_q.push_back(x);
      @(negedge clk); rv = 1; rd = x;
      @(negedge clk); rv = 0;
    end
    for (int s = 0; s < 4; s++) begin
      fx_t v [N], srt [N];
      longint exp_e;
      int t0, tl, te;
      for (int m = 0; m < N; m++) begin
        v[m] = fx_t'(longint'($urandom_range(0, 1 << 25)) - (1 << 24));
        if (m == 3) v[m] = v[1];   // a repeated value
        srt[m] = v[m];
      end
      for (int a = 1; a < N; a++)          // insertion sort, signed
        for (int b = a; b > 0 && srt[b] < srt[b-1]; b--) begin
          fx_t t; t = srt[b]; srt[b] = srt[b-1]; srt[b-1] = t;
        end
      exp_e = 0;
      for (int m = 0; m < occ[s]; m++) exp_e += 2 * longint'(srt[m]);
      if (rep[s]) exp_e += longint'(erep_q.pop_front());
      use_rep = rep[s]; n_occ = idx_t'(occ[s]);
      t0 = $time / 10;
      for (int m = 0; m < N; m++) begin
        @(negedge clk);
        ev = 1; ed = v[m]; el = (m == N-1);
        check(er, "eigenvalue stream stalled");
        @(posedge clk);
      end
      tl = $time / 10;
      @(negedge clk); ev = 0; el = 0;
      check(tl - t0 == N, "one eigenvalue per cycle");
      while (!ov) @(negedge clk);
      te = $time / 10;
      check(te - tl == occ[s] + 3, $sformatf("latency %0d", te - tl));
      check(longint'(od) == exp_e, $sformatf("solve %0d: E %0d expected %0d", s, od, exp_e));
      ordy = 0; repeat (2) @(negedge clk);
      check(ov && longint'(od) == exp_e, "E held while not taken");
      ordy = 1; @(negedge clk);
      check(!ov, "E taken");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
