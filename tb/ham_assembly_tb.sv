// ham_assembly_tb -- Hamiltonian assembly buffer.
// Two matrices (N = 5, 15 elements each) are streamed with the elements in a
// random order; the first one back to back, the second with random gaps. The
// test checks that full rises exactly after the last element, that the input is
// refused while full, that every (i, j) and mirrored (j, i) read returns the
// element written, and that release lets the next matrix in. Timing: the
// buffer accepts one element per cycle, so the first matrix must be taken in
// 15 consecutive cycles.
module ham_assembly_tb;
  import tb_fx_pkg::*;
  localparam int N = 5, NP = N*(N+1)/2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic iv = 0, ir, full, rel = 0;
  helem_t id;
  idx_t ri = '0, rj = '0;
  fx_t rd;

  ham_assembly #(.N_ORB(N)) dut (.clk, .rst_n, .in_valid(iv), .in_ready(ir), .in_data(id),
    .full, .release_mat(rel), .rd_i(ri), .rd_j(rj), .rd_data(rd));

  fx_t val [N][N];
  int oi [NP], oj [NP];

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    int cyc0, cyc1;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int m = 0; m < 2; m++) begin
      int n; n = 0;
      for (int i = 0; i < N; i++) for (int j = i; j < N; j++) begin
        oi[n] = i; oj[n] = j; n++;
        val[i][j] = fx_t'($urandom);
      end
      for (int a = NP-1; a > 0; a--) begin   // shuffle
        int b, t;
        b = $urandom_range(0, a);
        t = oi[a]; oi[a] = oi[b]; oi[b] = t;
        t = oj[a]; oj[a] = oj[b]; oj[b] = t;
      end
      cyc0 = $time;
      for (int e = 0; e < NP; e++) begin
        @(negedge clk);
        check(!full, "full before the last element");
        if (m == 1 && $urandom_range(0, 2) == 0) begin iv = 0; @(negedge clk); end
        iv = 1; id = '{i: idx_t'(oi[e]), j: idx_t'(oj[e]), h: val[oi[e]][oj[e]]};
        while (!ir) @(negedge clk);
        @(posedge clk);
      end
      cyc1 = $time;
      @(negedge clk); iv = 0;
      if (m == 0) check((cyc1 - cyc0) / 10 == NP, "one element per cycle");
      check(full, "full after the last element");
      check(!ir, "input refused while full");
      // read back every element, both orientations
      for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
        ri = idx_t'(i); rj = idx_t'(j);
        @(negedge clk);
        check(rd == (i <= j ? val[i][j] : val[j][i]), $sformatf("read (%0d,%0d)", i, j));
      end
      rel = 1; @(negedge clk); rel = 0;
      check(!full && ir, "released");
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
