// jacobi_eig_tb -- cyclic Jacobi eigensolver.
// The testbench plays the Hamiltonian buffer: it holds a symmetric N = 6
// matrix, raises mat_full and answers the solver's reads one cycle later.
// Matrix 1 is random (entries in [-1, 1]); every eigenpair must satisfy
// |A v - lambda v| < 2e-4 with the original matrix in double precision, V must
// be orthonormal to 2e-4, and the eigenvalue sum must equal the trace. Matrix 2
// is diagonal: one sweep with no rotation must follow. Timing: from start to the
// first eigenvalue the solver must take exactly
//   1 + N^2 (copy) + 1 + sweeps * N(N-1)/2 * 2 + rotations * (6 + N)
// cycles, and release must pulse once per matrix. At least two sweeps must be
// needed for matrix 1 (the run time depends on the matrix).
module jacobi_eig_tb;
  import tb_fx_pkg::*;
  localparam int N = 6, NP = N*(N-1)/2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic mfull = 0, mrel, evv, evr = 1, elast, busy;
  idx_t mi, mj, vr = '0, vc = '0;
  fx_t md = '0, evd, vd;
  logic [7:0] sweeps;
  logic [31:0] rots;

  jacobi_eig #(.N_ORB(N)) dut (.clk, .rst_n, .mat_full(mfull), .mat_release(mrel),
    .mat_rd_i(mi), .mat_rd_j(mj), .mat_rd_data(md),
    .eval_valid(evv), .eval_ready(evr), .eval_data(evd), .eval_last(elast),
    .vec_row(vr), .vec_col(vc), .vec_data(vd), .sweeps, .rotations(rots), .busy);

  function automatic fx_t r2f(real r); return fx_t'(longint'(r * 16777216.0)); endfunction
  function automatic real f2r(fx_t f); return real'(longint'(f)) / 16777216.0; endfunction

  fx_t amat [N][N];
  always @(posedge clk) md <= amat[mi][mj];

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int nrel = 0;
  always @(posedge clk) if (rst_n && mrel) nrel++;

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int m = 0; m < 2; m++) begin
      real lam [N], vec [N][N], tr, sl;
      int t0, t1, k;
      tr = 0;
      for (int i = 0; i < N; i++) for (int j = i; j < N; j++) begin
        int r; r = $urandom_range(0, 2000);
        amat[i][j] = (m == 0 || i == j) ? r2f((r - 1000) / 1000.0) : '0;
        amat[j][i] = amat[i][j];
        if (i == j) tr += f2r(amat[i][j]);
      end
      @(negedge clk); mfull = 1; t0 = $time / 10;
      while (!mrel) @(negedge clk);
      mfull = 0;
      while (!evv) @(negedge clk);
      t1 = $time / 10;
      $display("matrix %0d: %0d sweeps, %0d rotations, %0d cycles", m, sweeps, rots, t1 - t0);
      check(t1 - t0 == 1 + N*N + 1 + int'(sweeps)*NP*2 + int'(rots)*(6 + N), "cycle count");
      if (m == 0) check(sweeps >= 2, "more than one sweep");
      else        check(sweeps == 1 && rots == 0, "diagonal matrix: one sweep, no rotation");
      k = 0; sl = 0;
      while (k < N) begin
        @(posedge clk);
        if (evv && evr) begin
          lam[k] = f2r(evd); sl += lam[k];
          check(elast == (k == N-1), "last flag");
          k++;
        end
      end
      @(negedge clk);
      check(!evv && !busy, "idle after the eigenvalues");
      check(sl - tr < 1e-4 && tr - sl < 1e-4, "trace");
      for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
        vr = idx_t'(i); vc = idx_t'(j);
        @(negedge clk);
        vec[i][j] = f2r(vd);
      end
      for (int c = 0; c < N; c++) begin
        real res; res = 0;
        for (int i = 0; i < N; i++) begin
          real av; av = 0;
          for (int j = 0; j < N; j++) av += f2r(amat[i][j]) * vec[j][c];
          res += (av - lam[c]*vec[i][c])**2;
        end
        check(res < 4e-8, $sformatf("eigenpair %0d residual %g", c, $sqrt(res)));
        for (int d = 0; d < N; d++) begin
          real dot; dot = 0;
          for (int i = 0; i < N; i++) dot += vec[i][c]*vec[i][d];
          if (c == d) dot -= 1.0;
          check(dot < 2e-4 && dot > -2e-4, "orthonormal");
        end
      end
    end
    check(nrel == 2, "one release per matrix");
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
