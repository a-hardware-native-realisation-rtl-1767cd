// jacobi_eig -- "Hamiltonian Diagonalisation": cyclic Jacobi eigensolver.
//
// Solves H C = C eps for the real symmetric Hamiltonian (overlap neglected, so
// the ordinary eigenvalue problem). The published workflow uses a cyclic
// Jacobi solver taken from a vendor library; the paper gives no insides, so
// this is the textbook cyclic Jacobi method in its simplest sequential form.
//
// Operation:
//   COPY   the assembled matrix is read from ham_assembly (N_ORB^2 cycles) into
//          the working matrix A (upper triangle used); V is set to identity.
//          Then release is pulsed so the next matrix can be assembled.
//   SWEEP  for every (p, q), p < q, in row order: if |A_pq| > TOL, a plane
//          rotation zeroes A_pq:  theta = (A_qq - A_pp)/(2 A_pq),
//          t = sgn(theta)/(|theta| + sqrt(theta^2 + 1)) (t = 1/(2 theta) for
//          |theta| > 1024), c = 1/sqrt(t^2+1), s = t c, tau = s/(1+c);
//          A_pp -= t A_pq, A_qq += t A_pq, A_pq = 0, then for every k one cycle
//          updates A_kp, A_kq (k != p, q) and V_kp, V_kq:
//            x_kp' = x_kp - s (x_kq + tau x_kp),  x_kq' = x_kq + s (x_kp - tau x_kq).
//          Visiting a pair takes 2 cycles; a rotation adds 6 + N_ORB cycles. A
//          sweep visits N_ORB(N_ORB-1)/2 pairs.
//   The solver stops after the first sweep that needed no rotation (all
//   |A_pq| <= TOL), or after MAX_SWEEPS sweeps.
//   OUT    eigenvalues A_kk leave on a valid/ready stream in index order
//          (unsorted); the eigenvectors stay in V (column k belongs to
//          eigenvalue k) and can be read through vec_* until the next matrix is
//          copied in.
// The number of sweeps, and thus the run time, depends on the matrix, as the
// paper reports for its solver. TOL, MAX_SWEEPS and the skip rule are this
// design's choices.
module jacobi_eig
  import tb_fx_pkg::*;
#(
  parameter int  N_ORB      = 98,
  parameter int  MAX_SWEEPS = 30,
  parameter fx_t TOL        = fx_t'(64)
) (
  input  logic   clk,
  input  logic   rst_n,
  // matrix source (ham_assembly)
  input  logic   mat_full,
  output logic   mat_release,
  output idx_t   mat_rd_i,
  output idx_t   mat_rd_j,
  input  fx_t    mat_rd_data,
  // eigenvalue stream
  output logic   eval_valid,
  input  logic   eval_ready,
  output fx_t    eval_data,
  output logic   eval_last,
  // eigenvector read port (V[row][col], one cycle latency)
  input  idx_t   vec_row,
  input  idx_t   vec_col,
  output fx_t    vec_data,
  // statistics of the last solve
  output logic [7:0]  sweeps,
  output logic [31:0] rotations,
  output logic        busy
);

  localparam int MAW = $clog2(N_ORB*N_ORB);
  localparam int OW  = $clog2(N_ORB);

  typedef enum logic [3:0] {
    S_IDLE, S_COPY, S_PQ, S_THETA, S_DEN, S_T, S_CS, S_TAU, S_DIAG, S_UPD,
    S_NEXT, S_OUT
  } state_e;

  state_e st;

  fx_t a [N_ORB*N_ORB];
  fx_t v [N_ORB*N_ORB];

  idx_t p, q, k, ci, cj;
  logic cp_v;
  idx_t cp_i, cp_j;
  logic [31:0] sweep_rots;
  fx_t app, aqq, apq, theta, den, t, sq, c, s, tau;

  function automatic logic [MAW-1:0] ua(idx_t x, idx_t y);  // upper-triangle address
    return (x <= y) ? MAW'(int'(x) * N_ORB + int'(y)) : MAW'(int'(y) * N_ORB + int'(x));
  endfunction
  function automatic logic [MAW-1:0] fa(idx_t row, idx_t col);
    return MAW'(int'(row) * N_ORB + int'(col));
  endfunction

  // rotation of one (k) row/column pair
  fx_t akp, akq, vkp, vkq;
  assign akp = a[ua(k, p)];
  assign akq = a[ua(k, q)];
  assign vkp = v[fa(k, p)];
  assign vkq = v[fa(k, q)];

  assign mat_rd_i  = ci;
  assign mat_rd_j  = cj;
  assign busy      = (st != S_IDLE);
  assign eval_data = a[ua(k, k)];
  assign eval_valid = (st == S_OUT);
  assign eval_last  = (st == S_OUT) && (k == idx_t'(N_ORB-1));

  always_ff @(posedge clk) vec_data <= v[fa(vec_row, vec_col)];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE;
      p <= '0; q <= '0; k <= '0; ci <= '0; cj <= '0;
      cp_v <= 1'b0; cp_i <= '0; cp_j <= '0;
      mat_release <= 1'b0;
      sweeps <= '0; rotations <= '0; sweep_rots <= '0;
      app <= '0; aqq <= '0; apq <= '0; theta <= '0; den <= '0;
      t <= '0; sq <= '0; c <= '0; s <= '0; tau <= '0;
    end else begin
      mat_release <= 1'b0;
      // copy pipeline: the read issued last cycle returns now
      cp_v <= 1'b0;
      if (cp_v) begin
        a[fa(cp_i, cp_j)] <= mat_rd_data;
        v[fa(cp_i, cp_j)] <= (cp_i == cp_j) ? FX_ONE : '0;
      end
      unique case (st)
        S_IDLE: if (mat_full) begin
          st <= S_COPY; ci <= '0; cj <= '0;
          sweeps <= '0; rotations <= '0;
        end
        S_COPY: begin
          cp_v <= 1'b1; cp_i <= ci; cp_j <= cj;
          if (cj == idx_t'(N_ORB-1)) begin
            cj <= '0;
            if (ci == idx_t'(N_ORB-1)) begin
              // via S_NEXT, so the last copied word is written before use
              st <= S_NEXT; p <= '0; q <= '0; sweep_rots <= '0;
              mat_release <= 1'b1;
            end else ci <= ci + 1'b1;
          end else cj <= cj + 1'b1;
        end
        S_PQ: begin
          app <= a[ua(p, p)];
          aqq <= a[ua(q, q)];
          apq <= a[ua(p, q)];
          if (fx_abs(a[ua(p, q)]) > TOL) st <= S_THETA;
          else                           st <= S_NEXT;
        end
        S_THETA: begin
          theta <= fx_div(aqq - app, apq <<< 1);
          st <= S_DEN;
        end
        S_DEN: begin
          if (fx_abs(theta) > fx_t'(64'sd1024 <<< FX_FRAC))
            den <= fx_abs(theta) <<< 1;
          else
            den <= fx_abs(theta) + fx_sqrt(fx_mul(theta, theta) + FX_ONE);
          st <= S_T;
        end
        S_T: begin
          t <= (theta < 0) ? -fx_div(FX_ONE, den) : fx_div(FX_ONE, den);
          st <= S_CS;
        end
        S_CS: begin
          sq <= fx_sqrt(fx_mul(t, t) + FX_ONE);
          st <= S_TAU;
        end
        S_TAU: begin
          c  <= fx_div(FX_ONE, sq);
          s  <= fx_div(t, sq);
          st <= S_DIAG;
        end
        S_DIAG: begin
          tau <= fx_div(s, FX_ONE + c);
          a[ua(p, p)] <= app - fx_mul(t, apq);
          a[ua(q, q)] <= aqq + fx_mul(t, apq);
          a[ua(p, q)] <= '0;
          k  <= '0;
          st <= S_UPD;
        end
        S_UPD: begin
          if (k != p && k != q) begin
            a[ua(k, p)] <= akp - fx_mul(s, akq + fx_mul(tau, akp));
            a[ua(k, q)] <= akq + fx_mul(s, akp - fx_mul(tau, akq));
          end
          v[fa(k, p)] <= vkp - fx_mul(s, vkq + fx_mul(tau, vkp));
          v[fa(k, q)] <= vkq + fx_mul(s, vkp - fx_mul(tau, vkq));
          if (k == idx_t'(N_ORB-1)) begin
            st <= S_NEXT;
            rotations  <= rotations + 1'b1;
            sweep_rots <= sweep_rots + 1'b1;
          end
          k <= k + 1'b1;
        end
        S_NEXT: begin
          st <= S_PQ;
          if (q == idx_t'(N_ORB-1)) begin
            if (p == idx_t'(N_ORB-2)) begin
              // end of a sweep
              sweeps <= sweeps + 1'b1;
              p <= '0; q <= idx_t'(1);
              sweep_rots <= '0;
              if (sweep_rots == '0 || int'(sweeps) + 1 >= MAX_SWEEPS) begin
                st <= S_OUT; k <= '0;
              end
            end else begin
              p <= p + 1'b1; q <= p + idx_t'(2);
            end
          end else q <= q + 1'b1;
        end
        S_OUT: if (eval_ready) begin
          if (k == idx_t'(N_ORB-1)) st <= S_IDLE;
          k <= k + 1'b1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) st == S_UPD |-> p < q);

endmodule
