// eht_eval -- "Hamiltonian Elements Evaluation" for Extended Hueckel theory in
// the EHNDO form:  H_mm = eps_m,  H_mn = k_m k_n (eps_m + eps_n) S_mn (m != n).
//
// S_mn is the closed-form overlap of two single-Gaussian s or p functions
// (exponent alpha, prefactor d, centre R): with p = a_m + a_n, R_mn = R_n - R_m,
//   S_ss      = d_m d_n (pi/p)^(3/2) exp(-a_m a_n |R_mn|^2 / p)
//   S_s,pa    = -(a_m/p) R^a S_ss          S_pa,s = (a_n/p) R^a S_ss
//   S_pa,pa   = (1/(2p) - a_m a_n/p^2 (R^a)^2) S_ss
//   S_pa,pb   = -(a_m a_n/p^2) R^a R^b S_ss   (a != b)
// These are the formulas of the published kernel; how they are split into
// pipeline stages is this design's choice.
//
// Operation: coordinates of one geometry (N_ORB tokens) are first captured in
// one of two coordinate banks; pairs are then accepted, one per cycle, and
// evaluated against that bank while the next geometry's coordinates fill the
// other bank. The pipeline is NSTAGE = 9 cycles deep at initiation interval 1
// and stalls as a whole while the output is held (valid/ready). After NPAIR
// pairs the bank is released. The per-orbital constants arrive on the orb
// array (fixed at build time in the original design).
module eht_eval
  import tb_fx_pkg::*;
#(
  parameter int N_ORB = 98
) (
  input  logic      clk,
  input  logic      rst_n,
  input  orb_desc_t orb [N_ORB],
  input  logic      coord_valid,
  output logic      coord_ready,
  input  coord_t    coord_data,
  input  logic      pair_valid,
  output logic      pair_ready,
  input  pair_t     pair_data,
  output logic      out_valid,
  input  logic      out_ready,
  output helem_t    out_data
);

  localparam int NPAIR  = N_ORB*(N_ORB+1)/2;
  localparam int NSTAGE = 9;
  localparam int CW     = $clog2(NPAIR+1);

  // ---------------- coordinate banks ----------------
  coord_t cbuf [2][N_ORB];
  logic [1:0] full;
  logic wb, rb;
  idx_t wcnt;
  logic [CW-1:0] pcnt;

  typedef struct packed {
    logic   v;
    idx_t   i, j;
    orb_l_e lm, ln;
    fx_t    rx, ry, rz;
    fx_t    am, an, p, amn, dd, r2;
    fx_t    inv_p, q, pip, sq, qp, expo, pref, ex, sss, f, s;
    fx_t    hfac, eps;
  } st_t;

  st_t s0;
  st_t st [1:NSTAGE];
  logic adv;

  assign adv         = !st[NSTAGE].v || out_ready;
  assign coord_ready = !full[wb];
  assign pair_ready  = full[rb] && adv;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full <= '0; wb <= 1'b0; rb <= 1'b0; wcnt <= '0; pcnt <= '0;
    end else begin
      if (coord_valid && coord_ready) begin
        if (wcnt == idx_t'(N_ORB-1)) begin
          wcnt <= '0; full[wb] <= 1'b1; wb <= ~wb;
        end else wcnt <= wcnt + 1'b1;
      end
      if (pair_valid && pair_ready) begin
        if (pcnt == CW'(NPAIR-1)) begin
          pcnt <= '0; full[rb] <= 1'b0; rb <= ~rb;
        end else pcnt <= pcnt + 1'b1;
      end
    end
  end

  always_ff @(posedge clk)
    if (coord_valid && coord_ready) cbuf[wb][wcnt[$clog2(N_ORB)-1:0]] <= coord_data;

  // angular factor of the overlap relative to S_ss
  function automatic fx_t ang_factor(st_t s);
    fx_t ra, rb2;
    unique case (s.ln)
      ORB_PX: rb2 = s.rx;
      ORB_PY: rb2 = s.ry;
      default: rb2 = s.rz;
    endcase
    unique case (s.lm)
      ORB_PX: ra = s.rx;
      ORB_PY: ra = s.ry;
      default: ra = s.rz;
    endcase
    if (s.lm == ORB_S && s.ln == ORB_S) return FX_ONE;
    if (s.lm == ORB_S)                  return -fx_mul(fx_mul(s.am, s.inv_p), rb2);
    if (s.ln == ORB_S)                  return fx_mul(fx_mul(s.an, s.inv_p), ra);
    if (s.lm == s.ln)                   return (s.inv_p >>> 1) - fx_mul(s.qp, fx_mul(ra, ra));
    return -fx_mul(s.qp, fx_mul(ra, rb2));
  endfunction

  // stage 0: fetch operands of the accepted pair
  always_comb begin
    orb_desc_t om, on;
    coord_t    cm, cn;
    om = orb[pair_data.i[$clog2(N_ORB)-1:0]];
    on = orb[pair_data.j[$clog2(N_ORB)-1:0]];
    cm = cbuf[rb][pair_data.i[$clog2(N_ORB)-1:0]];
    cn = cbuf[rb][pair_data.j[$clog2(N_ORB)-1:0]];
    s0      = '0;
    s0.v    = pair_valid && pair_ready;
    s0.i    = pair_data.i;
    s0.j    = pair_data.j;
    s0.lm   = om.l;
    s0.ln   = on.l;
    s0.rx   = cn.x - cm.x;
    s0.ry   = cn.y - cm.y;
    s0.rz   = cn.z - cm.z;
    s0.am   = om.alpha;
    s0.an   = on.alpha;
    s0.dd   = fx_mul(om.d, on.d);
    s0.hfac = fx_mul(fx_mul(om.k, on.k), om.eps + on.eps);
    s0.eps  = om.eps;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 1; k <= NSTAGE; k++) st[k] <= '0;
    end else if (adv) begin
      st[1] <= s0;
      // 2: exponent sum, product, squared distance
      st[2]      <= st[1];
      st[2].p    <= st[1].am + st[1].an;
      st[2].amn  <= fx_mul(st[1].am, st[1].an);
      st[2].r2   <= fx_mul(st[1].rx, st[1].rx) + fx_mul(st[1].ry, st[1].ry)
                    + fx_mul(st[1].rz, st[1].rz);
      // 3: 1/p
      st[3]       <= st[2];
      st[3].inv_p <= fx_div(FX_ONE, st[2].p);
      // 4: a_m a_n / p, pi / p
      st[4]     <= st[3];
      st[4].q   <= fx_mul(st[3].amn, st[3].inv_p);
      st[4].pip <= fx_mul(FX_PI, st[3].inv_p);
      // 5: sqrt(pi/p), exponent, a_m a_n / p^2
      st[5]      <= st[4];
      st[5].sq   <= fx_sqrt(st[4].pip);
      st[5].expo <= fx_mul(st[4].q, st[4].r2);
      st[5].qp   <= fx_mul(st[4].q, st[4].inv_p);
      // 6: (pi/p)^(3/2), exp(-q R^2)
      st[6]      <= st[5];
      st[6].pref <= fx_mul(st[5].pip, st[5].sq);
      st[6].ex   <= fx_exp_neg(st[5].expo);
      // 7: S_ss and angular factor
      st[7]     <= st[6];
      st[7].sss <= fx_mul(fx_mul(st[6].dd, st[6].pref), st[6].ex);
      st[7].f   <= ang_factor(st[6]);
      // 8: S
      st[8]   <= st[7];
      st[8].s <= fx_mul(st[7].f, st[7].sss);
      // 9: H
      st[9]   <= st[8];
      st[9].s <= (st[8].i == st[8].j) ? st[8].eps : fx_mul(st[8].hfac, st[8].s);
    end
  end

  assign out_valid = st[NSTAGE].v;
  assign out_data  = '{i: st[NSTAGE].i, j: st[NSTAGE].j, h: st[NSTAGE].s};

  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule
