// dftb0_eval -- "Hamiltonian Elements Evaluation" for non-self-consistent DFTB.
//
// For a pair of orbitals on different atoms the element is a Slater-Koster
// combination of two-centre integrals V(R) tabulated on a regular radial grid
// held in on-chip memory. Each grid point stores the tuple (y_i, dy_i) with
// dy_i = y_{i+1} - y_i, so the linear interpolation y(r) = y_i + t*dy_i needs a
// single memory read and one multiply-add (t = fractional grid position), as
// in the published kernel. With direction cosines c = (R_n - R_m)/R:
//   s,s   : V_ss_sigma
//   s,pa  :  c_a V_sp_sigma
//   pa,s  : -c_a V_ps_sigma
//   pa,pb :  c_a c_b (V_pp_sigma - V_pp_pi) + delta_ab V_pp_pi
// Two orbitals on the same atom give eps_m on the diagonal and 0 elsewhere.
// Beyond the last grid point all integrals are zero (cut-off).
//
// Table layout (this design's choice): one word per grid point holds a sigma
// and a pi tuple, so p-p elements also need only one read. Address =
// {species_m, species_n, channel, grid index} with channel 0 = ss, 1 = sp,
// 2 = ps, 3 = pp; the pi half is used by channel 3 only. The grid starts at
// r = 0 with spacing 1/INV_DR bohr. The table is filled through the tbl_* write
// port before use.
//
// Coordinates are captured in two banks exactly as in eht_eval (one geometry
// evaluated while the next loads); a bank is released after the NPG pairs this
// instance receives per geometry (all NPAIR pairs, or every STRIDE-th one when
// it is one branch of the two-branch generator). The pipeline is NSTAGE = 8 deep, accepts one
// pair per cycle and stalls as a whole while the output is held.
module dftb0_eval
  import tb_fx_pkg::*;
#(
  parameter int N_ORB   = 98,
  parameter int N_GRID  = 512,
  parameter int INV_DR  = 50,
  parameter int STRIDE  = 1,     // this evaluator gets every STRIDE-th pair ...
  parameter int PHASE   = 0,     // ... starting at flat position PHASE
  localparam int GAW    = $clog2(N_GRID),
  localparam int TAW    = GAW + 4
) (
  input  logic           clk,
  input  logic           rst_n,
  input  orb_desc_t      orb [N_ORB],
  input  logic           tbl_we,
  input  logic [TAW-1:0] tbl_addr,
  input  logic [4*FX_W-1:0] tbl_wdata,   // {y_sigma, dy_sigma, y_pi, dy_pi}
  input  logic           coord_valid,
  output logic           coord_ready,
  input  coord_t         coord_data,
  input  logic           pair_valid,
  output logic           pair_ready,
  input  pair_t          pair_data,
  output logic           out_valid,
  input  logic           out_ready,
  output helem_t         out_data
);

  localparam int NPAIR  = N_ORB*(N_ORB+1)/2;
  localparam int NPG    = (NPAIR - PHASE + STRIDE - 1) / STRIDE;  // pairs per geometry
  localparam int NSTAGE = 8;
  localparam int CW     = $clog2(NPAIR+1);

  typedef struct packed {
    fx_t ys, dys, yp, dyp;
  } sk_ent_t;

  sk_ent_t tbl [2**TAW];
  sk_ent_t ent;

  always_ff @(posedge clk)
    if (tbl_we) tbl[tbl_addr] <= sk_ent_t'(tbl_wdata);

  // ---------------- coordinate banks ----------------
  coord_t cbuf [2][N_ORB];
  logic [1:0] full;
  logic wb, rb;
  idx_t wcnt;
  logic [CW-1:0] pcnt;

  typedef struct packed {
    logic   v;
    idx_t   i, j;
    logic   same, sm, sn, outside;
    orb_l_e lm, ln;
    fx_t    rx, ry, rz, r2, r, inv_r, pos, cx, cy, cz, t, vs, vp, h, eps;
    logic [GAW-1:0] gidx;
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
        if (pcnt == CW'(NPG-1)) begin
          pcnt <= '0; full[rb] <= 1'b0; rb <= ~rb;
        end else pcnt <= pcnt + 1'b1;
      end
    end
  end

  always_ff @(posedge clk)
    if (coord_valid && coord_ready) cbuf[wb][wcnt[$clog2(N_ORB)-1:0]] <= coord_data;

  function automatic logic [1:0] chan(orb_l_e lm, orb_l_e ln);
    return {lm != ORB_S, ln != ORB_S};
  endfunction

  function automatic fx_t cos_of(st_t s, orb_l_e l);
    unique case (l)
      ORB_PX:  return s.cx;
      ORB_PY:  return s.cy;
      default: return s.cz;
    endcase
  endfunction

  // Slater-Koster combination
  function automatic fx_t sk_combine(st_t s);
    fx_t ca, cb;
    ca = cos_of(s, s.lm);
    cb = cos_of(s, s.ln);
    if (s.same)    return (s.i == s.j) ? s.eps : '0;
    if (s.outside) return '0;
    if (s.lm == ORB_S && s.ln == ORB_S) return s.vs;
    if (s.lm == ORB_S)                  return fx_mul(cb, s.vs);
    if (s.ln == ORB_S)                  return -fx_mul(ca, s.vs);
    return fx_mul(fx_mul(ca, cb), s.vs - s.vp) + ((s.lm == s.ln) ? s.vp : '0);
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
    s0.same = (om.atom == on.atom);
    s0.sm   = om.species;
    s0.sn   = on.species;
    s0.lm   = om.l;
    s0.ln   = on.l;
    s0.rx   = cn.x - cm.x;
    s0.ry   = cn.y - cm.y;
    s0.rz   = cn.z - cm.z;
    s0.eps  = om.eps;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 1; k <= NSTAGE; k++) st[k] <= '0;
      ent <= '0;
    end else if (adv) begin
      st[1] <= s0;
      // 2: squared distance
      st[2]    <= st[1];
      st[2].r2 <= fx_mul(st[1].rx, st[1].rx) + fx_mul(st[1].ry, st[1].ry)
                  + fx_mul(st[1].rz, st[1].rz);
      // 3: distance
      st[3]   <= st[2];
      st[3].r <= fx_sqrt(st[2].r2);
      // 4: 1/R and grid position
      st[4]       <= st[3];
      st[4].inv_r <= fx_div(FX_ONE, st[3].r);
      st[4].pos   <= st[3].r * fx_t'(INV_DR);
      // 5: direction cosines, grid index and fraction
      st[5]         <= st[4];
      st[5].cx      <= fx_mul(st[4].rx, st[4].inv_r);
      st[5].cy      <= fx_mul(st[4].ry, st[4].inv_r);
      st[5].cz      <= fx_mul(st[4].rz, st[4].inv_r);
      st[5].gidx    <= GAW'(st[4].pos >>> FX_FRAC);
      st[5].outside <= (st[4].pos >>> FX_FRAC) >= fx_t'(N_GRID);
      st[5].t       <= st[4].pos & fx_t'((64'sd1 <<< FX_FRAC) - 1);
      // 6: one table read
      st[6] <= st[5];
      ent   <= tbl[{st[5].sm, st[5].sn, chan(st[5].lm, st[5].ln), st[5].gidx}];
      // 7: interpolation y + t*dy
      st[7]    <= st[6];
      st[7].vs <= ent.ys + fx_mul(st[6].t, ent.dys);
      st[7].vp <= ent.yp + fx_mul(st[6].t, ent.dyp);
      // 8: Slater-Koster combination
      st[8]   <= st[7];
      st[8].h <= sk_combine(st[7]);
    end
  end

  assign out_valid = st[NSTAGE].v;
  assign out_data  = '{i: st[NSTAGE].i, j: st[NSTAGE].j, h: st[NSTAGE].h};

  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule
