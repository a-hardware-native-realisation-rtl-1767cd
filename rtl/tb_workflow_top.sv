// tb_workflow_top -- hardware-native tight-binding workflow (EHT or DFTB0).
//
// One geometry after another, the device builds the tight-binding Hamiltonian
// of a molecule and diagonalises it without host help. The stages form a
// streaming task graph (valid/ready streams between independent kernels):
//
//   coordinate memory -> coord_loader -> (x,y,z) tokens, broadcast
//   pair_gen ------------------------> (i,j) orbital pairs + atom pairs
//   eht_eval | dftb0_eval -----------> H_ij elements, one per cycle
//   ham_assembly --------------------> complete matrix H
//   jacobi_eig ----------------------> orbital energies eps_k (+ vectors)
//   energy_eval <-- rep_eval (DFTB0 repulsive energy from the atom pairs)
//                                     -> E per geometry
//
// A third mode runs the stand-alone Hamiltonian generator (hgen_standalone):
// duplicated even/odd pair generators and DFTB0 evaluators whose merged
// element stream leaves on the h_* port instead of being diagonalised.
//
// The paper builds one bitstream per method, molecule size and batch size.
// Here both element evaluators and the stand-alone generator sit side by side
// and the mode input, sampled at start, selects which one runs; parameters fix
// the molecule size (N_ORB orbitals on N_ATOM atoms; defaults are n-hexadecane,
// C16H34, the largest molecule of the full-workflow benchmarks) and the batch
// capacity MAX_GEOM (ten geometries).
//
// Host side (replacing the soft processor of the original system): write the
// per-orbital constants (orb_*), the Slater-Koster table (sk_*), the repulsive
// spline (rep_*) and the coordinates (coord_*; word (g*N_ORB+i)*3+k holds
// component k of orbital i of geometry g), then pulse start with mode, n_geom
// and n_occ. E arrives once per geometry on energy_*; in MODE_HGEN elements
// arrive on h_* (h_keep[0] is always 1, see helem_merge). busy falls when the
// run is complete.
module tb_workflow_top
  import tb_fx_pkg::*;
#(
  parameter int N_ORB      = 98,
  parameter int N_ATOM     = 50,
  parameter int MAX_GEOM   = 10,
  parameter int N_GRID     = 512,
  parameter int SK_INV_DR  = 50,
  parameter int N_SEG      = 128,
  parameter int REP_INV_DR = 32,
  parameter int MAX_SWEEPS = 30,
  localparam int GW        = $clog2(MAX_GEOM+1),
  localparam int CAW       = $clog2(MAX_GEOM*N_ORB*3),
  localparam int TAW       = $clog2(N_GRID) + 4,
  localparam int RAW       = $clog2(N_SEG) + 4
) (
  input  logic              clk,
  input  logic              rst_n,
  // host loading
  input  logic              orb_we,
  input  idx_t              orb_waddr,
  input  orb_desc_t         orb_wdata,
  input  logic              sk_we,
  input  logic [TAW-1:0]    sk_addr,
  input  logic [4*FX_W-1:0] sk_wdata,
  input  logic              rep_we,
  input  logic [RAW-1:0]    rep_addr,
  input  fx_t               rep_wdata,
  input  logic              coord_we,
  input  logic [CAW-1:0]    coord_waddr,
  input  fx_t               coord_wdata,
  // control
  input  logic              start,
  input  tb_mode_e          mode,
  input  logic [GW-1:0]     n_geom,
  input  idx_t              n_occ,
  output logic              busy,
  // results
  output logic              energy_valid,
  input  logic              energy_ready,
  output fx_t               energy_data,
  input  idx_t              vec_row,
  input  idx_t              vec_col,
  output fx_t               vec_data,
  output logic [7:0]        jac_sweeps,
  output logic [31:0]       jac_rotations,
  output logic              h_valid,
  input  logic              h_ready,
  output helem_t [1:0]      h_data,
  output logic   [1:0]      h_keep
);

  localparam int NPAIR = N_ORB*(N_ORB+1)/2;
  localparam int NBEAT = (NPAIR+1)/2;

  // ---------------- host-written memories ----------------
  orb_desc_t orb_tab [N_ORB];
  fx_t       cmem [MAX_GEOM*N_ORB*3];
  logic [CAW-1:0] cm_addr;
  logic      cm_rd;
  fx_t       cm_data;

  always_ff @(posedge clk) begin
    if (orb_we) orb_tab[orb_waddr[$clog2(N_ORB)-1:0]] <= orb_wdata;
    if (coord_we) cmem[coord_waddr] <= coord_wdata;
    if (cm_rd) cm_data <= cmem[cm_addr];
  end

  // ---------------- run control ----------------
  tb_mode_e      mode_r;
  logic          run, go;
  logic [GW-1:0] n_geom_r;
  logic [GW-1:0] e_cnt;
  logic [$clog2(MAX_GEOM*NBEAT+1)-1:0] b_cnt;
  logic          ld_busy, pg_busy, hg_busy, jac_busy;

  assign go   = start && !run && n_geom != '0;
  assign busy = run || ld_busy || pg_busy || hg_busy || jac_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; mode_r <= MODE_EHT; n_geom_r <= '0; e_cnt <= '0; b_cnt <= '0;
    end else begin
      if (go) begin
        run <= 1'b1; mode_r <= mode; n_geom_r <= n_geom; e_cnt <= '0; b_cnt <= '0;
      end else if (run) begin
        if (energy_valid && energy_ready) e_cnt <= e_cnt + 1'b1;
        if (h_valid && h_ready) b_cnt <= b_cnt + 1'b1;
        if (mode_r == MODE_HGEN) begin
          if (int'(b_cnt) == int'(n_geom_r) * NBEAT) run <= 1'b0;
        end else if (e_cnt == n_geom_r) run <= 1'b0;
      end
    end
  end

  logic is_eht, is_dftb, is_hgen;
  assign is_eht  = (mode_r == MODE_EHT);
  assign is_dftb = (mode_r == MODE_DFTB0);
  assign is_hgen = (mode_r == MODE_HGEN);

  // ---------------- coordinate loading and broadcast ----------------
  logic   c_v, c_r;
  coord_t c_d;
  logic   r_eht, r_dftb, r_rep, r_hg;

  coord_loader #(.N_ORB(N_ORB), .MAX_GEOM(MAX_GEOM)) u_load (
    .clk, .rst_n, .start(go), .n_geom, .busy(ld_busy),
    .mem_addr(cm_addr), .mem_rd(cm_rd), .mem_data(cm_data),
    .out_valid(c_v), .out_ready(c_r), .out_data(c_d));

  // the token goes to every consumer of the selected mode at once
  logic rr_eht, rr_dftb, rr_rep, rr_hg;
  assign rr_eht  = !is_eht  || r_eht;
  assign rr_dftb = !is_dftb || r_dftb;
  assign rr_rep  = !is_dftb || r_rep;
  assign rr_hg   = !is_hgen || r_hg;
  assign c_r     = rr_eht && rr_dftb && rr_rep && rr_hg;

  // ---------------- pair generation ----------------
  logic  p_v, p_r, ap_v, ap_r;
  pair_t p_d, ap_d;

  pair_gen #(.N_ORB(N_ORB), .N_ATOM(N_ATOM), .MAX_GEOM(MAX_GEOM), .STRIDE(1), .PHASE(0),
             .ATOM_PAIRS(1'b1)) u_pairs (
    .clk, .rst_n, .start(go && mode != MODE_HGEN), .n_geom, .busy(pg_busy),
    .pair_valid(p_v), .pair_ready(p_r), .pair_data(p_d),
    .apair_valid(ap_v), .apair_ready(ap_r), .apair_data(ap_d));

  // ---------------- element evaluation ----------------
  logic   pr_eht, pr_dftb, ar_rep;
  logic   e_v, d_v, el_r;
  helem_t e_d, d_d;

  assign p_r  = is_eht ? pr_eht : pr_dftb;
  assign ap_r = is_dftb ? ar_rep : 1'b1;   // atom pairs are unused by EHT

  eht_eval #(.N_ORB(N_ORB)) u_eht (
    .clk, .rst_n, .orb(orb_tab),
    .coord_valid(c_v && is_eht), .coord_ready(r_eht), .coord_data(c_d),
    .pair_valid(p_v && is_eht), .pair_ready(pr_eht), .pair_data(p_d),
    .out_valid(e_v), .out_ready(el_r), .out_data(e_d));

  dftb0_eval #(.N_ORB(N_ORB), .N_GRID(N_GRID), .INV_DR(SK_INV_DR)) u_dftb0 (
    .clk, .rst_n, .orb(orb_tab),
    .tbl_we(sk_we), .tbl_addr(sk_addr), .tbl_wdata(sk_wdata),
    .coord_valid(c_v && is_dftb && rr_rep), .coord_ready(r_dftb), .coord_data(c_d),
    .pair_valid(p_v && is_dftb), .pair_ready(pr_dftb), .pair_data(p_d),
    .out_valid(d_v), .out_ready(el_r), .out_data(d_d));

  // ---------------- repulsive potential ----------------
  logic er_v, er_r;
  fx_t  er_d;

  rep_eval #(.N_ORB(N_ORB), .N_ATOM(N_ATOM), .N_SEG(N_SEG), .INV_DR(REP_INV_DR)) u_rep (
    .clk, .rst_n, .orb(orb_tab),
    .coef_we(rep_we), .coef_addr(rep_addr), .coef_wdata(rep_wdata),
    .coord_valid(c_v && is_dftb && rr_dftb), .coord_ready(r_rep), .coord_data(c_d),
    .apair_valid(ap_v && is_dftb), .apair_ready(ar_rep), .apair_data(ap_d),
    .erep_valid(er_v), .erep_ready(er_r), .erep_data(er_d));

  // ---------------- assembly, diagonalisation, energy ----------------
  logic   h_full, h_rel;
  idx_t   h_ri, h_rj;
  fx_t    h_rd;
  logic   ev_v, ev_r, ev_last;
  fx_t    ev_d;

  ham_assembly #(.N_ORB(N_ORB)) u_asm (
    .clk, .rst_n,
    .in_valid(is_eht ? e_v : (is_dftb && d_v)), .in_ready(el_r),
    .in_data(is_eht ? e_d : d_d),
    .full(h_full), .release_mat(h_rel), .rd_i(h_ri), .rd_j(h_rj), .rd_data(h_rd));

  jacobi_eig #(.N_ORB(N_ORB), .MAX_SWEEPS(MAX_SWEEPS)) u_jac (
    .clk, .rst_n,
    .mat_full(h_full), .mat_release(h_rel), .mat_rd_i(h_ri), .mat_rd_j(h_rj),
    .mat_rd_data(h_rd),
    .eval_valid(ev_v), .eval_ready(ev_r), .eval_data(ev_d), .eval_last(ev_last),
    .vec_row, .vec_col, .vec_data,
    .sweeps(jac_sweeps), .rotations(jac_rotations), .busy(jac_busy));

  energy_eval #(.N_ORB(N_ORB)) u_energy (
    .clk, .rst_n, .use_rep(is_dftb), .n_occ,
    .eval_valid(ev_v), .eval_ready(ev_r), .eval_data(ev_d), .eval_last(ev_last),
    .erep_valid(er_v), .erep_ready(er_r), .erep_data(er_d),
    .energy_valid, .energy_ready, .energy_data);

  // ---------------- stand-alone Hamiltonian generator ----------------
  hgen_standalone #(.N_ORB(N_ORB), .MAX_GEOM(MAX_GEOM), .N_GRID(N_GRID),
                    .INV_DR(SK_INV_DR)) u_hgen (
    .clk, .rst_n, .start(go && mode == MODE_HGEN), .n_geom, .busy(hg_busy),
    .orb(orb_tab), .tbl_we(sk_we), .tbl_addr(sk_addr), .tbl_wdata(sk_wdata),
    .coord_valid(c_v && is_hgen), .coord_ready(r_hg), .coord_data(c_d),
    .out_valid(h_valid), .out_ready(h_ready), .out_data(h_data), .out_keep(h_keep));

endmodule
