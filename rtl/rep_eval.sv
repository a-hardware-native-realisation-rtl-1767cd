// rep_eval -- DFTB0 repulsive pair potential.
//
// The repulsive energy is E_rep = sum over distinct atom pairs of V_rep(R_ab).
// Following the published kernel, V_rep is one cubic spline on an equidistant
// grid; segment s (covering s/INV_DR <= r < (s+1)/INV_DR bohr) has coefficients
// c0..c3 and is evaluated by Horner's rule
//     V_rep(r) = c0 + r (c1 + r (c2 + r c3)),
// with r the interatomic distance as printed. The four coefficients sit in one
// on-chip memory and are read one per cycle, so the evaluator produces one
// value every four cycles. Pairs beyond the last segment contribute zero.
//
// Structure: the coordinate stream (one token per orbital) is folded into a
// per-atom coordinate/species bank through the orbital-to-atom map (two banks,
// as in the element evaluators). The atom-pair stream from pair_gen feeds a
// two-stage front end (squared distance; square root and segment index); a
// Horner engine then runs four phases per pair: read c3, then c2, c1, c0 while
// accumulating. The final multiply-add of one pair overlaps the first read of
// the next. After N_ATOM*(N_ATOM-1)/2 pairs the geometry's sum leaves on the
// erep stream (valid/ready).
//
// Coefficient memory address (this design's choice) = {pair type, segment,
// k} where pair type is 0 for H-H, 2 for H-C / C-H, 3 for C-C and k selects
// c_k. It is filled through the coef_* write port.
module rep_eval
  import tb_fx_pkg::*;
#(
  parameter int N_ORB   = 98,
  parameter int N_ATOM  = 50,
  parameter int N_SEG   = 128,
  parameter int INV_DR  = 32,
  localparam int SAW    = $clog2(N_SEG),
  localparam int CAW    = SAW + 4
) (
  input  logic           clk,
  input  logic           rst_n,
  input  orb_desc_t      orb [N_ORB],
  input  logic           coef_we,
  input  logic [CAW-1:0] coef_addr,
  input  fx_t            coef_wdata,
  input  logic           coord_valid,
  output logic           coord_ready,
  input  coord_t         coord_data,
  input  logic           apair_valid,
  output logic           apair_ready,
  input  pair_t          apair_data,
  output logic           erep_valid,
  input  logic           erep_ready,
  output fx_t            erep_data
);

  localparam int NAPAIR = N_ATOM*(N_ATOM-1)/2;
  localparam int CW     = $clog2(NAPAIR+1);
  localparam int OW     = $clog2(N_ORB);
  localparam int AW     = $clog2(N_ATOM);

  // ---------------- coefficient memory ----------------
  fx_t coef [2**CAW];
  logic [CAW-1:0] raddr;
  fx_t rdata;
  always_ff @(posedge clk) begin
    if (coef_we) coef[coef_addr] <= coef_wdata;
    rdata <= coef[raddr];
  end

  // ---------------- atom banks ----------------
  coord_t abuf [2][N_ATOM];
  logic   aspc [2][N_ATOM];
  logic [1:0] full;
  logic wb, rb;
  idx_t wcnt;
  logic [CW-1:0] pcnt;

  // front end
  logic    fa_v, fb_v;
  logic [1:0] fa_pt, fb_pt;
  fx_t     fa_r2, fb_r;
  logic [SAW-1:0] fb_seg;
  logic    fb_out;
  logic    fb_take, front_adv;

  assign front_adv   = !fb_v || fb_take;
  assign coord_ready = !full[wb];
  assign apair_ready = full[rb] && front_adv;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full <= '0; wb <= 1'b0; rb <= 1'b0; wcnt <= '0; pcnt <= '0;
    end else begin
      if (coord_valid && coord_ready) begin
        if (wcnt == idx_t'(N_ORB-1)) begin
          wcnt <= '0; full[wb] <= 1'b1; wb <= ~wb;
        end else wcnt <= wcnt + 1'b1;
      end
      if (apair_valid && apair_ready) begin
        if (pcnt == CW'(NAPAIR-1)) begin
          pcnt <= '0; full[rb] <= 1'b0; rb <= ~rb;
        end else pcnt <= pcnt + 1'b1;
      end
    end
  end

  always_ff @(posedge clk)
    if (coord_valid && coord_ready) begin
      abuf[wb][orb[wcnt[OW-1:0]].atom[AW-1:0]] <= coord_data;
      aspc[wb][orb[wcnt[OW-1:0]].atom[AW-1:0]] <= orb[wcnt[OW-1:0]].species;
    end

  // distance of the pair at the input
  coord_t ca, cb;
  fx_t    dx, dy, dz, fb_r_n, pos;
  logic   sa, sb;
  always_comb begin
    ca = abuf[rb][apair_data.i[AW-1:0]];
    cb = abuf[rb][apair_data.j[AW-1:0]];
    sa = aspc[rb][apair_data.i[AW-1:0]];
    sb = aspc[rb][apair_data.j[AW-1:0]];
    dx = cb.x - ca.x;
    dy = cb.y - ca.y;
    dz = cb.z - ca.z;
    fb_r_n = fx_sqrt(fa_r2);
    pos    = fb_r_n * fx_t'(INV_DR);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fa_v <= 1'b0; fb_v <= 1'b0; fa_pt <= '0; fb_pt <= '0;
      fa_r2 <= '0; fb_r <= '0; fb_seg <= '0; fb_out <= 1'b0;
    end else if (front_adv) begin
      fa_v   <= apair_valid && apair_ready;
      fa_pt  <= {sa | sb, sa & sb};
      fa_r2  <= fx_mul(dx, dx) + fx_mul(dy, dy) + fx_mul(dz, dz);
      fb_v   <= fa_v;
      fb_pt  <= fa_pt;
      fb_r   <= fb_r_n;
      fb_seg <= SAW'(pos >>> FX_FRAC);
      fb_out <= (pos >>> FX_FRAC) >= fx_t'(N_SEG);
    end
  end

  // ---------------- Horner engine ----------------
  logic [1:0]     ph;
  logic           act, pend_fin, out_h, out_fin;
  fx_t            r_h, acc, sum;
  logic [1:0]     pt_h;
  logic [SAW-1:0] seg_h;
  logic [CW-1:0]  done_cnt;
  logic           fin_now, geo_done;

  // a new pair starts at phase 0 when the front end has one and no finished
  // sum is waiting on the output
  assign fb_take  = fb_v && (!act || ph == 2'd3) && !erep_valid;
  assign fin_now  = pend_fin;
  assign geo_done = fin_now && (done_cnt == CW'(NAPAIR-1));

  always_comb begin
    raddr = '0;
    if (fb_take)   raddr = {fb_pt, fb_seg, 2'd3};
    else if (act)  raddr = {pt_h, seg_h, 2'(2'd2 - ph)};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph <= '0; act <= 1'b0; pend_fin <= 1'b0; out_h <= 1'b0; out_fin <= 1'b0;
      r_h <= '0; acc <= '0; sum <= '0; pt_h <= '0; seg_h <= '0; done_cnt <= '0;
      erep_valid <= 1'b0; erep_data <= '0;
    end else begin
      if (erep_valid && erep_ready) erep_valid <= 1'b0;
      // phase 0 of the next pair finishes the previous one: c0 + r*acc
      pend_fin <= 1'b0;
      if (fin_now) begin
        if (geo_done) begin
          erep_data  <= sum + (out_fin ? '0 : rdata + fx_mul(r_h, acc));
          erep_valid <= 1'b1;
          sum        <= '0;
          done_cnt   <= '0;
        end else begin
          sum      <= sum + (out_fin ? '0 : rdata + fx_mul(r_h, acc));
          done_cnt <= done_cnt + 1'b1;
        end
      end
      if (act) begin
        unique case (ph)
          2'd0: acc <= rdata;                       // c3
          2'd1: acc <= rdata + fx_mul(r_h, acc);    // c2 + r c3
          2'd2: acc <= rdata + fx_mul(r_h, acc);    // c1 + r (...)
          default: ;
        endcase
        ph <= ph + 2'd1;
        if (ph == 2'd2) begin pend_fin <= 1'b1; out_fin <= out_h; end
        if (ph == 2'd3) act <= 1'b0;
      end
      if (fb_take) begin
        act   <= 1'b1;
        ph    <= 2'd0;
        r_h   <= fb_r;
        pt_h  <= fb_pt;
        seg_h <= fb_out ? '0 : fb_seg;
        out_h <= fb_out;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   erep_valid && !erep_ready |=> erep_valid && $stable(erep_data));

endmodule
