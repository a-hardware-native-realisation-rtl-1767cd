// pair_gen -- "Pairs Generation" stage.
//
// Replaces the nested loop over orbital indices by a flat stream of
// upper-triangle index pairs (i, j), i <= j < N_ORB, one per cycle, repeated
// for each of n_geom geometries. Two walking rules are provided, both taken
// from the published kernels:
//   STRIDE = 1 (full workflow): start (0,0); j++, and when j reaches N_ORB,
//     i++ and j = i. NPAIR = N_ORB*(N_ORB+1)/2 pairs per geometry.
//   STRIDE = 2 (replicated generator): every second pair of that flat order,
//     starting at (0,0) for PHASE = 0 (even) or (0,1) for PHASE = 1 (odd):
//     if j < N-2 then j += 2; if j == N-2 then i++, j = i; else i++, j = i+1.
//     The even branch emits ceil(NPAIR/2) pairs, the odd branch floor(NPAIR/2),
//     so the two branches cover disjoint halves of the pairs.
// With ATOM_PAIRS = 1 a second, independent stream carries the distinct atom
// pairs (a, b), a < b < N_ATOM, for the repulsive potential, also one per
// cycle. Both outputs are valid/ready streams with registered outputs; busy
// stays high until both streams have delivered every pair of every geometry.
module pair_gen
  import tb_fx_pkg::*;
#(
  parameter int N_ORB      = 98,
  parameter int N_ATOM     = 50,
  parameter int MAX_GEOM   = 10,
  parameter int STRIDE     = 1,
  parameter int PHASE      = 0,
  parameter bit ATOM_PAIRS = 1'b1,
  localparam int GW        = $clog2(MAX_GEOM+1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [GW-1:0] n_geom,
  output logic          busy,
  output logic          pair_valid,
  input  logic          pair_ready,
  output pair_t         pair_data,
  output logic          apair_valid,
  input  logic          apair_ready,
  output pair_t         apair_data
);

  localparam int NPAIR  = N_ORB*(N_ORB+1)/2;
  localparam int NCOUNT = (STRIDE == 1) ? NPAIR :
                          (PHASE == 0) ? (NPAIR+1)/2 : NPAIR/2;
  localparam int NAPAIR = ATOM_PAIRS ? N_ATOM*(N_ATOM-1)/2 : 0;
  localparam int CW     = $clog2(NPAIR+2);
  localparam idx_t R2   = idx_t'(N_ORB-2);

  // ---------------- orbital pairs ----------------
  logic          o_run;
  logic [CW-1:0] o_cnt;
  logic [GW-1:0] o_geo, n_geom_r;
  idx_t          oi, oj;
  logic          o_adv;

  assign o_adv = o_run && (!pair_valid || pair_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      o_run <= 1'b0; o_cnt <= '0; o_geo <= '0; n_geom_r <= '0;
      oi <= '0; oj <= '0;
      pair_valid <= 1'b0; pair_data <= '0;
    end else begin
      if (pair_valid && pair_ready) pair_valid <= 1'b0;
      if (start && !busy && n_geom != '0) begin
        o_run <= (NCOUNT > 0); o_cnt <= '0; o_geo <= '0; n_geom_r <= n_geom;
        oi <= '0; oj <= idx_t'(PHASE);
      end else if (o_adv) begin
        pair_valid <= 1'b1;
        pair_data  <= '{i: oi, j: oj};
        if (o_cnt == CW'(NCOUNT-1)) begin
          o_cnt <= '0;
          oi <= '0; oj <= idx_t'(PHASE);
          if (o_geo == n_geom_r - 1'b1) o_run <= 1'b0;
          o_geo <= o_geo + 1'b1;
        end else begin
          o_cnt <= o_cnt + 1'b1;
          if (STRIDE == 1) begin
            if (oj == idx_t'(N_ORB-1)) begin oi <= oi + 1'b1; oj <= oi + 1'b1; end
            else oj <= oj + 1'b1;
          end else begin
            if (oj < R2)       oj <= oj + idx_t'(2);
            else if (oj == R2) begin oi <= oi + 1'b1; oj <= oi + 1'b1; end
            else               begin oi <= oi + 1'b1; oj <= oi + idx_t'(2); end
          end
        end
      end
    end
  end

  // ---------------- atom pairs ----------------
  logic          a_run;
  logic [CW-1:0] a_cnt;
  logic [GW-1:0] a_geo;
  idx_t          aa, ab;
  logic          a_adv;

  assign a_adv = a_run && (!apair_valid || apair_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_run <= 1'b0; a_cnt <= '0; a_geo <= '0;
      aa <= '0; ab <= '0;
      apair_valid <= 1'b0; apair_data <= '0;
    end else begin
      if (apair_valid && apair_ready) apair_valid <= 1'b0;
      if (start && !busy && n_geom != '0) begin
        a_run <= (NAPAIR > 0); a_cnt <= '0; a_geo <= '0;
        aa <= '0; ab <= idx_t'(1);
      end else if (a_adv) begin
        apair_valid <= 1'b1;
        apair_data  <= '{i: aa, j: ab};
        if (a_cnt == CW'(NAPAIR-1)) begin
          a_cnt <= '0;
          aa <= '0; ab <= idx_t'(1);
          if (a_geo == n_geom_r - 1'b1) a_run <= 1'b0;
          a_geo <= a_geo + 1'b1;
        end else begin
          a_cnt <= a_cnt + 1'b1;
          if (ab == idx_t'(N_ATOM-1)) begin aa <= aa + 1'b1; ab <= aa + idx_t'(2); end
          else ab <= ab + 1'b1;
        end
      end
    end
  end

  assign busy = o_run || a_run || pair_valid || apair_valid;

  assert property (@(posedge clk) disable iff (!rst_n)
                   pair_valid && !pair_ready |=> pair_valid && $stable(pair_data));
  assert property (@(posedge clk) disable iff (!rst_n)
                   pair_valid |-> pair_data.i <= pair_data.j && pair_data.j < idx_t'(N_ORB));

endmodule
