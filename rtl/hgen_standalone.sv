// hgen_standalone -- stand-alone DFTB0 Hamiltonian generator.
//
// The throughput configuration of the design: with no diagonaliser on the
// device, pair generation and element evaluation are duplicated. The even
// branch handles positions 0, 2, 4, ... of the flat upper-triangle pair order,
// the odd branch positions 1, 3, 5, ...; the incoming coordinate stream is
// broadcast to both evaluators, and helem_merge joins the two element streams
// into one output stream of two-element beats. Both branches run at one
// element per cycle, so a geometry's NPAIR = N_ORB*(N_ORB+1)/2 elements leave in
// about NPAIR/2 cycles after the pipeline has filled. The structure follows
// the published dataflow graph; the beat format is this design's choice.
//
// Interface: start/n_geom start both pair generators for n_geom geometries;
// the caller supplies N_ORB coordinate tokens per geometry on the coordinate
// stream; the Slater-Koster table write port is shared by both evaluators
// (each keeps its own copy, as replicated hardware would). busy is high while
// pairs remain to be generated. out_keep[0] is constant 1 (see helem_merge).
module hgen_standalone
  import tb_fx_pkg::*;
#(
  parameter int N_ORB    = 98,
  parameter int MAX_GEOM = 10,
  parameter int N_GRID   = 512,
  parameter int INV_DR   = 50,
  localparam int GW      = $clog2(MAX_GEOM+1),
  localparam int TAW     = $clog2(N_GRID) + 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [GW-1:0]     n_geom,
  output logic              busy,
  input  orb_desc_t         orb [N_ORB],
  input  logic              tbl_we,
  input  logic [TAW-1:0]    tbl_addr,
  input  logic [4*FX_W-1:0] tbl_wdata,
  input  logic              coord_valid,
  output logic              coord_ready,
  input  coord_t            coord_data,
  output logic              out_valid,
  input  logic              out_ready,
  output helem_t [1:0]      out_data,
  output logic   [1:0]      out_keep
);

  logic   busy_e, busy_o;
  logic   pe_v, pe_r, po_v, po_r;
  pair_t  pe_d, po_d;
  logic   ce_r, co_r;
  logic   he_v, he_r, ho_v, ho_r;
  helem_t he_d, ho_d;
  logic   unused_av_e, unused_av_o;
  pair_t  unused_ad_e, unused_ad_o;

  assign busy        = busy_e || busy_o;
  assign coord_ready = ce_r && co_r;

  pair_gen #(.N_ORB(N_ORB), .N_ATOM(2), .MAX_GEOM(MAX_GEOM), .STRIDE(2), .PHASE(0),
             .ATOM_PAIRS(1'b0)) u_pairs_even (
    .clk, .rst_n, .start, .n_geom, .busy(busy_e),
    .pair_valid(pe_v), .pair_ready(pe_r), .pair_data(pe_d),
    .apair_valid(unused_av_e), .apair_ready(1'b1), .apair_data(unused_ad_e));

  pair_gen #(.N_ORB(N_ORB), .N_ATOM(2), .MAX_GEOM(MAX_GEOM), .STRIDE(2), .PHASE(1),
             .ATOM_PAIRS(1'b0)) u_pairs_odd (
    .clk, .rst_n, .start, .n_geom, .busy(busy_o),
    .pair_valid(po_v), .pair_ready(po_r), .pair_data(po_d),
    .apair_valid(unused_av_o), .apair_ready(1'b1), .apair_data(unused_ad_o));

  dftb0_eval #(.N_ORB(N_ORB), .N_GRID(N_GRID), .INV_DR(INV_DR),
               .STRIDE(2), .PHASE(0)) u_eval_even (
    .clk, .rst_n, .orb, .tbl_we, .tbl_addr, .tbl_wdata,
    .coord_valid(coord_valid && co_r), .coord_ready(ce_r), .coord_data,
    .pair_valid(pe_v), .pair_ready(pe_r), .pair_data(pe_d),
    .out_valid(he_v), .out_ready(he_r), .out_data(he_d));

  dftb0_eval #(.N_ORB(N_ORB), .N_GRID(N_GRID), .INV_DR(INV_DR),
               .STRIDE(2), .PHASE(1)) u_eval_odd (
    .clk, .rst_n, .orb, .tbl_we, .tbl_addr, .tbl_wdata,
    .coord_valid(coord_valid && ce_r), .coord_ready(co_r), .coord_data,
    .pair_valid(po_v), .pair_ready(po_r), .pair_data(po_d),
    .out_valid(ho_v), .out_ready(ho_r), .out_data(ho_d));

  helem_merge #(.N_ORB(N_ORB)) u_merge (
    .clk, .rst_n,
    .even_valid(he_v), .even_ready(he_r), .even_data(he_d),
    .odd_valid(ho_v), .odd_ready(ho_r), .odd_data(ho_d),
    .out_valid, .out_ready, .out_data, .out_keep);

endmodule
