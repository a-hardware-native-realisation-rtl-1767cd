// helem_merge -- "Hamiltonian Elements Streaming" stage of the stand-alone
// generator.
//
// The two evaluation branches each produce elements of alternate positions of
// the flat pair order: the even branch positions 0, 2, 4, ..., the odd branch
// 1, 3, 5, .... This stage joins them into one output stream whose beats carry
// two elements, {even, odd}, so the pair order of the full workflow is restored
// and both branches run at one element per cycle (two elements per output
// beat). With an odd number of pairs per geometry, the last beat of each
// geometry holds the even element only (out_keep = 2'b01). The beat format is
// this design's choice; the paper states only that the branch streams are
// merged into a single output stream.
//
// Interface: valid/ready on all three streams; a beat is formed when both
// branch elements it needs are present. Combinational from inputs to outputs
// except for the per-geometry beat counter. The even lane of out_data is the
// even input itself and out_keep[0] is always 1 (every beat holds an even
// element), so those 69 output bits are plain wires by design; the logic here
// is the joint handshake, the odd-lane select and the beat counter.
module helem_merge
  import tb_fx_pkg::*;
#(
  parameter int N_ORB = 98
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         even_valid,
  output logic         even_ready,
  input  helem_t       even_data,
  input  logic         odd_valid,
  output logic         odd_ready,
  input  helem_t       odd_data,
  output logic         out_valid,
  input  logic         out_ready,
  output helem_t [1:0] out_data,
  output logic   [1:0] out_keep
);

  localparam int NPAIR  = N_ORB*(N_ORB+1)/2;
  localparam int NBEAT  = (NPAIR+1)/2;
  localparam bit ODDEND = (NPAIR % 2) == 1;
  localparam int CW     = $clog2(NBEAT+1);

  logic [CW-1:0] beat;
  logic          last_beat, need_odd;

  assign last_beat = (beat == CW'(NBEAT-1));
  assign need_odd  = !(last_beat && ODDEND);

  assign out_valid  = even_valid && (odd_valid || !need_odd);
  assign out_data   = {need_odd ? odd_data : '0, even_data};
  assign out_keep   = {need_odd, 1'b1};
  assign even_ready = out_ready && (odd_valid || !need_odd);
  assign odd_ready  = out_ready && even_valid && need_odd;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) beat <= '0;
    else if (out_valid && out_ready) beat <= last_beat ? '0 : beat + 1'b1;
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid && out_keep[1] |-> out_data[1].i <= out_data[1].j);

endmodule
